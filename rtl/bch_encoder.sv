// bch_encoder: systematic encoder for the BCH(9088, 8192, 64) code that protects each
// 1 KB sector of a flash page (four codewords per 4 KB page, 4 x 112 B = 448 B parity,
// matching the page's spare area).
//
// It divides d(x) * x^896 by the generator polynomial g(x) with an 896-bit LFSR that
// advances WIDTH message bits per cycle, most significant bit of each word first.
// After 8192 message bits the remainder is the parity; par_word(i) is parity bits
// [895-32i -: 32], sent in that order after the data. g(x) is the least common
// multiple of the minimal polynomials of alpha^1..alpha^128 in GF(2^14).
// The code parameters are the paper's; the bit order, the 32-bit width and one word
// per cycle (256 cycles per codeword, 12.8 Gb/s at 400 MHz) are this design's choices.
// Interface: start clears the LFSR (and may carry the first word); each in_valid
// word is absorbed in that cycle; parity is valid from the cycle after the last word.
module bch_encoder
  import kvnand_pkg::*;
#(
  parameter int unsigned WIDTH = WORD_BITS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             in_valid,
  input  logic [WIDTH-1:0] in_data,
  input  logic [4:0]       par_idx,
  output logic [WIDTH-1:0] par_word,
  output logic [BCH_P-1:0] parity
);
  logic [BCH_P-1:0] lfsr_next;

  always_comb begin
    logic [BCH_P-1:0] r;
    logic fb;
    r = start ? '0 : parity;
    for (int i = WIDTH - 1; i >= 0; i--) begin
      fb = in_data[i] ^ r[BCH_P-1];
      r  = {r[BCH_P-2:0], 1'b0} ^ (fb ? BCH_GEN[BCH_P-1:0] : '0);
    end
    lfsr_next = r;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        parity <= '0;
    else if (in_valid) parity <= lfsr_next;
    else if (start)    parity <= '0;
  end

  assign par_word = parity[BCH_P-1 - WIDTH*int'(par_idx) -: WIDTH];
endmodule
