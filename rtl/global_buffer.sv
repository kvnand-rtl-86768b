// global_buffer: the die-level SRAM buffer (260 KB) that holds the PE results
// collected from all planes until the SoC reads them over the channel, before they
// are sent on as Q/K/V results or attention partial sums.
//
// A simple dual-port memory of 32-bit words: one synchronous write port (the die's
// result collector) and one read port with one cycle of latency (the channel).
// The capacity is the paper's; the organisation is this design's choice, standing in
// for a compiled SRAM macro.
module global_buffer
  import kvnand_pkg::*;
#(
  parameter int unsigned BYTES = 260 * 1024,
  localparam int unsigned WORDS = BYTES / 4,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  word_t         wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output word_t         rdata
);
  word_t mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
