// tb_bch_encoder: checks the 32-bit-parallel BCH encoder against a bit-serial
// division by g(x) written here, and checks that every codeword it produces is a
// zero of the first odd syndromes (r(alpha^j) = 0 for j = 1, 3, 5, 7), using a
// GF(2^14) multiply written independently of the design's package function.
// Messages: all-zero, all-one, single bits and random words; back-to-back codewords
// with idle cycles in between.
module tb_bch_encoder;
  timeunit 1ns; timeprecision 100ps;
  import kvnand_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic        start = 1'b0, in_valid = 1'b0;
  word_t       in_data = '0;
  logic [4:0]  par_idx = '0;
  word_t       par_word;
  logic [BCH_P-1:0] parity;
  int checks = 0, failures = 0;

  bch_encoder dut (.*);

  word_t msg [CW_DATA_WORDS];

  function automatic logic [13:0] mul(logic [13:0] a, logic [13:0] b);
    logic [27:0] p;
    p = '0;
    for (int i = 0; i < 14; i++) if (b[i]) p ^= 28'(a) << i;
    for (int i = 27; i >= 14; i--) if (p[i]) p ^= 28'(15'h4443) << (i - 14);
    return p[13:0];
  endfunction
  function automatic logic [13:0] alpha_pow(int e);
    logic [13:0] r;
    r = 14'd1;
    for (int i = 0; i < e; i++) r = mul(r, 14'd2);
    return r;
  endfunction

  function automatic logic [BCH_P-1:0] ref_parity();
    logic [BCH_P-1:0] rem;
    logic fb;
    rem = '0;
    for (int w = 0; w < CW_DATA_WORDS; w++)
      for (int b = 31; b >= 0; b--) begin
        fb  = msg[w][b] ^ rem[BCH_P-1];
        rem = rem << 1;
        if (fb) rem ^= BCH_GEN[BCH_P-1:0];
      end
    return rem;
  endfunction

  // r(alpha^j) with r's first stream bit the coefficient of x^(n-1)
  function automatic logic [13:0] syndrome(int j, logic [BCH_P-1:0] par);
    logic [13:0] s, aj;
    aj = alpha_pow(j);
    s  = '0;
    for (int w = 0; w < CW_DATA_WORDS; w++)
      for (int b = 31; b >= 0; b--) s = mul(s, aj) ^ 14'(msg[w][b]);
    for (int i = BCH_P - 1; i >= 0; i--) s = mul(s, aj) ^ 14'(par[i]);
    return s;
  endfunction

  task automatic run_codeword(int kind);
    logic [BCH_P-1:0] exp_p;
    for (int w = 0; w < CW_DATA_WORDS; w++)
      case (kind)
        0: msg[w] = '0;
        1: msg[w] = '1;
        2: msg[w] = (w == 17) ? 32'h0001_0000 : '0;
        default: msg[w] = $urandom;
      endcase
    exp_p = ref_parity();
    @(negedge clk);
    for (int w = 0; w < CW_DATA_WORDS; w++) begin
      start    = (w == 0);
      in_valid = 1'b1;
      in_data  = msg[w];
      @(negedge clk);
      // an idle cycle now and then
      if ($urandom % 8 == 0) begin
        start = 1'b0; in_valid = 1'b0;
        @(negedge clk);
      end
    end
    start = 1'b0; in_valid = 1'b0;
    checks++;
    if (parity !== exp_p) begin
      failures++;
      $display("codeword kind %0d: parity mismatch", kind);
    end
    for (int i = 0; i < CW_PAR_WORDS; i++) begin
      par_idx = 5'(i);
      #0.5;
      checks++;
      if (par_word !== exp_p[BCH_P-1-32*i -: 32]) begin
        failures++;
        $display("codeword kind %0d: parity word %0d mismatch", kind, i);
      end
    end
    if (kind >= 2 && kind <= 4) begin
      for (int j = 1; j <= 7; j += 2) begin
        checks++;
        if (syndrome(j, parity) != '0) begin
          failures++;
          $display("codeword kind %0d: S%0d non-zero", kind, j);
        end
      end
    end
  endtask

  initial begin
    #10000000;
    $display("watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 10; k++) run_codeword(k);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
