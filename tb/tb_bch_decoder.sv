// tb_bch_decoder: encodes random 4 KB pages with a bit-serial reference encoder,
// flips a chosen number of distinct random bits in each 1 KB codeword (data or
// parity area), runs the decoder on a cache-register model (combinational read,
// XOR fix port) and checks that the page is restored and n_corr equals the number of
// flipped bits. Error counts cover 0, 1, 2, a few, and the limit 64; one page with 80
// errors in a codeword must be flagged uncorrectable. Also checks that an error-free
// page is done in 4 x 284 syndrome cycles plus a few control cycles.
module tb_bch_decoder;
  timeunit 1ns; timeprecision 100ps;
  import kvnand_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic       start = 1'b0;
  logic       busy, done, uncorrectable, fix_we;
  logic [8:0] n_corr;
  col_t       rd_addr, fix_addr;
  word_t      rd_data, fix_mask;
  int checks = 0, failures = 0;

  word_t mem  [PAGE_WORDS];
  word_t gold [PAGE_WORDS];
  assign rd_data = mem[rd_addr];
  always @(posedge clk) if (fix_we) mem[fix_addr] <= mem[fix_addr] ^ fix_mask;

  bch_decoder dut (.*);

  function automatic int stream_word(int c, int bit_idx);
    // word address of stream bit bit_idx of codeword c
    if (bit_idx < 8192) return c * CW_DATA_WORDS + bit_idx / 32;
    return DATA_WORDS + c * CW_PAR_WORDS + (bit_idx - 8192) / 32;
  endfunction

  task automatic make_page();
    logic [BCH_P-1:0] rem;
    logic fb;
    for (int w = 0; w < DATA_WORDS; w++) gold[w] = $urandom;
    for (int c = 0; c < CW_PER_PAGE; c++) begin
      rem = '0;
      for (int w = 0; w < CW_DATA_WORDS; w++)
        for (int b = 31; b >= 0; b--) begin
          fb  = gold[c * CW_DATA_WORDS + w][b] ^ rem[BCH_P-1];
          rem = rem << 1;
          if (fb) rem ^= BCH_GEN[BCH_P-1:0];
        end
      for (int i = 0; i < CW_PAR_WORDS; i++)
        gold[DATA_WORDS + c * CW_PAR_WORDS + i] = rem[BCH_P-1-32*i -: 32];
    end
    for (int w = 0; w < PAGE_WORDS; w++) mem[w] = gold[w];
  endtask

  task automatic flip(int c, int n);
    int used [int];
    int p;
    for (int e = 0; e < n; e++) begin
      do p = int'($urandom % BCH_N); while (used.exists(p));
      used[p] = 1;
      mem[stream_word(c, p)][31 - p % 32] ^= 1'b1;
    end
  endtask

  task automatic run_page(int n0, int n1, int n2, int n3, bit expect_unc);
    int t0, cyc, total;
    make_page();
    flip(0, n0); flip(1, n1); flip(2, n2); flip(3, n3);
    total = n0 + n1 + n2 + n3;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (uncorrectable !== expect_unc) begin
      failures++;
      $display("page (%0d,%0d,%0d,%0d): uncorrectable=%b", n0, n1, n2, n3, uncorrectable);
    end
    if (!expect_unc) begin
      checks++;
      if (int'(n_corr) != total) begin
        failures++;
        $display("page (%0d,%0d,%0d,%0d): n_corr=%0d", n0, n1, n2, n3, n_corr);
      end
      for (int w = 0; w < PAGE_WORDS; w++) begin
        checks++;
        if (mem[w] !== gold[w]) begin
          failures++;
          if (failures < 10) $display("word %0d not restored", w);
        end
      end
    end
    if (total == 0) begin
      checks++;
      if (cyc > 4 * 284 + 16) begin
        failures++;
        $display("error-free page took %0d cycles", cyc);
      end
    end
  endtask

  initial begin
    #4000000;
    $display("watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run_page(0, 0, 0, 0, 0);
    run_page(1, 0, 0, 0, 0);
    run_page(0, 2, 0, 1, 0);
    run_page(5, 9, 17, 3, 0);
    run_page(64, 0, 33, 64, 0);
    run_page(0, 80, 0, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
