// tb_page_register: checks the two-stage register against a reference model of the
// two buffers. Pages of random words are written by an array model into the data
// register; the test checks the data-to-cache move happens exactly when the cache is
// free, that a second page can be sensed while the first sits in the cache register
// (pipelining), the XOR fix port, the logic-side write port with cache_load, and the
// array read-back port.
module tb_page_register;
  timeunit 1ns; timeprecision 100ps;
  import kvnand_pkg::*;
  localparam int W = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic  arr_we = 0, arr_done = 0, fix_we = 0, wr_we = 0, cache_load = 0, cache_release = 0;
  col_t  arr_addr = '0, arr_rd_addr = '0, rd_addr = '0, fix_addr = '0, wr_addr = '0;
  word_t arr_wdata = '0, fix_mask = '0, wr_data = '0;
  word_t arr_rdata, rd_data;
  logic  data_valid, cache_valid, xfer;
  int checks = 0, failures = 0, n_xfer = 0;

  page_register #(.WORDS(W)) dut (.*);

  word_t pg [2][W];
  word_t ref_cache [W];

  always @(posedge clk) if (xfer) n_xfer++;

  task automatic sense(int k);
    for (int i = 0; i < W; i++) begin
      pg[k][i] = $urandom;
      arr_we = 1; arr_addr = col_t'(i); arr_wdata = pg[k][i]; arr_done = (i == W - 1);
      @(negedge clk);
    end
    arr_we = 0; arr_done = 0;
  endtask

  task automatic check_cache(string what);
    for (int i = 0; i < W; i++) begin
      rd_addr = col_t'(i);
      #0.2;
      checks++;
      if (rd_data !== ref_cache[i]) begin
        failures++;
        if (failures < 10) $display("%s: word %0d got %h exp %h", what, i, rd_data, ref_cache[i]);
      end
    end
  endtask

  initial begin
    #200000;
    $display("watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
    // page 0: moves to the cache register right away
    sense(0);
    @(negedge clk);
    checks++;
    if (!cache_valid || data_valid || n_xfer != 1) begin
      failures++;
      $display("page 0 not moved: cache_valid=%b data_valid=%b xfers=%0d", cache_valid, data_valid, n_xfer);
    end
    for (int i = 0; i < W; i++) ref_cache[i] = pg[0][i];
    check_cache("page 0");
    // page 1 sensed while page 0 is held: stays in the data register
    sense(1);
    repeat (3) @(negedge clk);
    checks++;
    if (!data_valid || n_xfer != 1) begin
      failures++;
      $display("page 1 moved over a busy cache register");
    end
    check_cache("page 0 held");
    // fix two bits in page 0
    for (int k = 0; k < 5; k++) begin
      int a;
      word_t m;
      a = int'($urandom % W);
      m = word_t'(1) << ($urandom % 32);
      fix_we = 1; fix_addr = col_t'(a); fix_mask = m;
      ref_cache[a] ^= m;
      @(negedge clk);
    end
    fix_we = 0;
    check_cache("fixed");
    // release: page 1 moves in
    cache_release = 1;
    @(negedge clk);
    cache_release = 0;
    @(negedge clk);
    checks++;
    if (!cache_valid || data_valid || n_xfer != 2) begin
      failures++;
      $display("page 1 not moved after release");
    end
    for (int i = 0; i < W; i++) ref_cache[i] = pg[1][i];
    check_cache("page 1");
    cache_release = 1;
    @(negedge clk);
    cache_release = 0;
    // program path: logic writes the cache register, array reads it back
    for (int i = 0; i < W; i++) begin
      ref_cache[i] = $urandom;
      wr_we = 1; wr_addr = col_t'(i); wr_data = ref_cache[i]; cache_load = (i == W - 1);
      @(negedge clk);
    end
    wr_we = 0; cache_load = 0;
    checks++;
    if (!cache_valid) begin
      failures++;
      $display("cache_load did not claim the register");
    end
    for (int i = 0; i < W; i++) begin
      arr_rd_addr = col_t'(i);
      #0.2;
      checks++;
      if (arr_rdata !== ref_cache[i]) begin
        failures++;
        $display("read-back word %0d", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
