// tb_block_manager: checks access-aware allocation on a small configuration
// (2 planes x 12 blocks, read limit 50, P/E limit 3) against a reference of block
// states and counters: every grant is a free block under the P/E limit, grants start
// at different blocks (randomised placement), a plane with no free block fails
// after BLOCKS search cycles, releases free blocks and retire worn-out ones, page
// reads raise a refresh request for the block that reaches the read limit.
module tb_block_manager;
  timeunit 1ns; timeprecision 100ps;
  import kvnand_pkg::*;
  localparam int P = 2, B = 12, RL = 50, PL = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic       alloc_req = 0, rel_req = 0, refresh_ack = 0;
  logic       alloc_plane = 0, rel_plane = 0;
  blk_t       rel_blk = '0;
  logic       rd_note [P];
  blk_t       rd_blk  [P];
  logic       alloc_gnt, alloc_fail, refresh_valid, busy;
  blk_t       alloc_blk, refresh_blk;
  logic       refresh_plane;
  int checks = 0, failures = 0;

  block_manager #(.PLANES(P), .BLOCKS(B), .READ_LIMIT(RL), .PE_LIMIT(PL)) dut (.*);

  int used [P][B];    // 0 free, 1 used, 2 retired
  int pe   [P][B];
  int firsts [int];

  task automatic alloc(int p, output int blk, output bit ok);
    @(negedge clk);
    alloc_req = 1; alloc_plane = p[0];
    do @(negedge clk); while (!alloc_gnt && !alloc_fail);
    alloc_req = 0;
    ok  = alloc_gnt;
    blk = int'(alloc_blk);
  endtask

  task automatic release_blk(int p, int b);
    @(negedge clk);
    rel_req = 1; rel_plane = p[0]; rel_blk = blk_t'(b);
    @(negedge clk);
    rel_req = 0;
    used[p][b] = (pe[p][b] >= PL) ? 2 : 0;
  endtask

  initial begin
    #2000000;
    $display("watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int b;
    bit ok;
    int nfree;
    for (int p = 0; p < P; p++) begin rd_note[p] = 0; rd_blk[p] = '0; end
    for (int p = 0; p < P; p++) for (int k = 0; k < B; k++) begin used[p][k] = 0; pe[p][k] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // allocate, release, repeat: wear spreads and blocks retire at the P/E limit
    for (int it = 0; it < 60; it++) begin
      int p;
      p = int'($urandom % P);
      nfree = 0;
      for (int k = 0; k < B; k++) if (used[p][k] == 0) nfree++;
      alloc(p, b, ok);
      checks++;
      if (ok != (nfree > 0)) begin
        failures++;
        $display("plane %0d: grant=%b with %0d free blocks", p, ok, nfree);
      end
      if (ok) begin
        checks++;
        if (used[p][b] != 0) begin
          failures++;
          $display("plane %0d: granted block %0d in state %0d", p, b, used[p][b]);
        end
        used[p][b] = 1;
        pe[p][b]++;
        firsts[b] = 1;
        if ($urandom % 2) release_blk(p, b);
      end
    end
    checks++;
    if (firsts.num() < 4) begin
      failures++;
      $display("allocations not spread: %0d distinct blocks", firsts.num());
    end
    // counters seen through the read-only view match the reference
    for (int p = 0; p < P; p++)
      for (int k = 0; k < B; k++) begin
        checks++;
        if (int'(dut.pe_count(p, k)) != pe[p][k]) begin
          failures++;
          $display("P/E count plane %0d block %0d: %0d vs %0d", p, k, dut.pe_count(p, k), pe[p][k]);
        end
      end
    // read disturbance: block 5 of plane 1 read RL times
    @(negedge clk);
    for (int i = 0; i < RL - 1; i++) begin
      rd_note[1] = 1; rd_blk[1] = 5;
      rd_note[0] = ($urandom % 2); rd_blk[0] = blk_t'(i % 4);
      @(negedge clk);
    end
    rd_note[0] = 0;
    checks++;
    if (refresh_valid) begin
      failures++;
      $display("refresh before the limit");
    end
    rd_note[1] = 1; rd_blk[1] = 5;
    @(negedge clk);
    rd_note[1] = 0;
    checks++;
    if (!refresh_valid || refresh_plane != 1 || refresh_blk != 5) begin
      failures++;
      $display("no refresh at the read limit (%b %0d %0d)", refresh_valid, refresh_plane, refresh_blk);
    end
    refresh_ack = 1;
    @(negedge clk);
    refresh_ack = 0;
    checks++;
    if (refresh_valid) begin
      failures++;
      $display("refresh not cleared");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
