// tb_kv_buffer: appends random K/V words to random slots of a small buffer
// (4 slots x 256 words, the per-plane slot size) and checks every flush against a
// reference: the words of one slot in append order, one flush per full slot, and the
// page-level mapping (first flush of a slot allocates a block; column advances by
// 256 words per flush, page by one per 4 KB, new block after 768 pages, simulated by
// a slot filled 768 x 4 + 1 times). The allocator answers after a random delay and
// the flush sink applies random back-pressure.
module tb_kv_buffer;
  timeunit 1ns; timeprecision 100ps;
  import kvnand_pkg::*;
  localparam int SLOTS = 4, SW = 256;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic        in_valid = 0, fl_ready = 1, alloc_gnt = 0;
  logic [1:0]  in_slot = '0;
  word_t       in_data = '0;
  blk_t        alloc_blk = '0;
  logic        in_ready, fl_valid, fl_first, fl_last, alloc_req;
  logic [1:0]  fl_slot;
  blk_t        fl_blk;
  page_t       fl_page;
  col_t        fl_col;
  word_t       fl_data;
  logic [31:0] n_flushes;
  logic        pending;
  int checks = 0, failures = 0;

  kv_buffer #(.BUF_WORDS(SLOTS * SW), .SLOTS(SLOTS)) dut (.*);

  word_t q [SLOTS][$];            // words appended, not yet flushed
  int    flushes [SLOTS];
  int    cur_blk [SLOTS];
  int    n_alloc = 0;
  int    next_blk = 5;

  // allocator
  always @(negedge clk) begin
    alloc_gnt = 0;
    if (alloc_req && ($urandom % 4 == 0)) begin
      alloc_gnt = 1;
      alloc_blk = blk_t'(next_blk);
    end
  end
  always @(posedge clk) if (alloc_gnt) begin
    n_alloc++;
    next_blk = (next_blk + 7) % BLOCKS_PER_PLANE;
  end

  // flush checker
  int fw = 0;
  always @(negedge clk) begin
    fl_ready = ($urandom % 3) != 0;
  end
  always @(posedge clk) if (fl_valid && fl_ready) begin
    int s, f;
    word_t e;
    s = int'(fl_slot);
    f = flushes[s];
    if (fw == 0) begin
      // mapping of this flush
      if (f % (PAGES_PER_BLOCK * 4) == 0) cur_blk[s] = int'(fl_blk);
      checks++;
      if (!fl_first || int'(fl_col) != (f % 4) * SW || int'(fl_page) != (f / 4) % PAGES_PER_BLOCK
          || int'(fl_blk) != cur_blk[s]) begin
        failures++;
        $display("slot %0d flush %0d: first=%b blk %0d page %0d col %0d", s, f, fl_first,
                 fl_blk, fl_page, fl_col);
      end
    end
    e = q[s].pop_front();
    checks++;
    if (fl_data !== e) begin
      failures++;
      if (failures < 10) $display("slot %0d word %0d: got %h exp %h", s, fw, fl_data, e);
    end
    checks++;
    if (fl_last !== (fw == SW - 1)) begin
      failures++;
      $display("fl_last at word %0d", fw);
    end
    if (fw == SW - 1) begin
      fw = 0;
      flushes[s]++;
    end else fw++;
  end

  initial begin
    #40000000;
    $display("watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put(int s);
    in_valid = 1; in_slot = 2'(s); in_data = $urandom;
    while (!in_ready) @(negedge clk);
    q[s].push_back(in_data);
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    for (int s = 0; s < SLOTS; s++) begin flushes[s] = 0; cur_blk[s] = -1; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // mixed traffic
    for (int i = 0; i < 6000; i++) put(int'($urandom % SLOTS));
    // slot 3 through a whole block and into the next
    for (int i = 0; i < (PAGES_PER_BLOCK * 4 + 1) * SW; i++) put(3);
    repeat (2000) @(negedge clk);
    checks++;
    if (int'(n_flushes) != flushes[0] + flushes[1] + flushes[2] + flushes[3]) begin
      failures++;
      $display("n_flushes %0d", n_flushes);
    end
    // blocks: one per slot that flushed, plus one for slot 3's second block
    checks++;
    if (n_alloc != ((flushes[0] > 0) + (flushes[1] > 0) + (flushes[2] > 0) + 2)) begin
      failures++;
      $display("allocations %0d", n_alloc);
    end
    for (int s = 0; s < SLOTS; s++) begin
      checks++;
      if (q[s].size() >= SW) begin
        failures++;
        $display("slot %0d holds %0d words unflushed", s, q[s].size());
      end
    end
    $display("flushes %0d %0d %0d %0d, allocations %0d", flushes[0], flushes[1], flushes[2], flushes[3], n_alloc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
