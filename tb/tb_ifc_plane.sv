// tb_ifc_plane: one plane end to end at the paper's timing. The SoC side is modelled
// here: pages of small-integer BF16 weights are encoded with a bit-serial reference
// encoder and written with OP_PROGRAM; query vectors go into the vector registers;
// OP_GEMV over two pages with raw bit errors injected on every read must return every
// row's dot product exactly (the decoder must correct all errors first), with the
// corrected-bit count, page count and PE stall count checked; OP_ATTEND must return
// the weighted sums over the tokens of a page; OP_KV_APP with 256 words must fill a
// KV-buffer slot, request a block, encode the sector on the plane and program it with
// its parity at the slot's location (checked in the array model's storage). Also
// checks that the second page's read overlaps the first page's computation.
module tb_ifc_plane;
  timeunit 1ns; timeprecision 100ps;
  import kvnand_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic        cmd_valid = 0, vec_we = 0, wr_valid = 0, res_ready = 1, alloc_gnt = 0;
  plane_cmd_t  cmd = '0;
  logic [2:0]  vec_head = '0;
  logic [7:0]  vec_addr = '0;
  word_t       vec_data = '0, wr_data = '0;
  blk_t        alloc_blk = '0;
  logic [6:0]  inj_err = '0;
  logic        cmd_ready, wr_ready, res_valid, alloc_req, rd_note, busy, uncorrectable;
  pe_res_t     res;
  blk_t        rd_blk;
  logic [15:0] n_corr;
  logic [31:0] n_pages, n_kv_flush, n_pe_stall;
  int checks = 0, failures = 0;

  ifc_plane dut (.*);

  function automatic bf16_t to_bf16(int v);
    int m, e;
    if (v == 0) return '0;
    m = (v < 0) ? -v : v;
    e = 0;
    while ((m >> e) > 1) e++;
    return {v < 0, 8'(127 + e), 7'((m << (7 - e)) & 'h7f)};
  endfunction
  function automatic int from_fp32(fp32_t b);
    int e, m;
    e = int'(b[30:23]);
    if (e < 127) return 0;
    m = int'({1'b1, b[22:0]} >> (150 - e));
    return b[31] ? -m : m;
  endfunction

  int    W [2][2048];        // page elements (two pages)
  word_t page [PAGE_WORDS];
  int    X [PE_HEADS][512];  // vector elements
  int    exp_q [$];
  int    got;

  task automatic encode(input word_t d [PAGE_WORDS], output word_t p [PAGE_WORDS]);
    logic [BCH_P-1:0] rem;
    logic fb;
    p = d;
    for (int c = 0; c < CW_PER_PAGE; c++) begin
      rem = '0;
      for (int w = 0; w < CW_DATA_WORDS; w++)
        for (int b = 31; b >= 0; b--) begin
          fb  = d[c * CW_DATA_WORDS + w][b] ^ rem[BCH_P-1];
          rem = rem << 1;
          if (fb) rem ^= BCH_GEN[BCH_P-1:0];
        end
      for (int i = 0; i < CW_PAR_WORDS; i++) p[DATA_WORDS + c * CW_PAR_WORDS + i] = rem[BCH_P-1-32*i -: 32];
    end
  endtask

  task automatic send_cmd(plane_cmd_t pc);
    @(negedge clk);
    cmd_valid = 1; cmd = pc;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic send_words(input word_t d [PAGE_WORDS], input int n);
    for (int i = 0; i < n; i++) begin
      wr_valid = 1; wr_data = d[i];
      while (!wr_ready) @(negedge clk);
      @(negedge clk);
    end
    wr_valid = 0;
  endtask

  // result checker
  always @(negedge clk) begin
    res_ready = ($urandom % 3) != 0;
    if (res_valid && res_ready) begin
      int e;
      e = exp_q.pop_front();
      checks++;
      got++;
      if (from_fp32(res.val) !== e) begin
        failures++;
        if (failures < 10) $display("result head %0d idx %0d: got %0d exp %0d", res.head, res.idx, from_fp32(res.val), e);
      end
    end
  end

  // block allocator
  int n_alloc = 0;
  always @(negedge clk) begin
    alloc_gnt = 0;
    if (alloc_req) begin alloc_gnt = 1; alloc_blk = 9; n_alloc++; end
  end

  // read / compute overlap: the array senses a page while the previous one is
  // being corrected or computed
  int overlap = 0;
  always @(posedge clk) if (dut.arr_busy && dut.cst != 2'd0) overlap++;

  task automatic wait_idle();
    @(negedge clk);
    while (busy || res_valid) @(negedge clk);
    repeat (4) @(negedge clk);
  endtask

  initial begin
    #40000000;
    $display("watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    plane_cmd_t pc;
    word_t d [PAGE_WORDS];
    int rl, nh;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---- write two weight pages, block 2 pages 4 and 5 ----
    for (int p = 0; p < 2; p++) begin
      for (int w = 0; w < DATA_WORDS; w++) begin
        W[p][2*w]   = int'($urandom % 15) - 7;
        W[p][2*w+1] = int'($urandom % 15) - 7;
        d[w] = {to_bf16(W[p][2*w+1]), to_bf16(W[p][2*w])};
      end
      for (int w = DATA_WORDS; w < PAGE_WORDS; w++) d[w] = '0;
      encode(d, page);
      pc = '0; pc.op = OP_PROGRAM; pc.blk = 2; pc.page = page_t'(4 + p); pc.npages = 1;
      send_cmd(pc);
      send_words(page, PAGE_WORDS);
      wait_idle();
    end
    // ---- vectors: 2 heads, rows of 16 elements ----
    rl = 16; nh = 3;
    for (int h = 0; h < PE_HEADS; h++)
      for (int i = 0; i < 512; i++) X[h][i] = int'($urandom % 9) - 4;
    for (int h = 0; h < nh; h++)
      for (int a = 0; a < rl / 2; a++) begin
        vec_we = 1; vec_head = 3'(h); vec_addr = 8'(a);
        vec_data = {to_bf16(X[h][2*a+1]), to_bf16(X[h][2*a])};
        @(negedge clk);
      end
    vec_we = 0;
    // ---- GEMV over both pages with 3 raw bit errors per codeword ----
    for (int p = 0; p < 2; p++)
      for (int r = 0; r < 2048 / rl; r++)
        for (int h = 0; h < nh; h++) begin
          int s;
          s = 0;
          for (int i = 0; i < rl; i++) s += W[p][r * rl + i] * X[h][i];
          exp_q.push_back(s);
        end
    got = 0;
    inj_err = 7'd3;
    pc = '0; pc.op = OP_GEMV; pc.blk = 2; pc.page = 4; pc.npages = 2; pc.row_len = 11'(rl); pc.nheads = 4'(nh);
    send_cmd(pc);
    wait_idle();
    inj_err = '0;
    checks++;
    if (got != 2 * (2048 / rl) * nh || exp_q.size() != 0) begin
      failures++;
      $display("GEMV: %0d results, %0d missing", got, exp_q.size());
    end
    checks++;
    if (n_corr != 16'(3 * 4 * 2) || uncorrectable || n_pages != 2) begin
      failures++;
      $display("GEMV: n_corr %0d unc %b pages %0d", n_corr, uncorrectable, n_pages);
    end
    checks++;
    if (n_pe_stall == 0 || overlap == 0) begin
      failures++;
      $display("GEMV: %0d stall cycles, %0d overlapped reads", n_pe_stall, overlap);
    end
    exp_q.delete();
    // ---- ATTEND on page 4: tokens of 16 elements, weights per token ----
    for (int h = 0; h < nh; h++)
      for (int a = 0; a < 64; a++) begin
        vec_we = 1; vec_head = 3'(h); vec_addr = 8'(a);
        vec_data = {to_bf16(X[h][2*a+1]), to_bf16(X[h][2*a])};
        @(negedge clk);
      end
    vec_we = 0;
    for (int h = 0; h < nh; h++)
      for (int i = 0; i < rl; i++) begin
        int s;
        s = 0;
        for (int t = 0; t < 2048 / rl; t++) s += X[h][t] * W[0][t * rl + i];
        exp_q.push_back(s);
      end
    got = 0;
    pc = '0; pc.op = OP_ATTEND; pc.blk = 2; pc.page = 4; pc.npages = 1; pc.row_len = 11'(rl); pc.nheads = 4'(nh);
    send_cmd(pc);
    wait_idle();
    checks++;
    if (got != rl * nh || exp_q.size() != 0) begin
      failures++;
      $display("ATTEND: %0d results, %0d missing", got, exp_q.size());
    end
    // ---- KV append: 256 words to slot 2 -> sector 0 of block 9 page 0 ----
    for (int w = 0; w < PAGE_WORDS; w++) d[w] = '1;
    for (int w = 0; w < CW_DATA_WORDS; w++) d[w] = $urandom;
    pc = '0; pc.op = OP_KV_APP; pc.slot = 2; pc.nwords = 11'(CW_DATA_WORDS);
    send_cmd(pc);
    send_words(d, CW_DATA_WORDS);
    wait_idle();
    encode(d, page);
    checks++;
    if (n_kv_flush != 1 || n_alloc != 1) begin
      failures++;
      $display("KV: %0d flushes, %0d allocations", n_kv_flush, n_alloc);
    end
    for (int w = 0; w < CW_DATA_WORDS + CW_PAR_WORDS; w++) begin
      int col, k;
      col = (w < CW_DATA_WORDS) ? w : DATA_WORDS + w - CW_DATA_WORDS;
      k = (9 * PAGES_PER_BLOCK + 0) * PAGE_WORDS + col;
      checks++;
      if (!dut.u_array.store.exists(k) || dut.u_array.store[k] !== page[col]) begin
        failures++;
        if (failures < 10) $display("KV sector word %0d not programmed correctly", col);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
