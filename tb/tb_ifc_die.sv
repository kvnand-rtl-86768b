// tb_ifc_die: a die with 4 planes (the plane count is a parameter; the planes are
// identical) at the paper's read timing and a shortened program time. Through the
// die's link it programs an encoded weight page into every plane, broadcasts two
// query vectors to all planes with one write per word, runs one multi-plane GEMV on
// all planes, and reads the results back from the global buffer at
// {plane, head, row}; every value is compared with an integer reference. Then KV
// words are appended to one plane, which must get a block from the die's block
// manager and flush the sector; checks counters for pages, results, flushes and
// that the planes ran in parallel (the GEMV takes far less than 4 sequential runs).
module tb_ifc_die;
  timeunit 1ns; timeprecision 100ps;
  import kvnand_pkg::*;
  localparam int P = 4;
  localparam int AW = $clog2(260 * 1024 / 4);
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic          cmd_valid = 0, wr_valid = 0, rd_en = 0, refresh_ack = 0;
  die_cmd_t      cmd = '0;
  wkind_e        wr_kind = WK_VEC;
  logic [10:0]   wr_addr = '0;
  word_t         wr_data = '0;
  logic [AW-1:0] rd_addr = '0;
  logic [6:0]    inj_err = '0;
  logic          cmd_ready, wr_ready, busy, uncorrectable, refresh_valid;
  word_t         rd_data;
  logic [31:0]   n_results, n_pages, n_kv_flush, n_pe_stall, n_corr;
  blk_t          refresh_blk;
  int checks = 0, failures = 0;

  ifc_die #(.PLANES(P), .T_PROG(3000)) dut (.*);

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

  int W [P][2048];
  int X [2][32];

  task automatic send_cmd(die_cmd_t dc);
    @(negedge clk);
    cmd_valid = 1; cmd = dc;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 0;
    while (!cmd_ready) @(negedge clk);
  endtask

  task automatic send_word(wkind_e k, int a, word_t d);
    wr_valid = 1; wr_kind = k; wr_addr = 11'(a); wr_data = d;
    #0.2;  // let the ready path settle on the new address before sampling it
    while (!wr_ready) @(negedge clk);
    @(negedge clk);
    wr_valid = 0;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
    repeat (4) @(negedge clk);
  endtask

  initial begin
    #4000000;
    $display("watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    die_cmd_t dc;
    word_t pg [PAGE_WORDS];
    logic [BCH_P-1:0] rem;
    logic fb;
    int t0, t_gemv;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---- one encoded page per plane, block 1 page 0 ----
    for (int p = 0; p < P; p++) begin
      for (int w = 0; w < DATA_WORDS; w++) begin
        W[p][2*w] = int'($urandom % 15) - 7;
        W[p][2*w+1] = int'($urandom % 15) - 7;
        pg[w] = {to_bf16(W[p][2*w+1]), to_bf16(W[p][2*w])};
      end
      for (int c = 0; c < CW_PER_PAGE; c++) begin
        rem = '0;
        for (int w = 0; w < CW_DATA_WORDS; w++)
          for (int b = 31; b >= 0; b--) begin
            fb  = pg[c * CW_DATA_WORDS + w][b] ^ rem[BCH_P-1];
            rem = rem << 1;
            if (fb) rem ^= BCH_GEN[BCH_P-1:0];
          end
        for (int i = 0; i < CW_PAR_WORDS; i++) pg[DATA_WORDS + c * CW_PAR_WORDS + i] = rem[BCH_P-1-32*i -: 32];
      end
      dc = '0; dc.plane_mask = 32'(1) << p; dc.pc.op = OP_PROGRAM; dc.pc.blk = 1; dc.pc.page = 0; dc.pc.npages = 1;
      send_cmd(dc);
        for (int w = 0; w < PAGE_WORDS; w++) send_word(WK_PROG, p, pg[w]);
    end
    wait_idle();
    // ---- broadcast two vectors of 32 elements ----
    for (int h = 0; h < 2; h++)
      for (int a = 0; a < 16; a++) begin
        X[h][2*a] = int'($urandom % 9) - 4;
        X[h][2*a+1] = int'($urandom % 9) - 4;
        send_word(WK_VEC, h * 256 + a, {to_bf16(X[h][2*a+1]), to_bf16(X[h][2*a])});
      end
    // ---- multi-plane GEMV ----
    dc = '0; dc.plane_mask = 32'((1 << P) - 1); dc.pc.op = OP_GEMV; dc.pc.blk = 1; dc.pc.page = 0;
    dc.pc.npages = 1; dc.pc.row_len = 32; dc.pc.nheads = 2;
    t0 = $time;
    send_cmd(dc);
    wait_idle();
    t_gemv = ($time - t0) / 2;
    checks++;
    if (n_results != P * 64 * 2 || n_pages != P) begin
      failures++;
      $display("GEMV: %0d results, %0d pages", n_results, n_pages);
    end
    checks++;
    if (t_gemv > 2 * (T_READ_CYC + 4 * 284 + 1024 + 200)) begin
      failures++;
      $display("GEMV over %0d planes took %0d cycles: not parallel", P, t_gemv);
    end
    for (int p = 0; p < P; p++)
      for (int h = 0; h < 2; h++)
        for (int r = 0; r < 64; r++) begin
          int s;
          s = 0;
          for (int i = 0; i < 32; i++) s += W[p][r * 32 + i] * X[h][i];
          @(negedge clk);
          rd_en = 1; rd_addr = AW'((p << 11) | (h << 8) | r);
          @(negedge clk);
          rd_en = 0;
          checks++;
          if (from_fp32(rd_data) != s) begin
            failures++;
            if (failures < 10) $display("plane %0d head %0d row %0d: got %0d exp %0d", p, h, r, from_fp32(rd_data), s);
          end
        end
    // ---- KV append to plane 2 ----
    dc = '0; dc.plane_mask = 32'(1) << 2; dc.pc.op = OP_KV_APP; dc.pc.slot = 0; dc.pc.nwords = 11'(CW_DATA_WORDS);
    send_cmd(dc);
    for (int w = 0; w < CW_DATA_WORDS; w++) send_word(WK_KV, 2, $urandom);
    wait_idle();
    checks++;
    if (n_kv_flush != 1 || dut.u_bm.bst[2 * BLOCKS_PER_PLANE + int'(dut.g_pl[2].u_plane.u_kvb.mblk[0])] != 2'd1) begin
      failures++;
      $display("KV: %0d flushes; block not marked in use", n_kv_flush);
    end
    $display("GEMV on %0d planes: %0d cycles", P, t_gemv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
