// tb_kvnand_top: end-to-end test of the system at a reduced size: 2 dies (one weight
// die, G1, and one KV die, G2) with 2 planes each, the paper's read time, a shortened
// program time and 4 SoC KV slots. It runs one decoding step's worth of mechanisms:
//  * weight pages are programmed into both planes of the weight die;
//  * eight query vectors are broadcast and a multi-plane GEMV runs with 3 bit errors
//    injected per codeword; every result is checked against an integer reference
//    (eight heads finishing together make the PEs stall on the result collector);
//  * a 4 KB KV slot is filled in the SoC KV buffer, which gets a block from the SoC
//    block manager, is BCH-encoded in the controller and programmed into the KV die;
//    a GEMV over that page on the KV die then checks the stored K/V values and that
//    the controller's parity decodes;
//  * KV words are appended to a plane's own KV buffer (compact variant), which gets a
//    block from the die's block manager and programs a sector;
//  * the head-group scheduler runs a discrete step (QKV and attention overlapped)
//    and then a compact step (a mode switch).
// Each mechanism is counted and a failure is counted for one that never happened.
module tb_kvnand_top;
  timeunit 1ns; timeprecision 100ps;
  import kvnand_pkg::*;
  localparam int ND = 2, NP = 2, SL = 4;
  localparam int AW = $clog2(260 * 1024 / 4);
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic          hc_valid = 0, hw_valid = 0, hr_en = 0, kv_valid = 0;
  logic [ND-1:0] hc_dies = '0, hw_dies = '0, refresh_ack = '0;
  die_cmd_t      hc_cmd = '0;
  wkind_e        hw_kind = WK_VEC;
  logic [10:0]   hw_addr = '0;
  word_t         hw_data = '0, kv_data = '0;
  logic [0:0]    hr_die = '0;
  logic [AW-1:0] hr_addr = '0;
  logic [1:0]    kv_slot = '0;
  logic          step_start = 0, compact = 0, qkv_done = 0, att_done = 0;
  logic [7:0]    n_hg = '0;
  logic [6:0]    inj_err = '0;
  logic          hc_ready, hw_ready, kv_ready, qkv_start, att_start, step_done, step_busy;
  logic          uncorrectable, kv_alloc_fail;
  logic [7:0]    qkv_hg, att_hg;
  word_t         hr_data;
  logic [ND-1:0] die_busy, refresh_valid;
  logic [31:0]   n_results, n_pages, n_corr, n_pe_stall, n_kv_flush_die, n_kv_pages_soc,
                 n_overlap, n_switch;
  int checks = 0, failures = 0;

  kvnand_top #(.NUM_DIES(ND), .G1_DIES(1), .PLANES(NP), .T_PROG(3000), .KV_SLOTS(SL)) dut (.*);

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

  int W [NP][2048];
  int KV [2048];
  int X [8][32];
  int n_soc_alloc = 0, n_die_alloc = 0, n_qkv = 0, n_att = 0;

  always @(posedge clk) begin
    if (dut.kv_alloc_gnt) n_soc_alloc++;
    if (dut.g_die[1].u_die.bm_gnt || dut.g_die[0].u_die.bm_gnt) n_die_alloc++;
  end

  // NPU stand-in for the scheduler handshake: QKV takes 40 cycles, attention 60
  int qc = -1, ac = -1;
  always @(negedge clk) begin
    qkv_done = 0;
    att_done = 0;
    if (qkv_start) begin qc = 40; n_qkv++; end
    else if (qc > 0) qc--;
    else if (qc == 0) begin qkv_done = 1; qc = -1; end
    if (att_start) begin ac = 60; n_att++; end
    else if (ac > 0) ac--;
    else if (ac == 0) begin att_done = 1; ac = -1; end
  end

  task automatic send_cmd(logic [ND-1:0] dies, die_cmd_t dc);
    @(negedge clk);
    hc_valid = 1; hc_dies = dies; hc_cmd = dc;
    #0.2;
    while (!hc_ready) begin @(negedge clk); #0.2; end
    @(negedge clk);
    hc_valid = 0;
  endtask

  task automatic send_word(logic [ND-1:0] dies, wkind_e k, int a, word_t d);
    hw_valid = 1; hw_dies = dies; hw_kind = k; hw_addr = 11'(a); hw_data = d;
    #0.2;
    while (!hw_ready) begin @(negedge clk); #0.2; end
    @(negedge clk);
    hw_valid = 0;
  endtask

  task automatic wait_idle();
    repeat (4) @(negedge clk);
    while (die_busy != '0 || dut.u_fc.ks != 0 || dut.kv_pending) @(negedge clk);
    repeat (4) @(negedge clk);
  endtask

  function automatic void encode(inout word_t pg [PAGE_WORDS]);
    logic [BCH_P-1:0] rem;
    logic fb;
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
  endfunction

  task automatic check_results(int die, int p, int nh, int src);
    int s;
    for (int h = 0; h < nh; h++)
      for (int r = 0; r < 64; r++) begin
        s = 0;
        for (int i = 0; i < 32; i++) s += ((src < NP) ? W[src][r * 32 + i] : KV[r * 32 + i]) * X[h][i];
        @(negedge clk);
        hr_en = 1; hr_die = 1'(die); hr_addr = AW'((p << 11) | (h << 8) | r);
        @(negedge clk);
        hr_en = 0;
        @(negedge clk);
        checks++;
        if (from_fp32(hr_data) != s) begin
          failures++;
          if (failures < 10) $display("die %0d plane %0d head %0d row %0d: got %0d exp %0d", die, p, h, r, from_fp32(hr_data), s);
        end
      end
  endtask

  task automatic mech(string name, int count);
    checks++;
    $display("mechanism %-28s %0d", name, count);
    if (count == 0) begin
      failures++;
      $display("  never happened: %s", name);
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
    die_cmd_t dc;
    word_t pg [PAGE_WORDS];
    int corr0, kvblk;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (4) @(negedge clk);

    // ---- weights into both planes of die 0 (G1), block 3 page 5 ----
    for (int p = 0; p < NP; p++) begin
      for (int w = 0; w < DATA_WORDS; w++) begin
        W[p][2*w]   = int'($urandom % 15) - 7;
        W[p][2*w+1] = int'($urandom % 15) - 7;
        pg[w] = {to_bf16(W[p][2*w+1]), to_bf16(W[p][2*w])};
      end
      encode(pg);
      dc = '0; dc.plane_mask = 32'(1) << p; dc.pc.op = OP_PROGRAM; dc.pc.blk = 3; dc.pc.page = 5; dc.pc.npages = 1;
      send_cmd(2'b01, dc);
      for (int w = 0; w < PAGE_WORDS; w++) send_word(2'b01, WK_PROG, p, pg[w]);
    end
    wait_idle();

    // ---- eight query vectors broadcast to both dies ----
    for (int h = 0; h < 8; h++)
      for (int a = 0; a < 16; a++) begin
        X[h][2*a]   = int'($urandom % 9) - 4;
        X[h][2*a+1] = int'($urandom % 9) - 4;
        send_word(2'b11, WK_VEC, h * 256 + a, {to_bf16(X[h][2*a+1]), to_bf16(X[h][2*a])});
      end

    // ---- multi-plane GEMV on die 0 with raw bit errors ----
    inj_err = 7'd3;
    dc = '0; dc.plane_mask = 32'(3); dc.pc.op = OP_GEMV; dc.pc.blk = 3; dc.pc.page = 5;
    dc.pc.npages = 1; dc.pc.row_len = 32; dc.pc.nheads = 8;
    send_cmd(2'b01, dc);
    wait_idle();
    checks++;
    if (n_results != NP * 64 * 8 || uncorrectable) begin
      failures++;
      $display("GEMV: %0d results, uncorrectable %0b", n_results, uncorrectable);
    end
    for (int p = 0; p < NP; p++) check_results(0, p, 8, p);
    corr0 = n_corr;

    // ---- discrete KV path: SoC KV slot 1 -> encoder -> KV die 1, plane 1 ----
    for (int w = 0; w < DATA_WORDS; w++) begin
      KV[2*w]   = int'($urandom % 15) - 7;
      KV[2*w+1] = int'($urandom % 15) - 7;
      @(negedge clk);
      kv_valid = 1; kv_slot = 2'd1; kv_data = {to_bf16(KV[2*w+1]), to_bf16(KV[2*w])};
      #0.2;
      while (!kv_ready) begin @(negedge clk); #0.2; end
    end
    @(negedge clk);
    kv_valid = 0;
    wait_idle();
    checks++;
    if (n_kv_pages_soc != 1) begin
      failures++;
      $display("SoC KV pages programmed: %0d", n_kv_pages_soc);
    end
    kvblk = int'(dut.u_soc_kvb.mblk[1]);
    // read the KV page back through the KV die's decoder and PE
    dc = '0; dc.plane_mask = 32'(2); dc.pc.op = OP_GEMV; dc.pc.blk = blk_t'(kvblk); dc.pc.page = 0;
    dc.pc.npages = 1; dc.pc.row_len = 32; dc.pc.nheads = 2;
    send_cmd(2'b10, dc);
    wait_idle();
    checks++;
    if (uncorrectable || n_corr <= corr0) begin
      failures++;
      $display("KV page: uncorrectable %0b, corrections %0d -> %0d", uncorrectable, corr0, n_corr);
    end
    check_results(1, 1, 2, NP);
    inj_err = '0;

    // ---- compact KV path: die 0, plane 1's own KV buffer ----
    dc = '0; dc.plane_mask = 32'(2); dc.pc.op = OP_KV_APP; dc.pc.slot = 0; dc.pc.nwords = 11'(CW_DATA_WORDS);
    send_cmd(2'b01, dc);
    for (int w = 0; w < CW_DATA_WORDS; w++) send_word(2'b01, WK_KV, 1, $urandom);
    wait_idle();

    // ---- head-group scheduling: a discrete step, then a compact one ----
    @(negedge clk);
    compact = 0; n_hg = 8'd4; step_start = 1;
    @(negedge clk);
    step_start = 0;
    while (!step_done) @(negedge clk);
    @(negedge clk);
    compact = 1; n_hg = 8'd4; step_start = 1;
    @(negedge clk);
    step_start = 0;
    while (!step_done) @(negedge clk);
    checks++;
    if (n_qkv != 8 || n_att != 8) begin
      failures++;
      $display("scheduler: %0d QKV and %0d attention starts", n_qkv, n_att);
    end

    mech("weight page read", n_pages);
    mech("ECC bit correction", n_corr);
    mech("PE stall (collector busy)", n_pe_stall);
    mech("SoC KV block allocation", n_soc_alloc);
    mech("SoC KV page encode+program", n_kv_pages_soc);
    mech("die KV block allocation", n_die_alloc);
    mech("plane KV sector flush", n_kv_flush_die);
    mech("QKV/attention overlap cycles", n_overlap);
    mech("discrete/compact mode switch", n_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
