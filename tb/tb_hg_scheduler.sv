// tb_hg_scheduler: drives the scheduler with stage models of random length and
// checks the ordering rules. Discrete: QKV of HG i+1 may run while attention of HG i
// runs (overlap must occur when stages are long), attention of HG i never starts
// before its QKV is done, nor before attention of HG i-1 ended. Compact: no overlap,
// all QKV before any attention. Each HG is started exactly once per stage; the mode
// switch counter counts variant changes between steps.
module tb_hg_scheduler;
  timeunit 1ns; timeprecision 100ps;
  import kvnand_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic        start = 0, compact = 0, qkv_done = 0, att_done = 0;
  logic [7:0]  n_hg = 8'd1;
  logic        qkv_start, att_start, busy, done;
  logic [7:0]  qkv_hg, att_hg;
  logic [31:0] n_overlap, n_switch;
  int checks = 0, failures = 0;

  hg_scheduler dut (.*);

  int q_left = -1, a_left = -1;
  int q_cnt, a_cnt, q_done_n, a_done_n;
  int both;

  always @(negedge clk) begin
    qkv_done = 0; att_done = 0;
    if (q_left == 0) begin qkv_done = 1; q_left = -1; q_done_n++; end
    else if (q_left > 0) q_left--;
    if (a_left == 0) begin att_done = 1; a_left = -1; a_done_n++; end
    else if (a_left > 0) a_left--;
  end
  always @(posedge clk) begin
    if (q_left >= 0 && a_left >= 0) both++;
    if (qkv_start) begin
      checks++;
      if (int'(qkv_hg) != q_cnt) begin failures++; $display("QKV HG %0d, expected %0d", qkv_hg, q_cnt); end
      if (compact && a_left >= 0) begin failures++; $display("compact: QKV during attention"); end
      q_cnt++;
      q_left = 3 + $urandom % 40;
    end
    if (att_start) begin
      checks++;
      if (int'(att_hg) != a_cnt) begin failures++; $display("ATT HG %0d, expected %0d", att_hg, a_cnt); end
      if (int'(att_hg) >= q_done_n) begin failures++; $display("attention of HG %0d before its QKV", att_hg); end
      if (compact && q_done_n != int'(n_hg)) begin failures++; $display("compact: attention before all QKV"); end
      a_cnt++;
      a_left = 3 + $urandom % 40;
    end
  end

  initial begin
    #2000000;
    $display("watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int modes [6];
    int switches;
    modes = '{0, 0, 1, 1, 0, 1};
    repeat (2) @(negedge clk);
    rst_n = 1;
    switches = 0;
    for (int st = 0; st < 6; st++) begin
      q_cnt = 0; a_cnt = 0; q_done_n = 0; a_done_n = 0; both = 0;
      @(negedge clk);
      compact = modes[st][0]; n_hg = 8'(2 + $urandom % 7); start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      if (st > 0 && modes[st] != modes[st-1]) switches++;
      checks++;
      if (q_cnt != int'(n_hg) || a_cnt != int'(n_hg) || a_done_n != int'(n_hg)) begin
        failures++;
        $display("step %0d: %0d QKV and %0d attention starts for %0d HGs", st, q_cnt, a_cnt, n_hg);
      end
      checks++;
      if (compact ? (both != 0) : (both == 0)) begin
        failures++;
        $display("step %0d (compact=%b): %0d overlap cycles", st, compact, both);
      end
    end
    checks++;
    if (int'(n_switch) != switches || n_overlap == 0) begin
      failures++;
      $display("n_switch %0d (exp %0d), n_overlap %0d", n_switch, switches, n_overlap);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
