// tb_fmac_pe: checks the plane PE in both modes against an integer reference.
// Operands are small integers, which BF16 and FP32 represent exactly, so every dot
// product and every weighted sum must come out exact. Dot mode: random row lengths
// and head counts, random output back-pressure; the number of stall cycles per row
// (in_ready low while results drain) is checked to equal nheads. Axpy mode: tokens of
// row_len elements weighted by per-head scalars.
module tb_fmac_pe;
  timeunit 1ns; timeprecision 100ps;
  import kvnand_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic        start = 1'b0, mode_axpy = 1'b0, in_valid = 1'b0, in_last = 1'b0;
  logic        out_ready = 1'b1;
  logic [10:0] row_len = 11'd2;
  logic [3:0]  nheads = 4'd1;
  word_t       in_w = '0;
  word_t       in_x [PE_HEADS];
  logic        in_ready, out_valid, busy;
  fp32_t       out_val;
  logic [2:0]  out_head;
  logic [10:0] out_idx;
  int checks = 0, failures = 0;

  fmac_pe dut (.*);

  // integer <-> BF16 / FP32 for small integers (exact)
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

  // reference data
  int W [64];               // page elements
  int X [PE_HEADS][64];     // vectors (dot) / scalars per token (axpy, index = token)
  int exp_q [$];            // expected results in output order
  int got_n;

  task automatic collect();
    forever begin
      @(negedge clk);
      out_ready = ($urandom % 4) != 0;
      if (out_valid && out_ready) begin
        int e;
        checks++;
        e = exp_q.pop_front();
        if (from_fp32(out_val) !== e) begin
          failures++;
          $display("mismatch head %0d idx %0d: got %0d exp %0d", out_head, out_idx,
                   from_fp32(out_val), e);
        end
        got_n++;
      end
    end
  endtask

  initial begin
    #2000000;
    $display("watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int h = 0; h < PE_HEADS; h++) in_x[h] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fork collect(); join_none
    // ---------------- dot mode ----------------
    for (int t = 0; t < 40; t++) begin
      int rl, nh, nrows, nw, stalls;
      rl = 2 * (1 + $urandom % 8);
      nh = 1 + $urandom % 8;
      nrows = 1 + $urandom % 4;
      nw = rl / 2;
      for (int i = 0; i < 64; i++) begin
        W[i] = int'($urandom % 15) - 7;
        for (int h = 0; h < PE_HEADS; h++) X[h][i] = int'($urandom % 15) - 7;
      end
      for (int r = 0; r < nrows; r++)
        for (int h = 0; h < nh; h++) begin
          int s;
          s = 0;
          for (int i = 0; i < rl; i++) s += W[(r * rl + i) % 64] * X[h][i];
          exp_q.push_back(s);
        end
      got_n = 0;
      @(negedge clk);
      start = 1'b1; mode_axpy = 1'b0; row_len = 11'(rl); nheads = 4'(nh);
      @(negedge clk);
      start = 1'b0;
      stalls = 0;
      for (int r = 0; r < nrows; r++)
        for (int k = 0; k < nw; k++) begin
          int e0, e1;
          e0 = (r * rl + 2 * k) % 64;
          e1 = (r * rl + 2 * k + 1) % 64;
          in_valid = 1'b1;
          in_last  = (r == nrows - 1) && (k == nw - 1);
          in_w     = {to_bf16(W[e1]), to_bf16(W[e0])};
          for (int h = 0; h < PE_HEADS; h++) in_x[h] = {to_bf16(X[h][2*k+1]), to_bf16(X[h][2*k])};
          while (!in_ready) begin
            stalls++;
            @(negedge clk);
          end
          @(negedge clk);
        end
      in_valid = 1'b0; in_last = 1'b0;
      wait (!busy);
      repeat (3) @(posedge clk);
      checks++;
      if (got_n != nrows * nh || exp_q.size() != 0) begin
        failures++;
        $display("dot test %0d: %0d results, %0d left", t, got_n, exp_q.size());
      end
      // the first word of each row after the first waits for the previous row's drain
      checks++;
      if (stalls < (nrows - 1) * nh) begin
        failures++;
        $display("dot test %0d: %0d stall cycles, expected at least %0d", t, stalls, (nrows - 1) * nh);
      end
      exp_q.delete();
    end
    // ---------------- axpy mode ----------------
    for (int t = 0; t < 30; t++) begin
      int rl, nh, ntok, nw;
      rl = 2 * (1 + $urandom % 8);
      nh = 1 + $urandom % 8;
      ntok = 1 + $urandom % 6;
      nw = rl / 2;
      for (int i = 0; i < 64; i++) begin
        W[i] = int'($urandom % 15) - 7;
        for (int h = 0; h < PE_HEADS; h++) X[h][i] = int'($urandom % 9) - 4;
      end
      for (int h = 0; h < nh; h++)
        for (int i = 0; i < rl; i++) begin
          int s;
          s = 0;
          for (int tk = 0; tk < ntok; tk++) s += X[h][tk] * W[tk * rl + i];
          exp_q.push_back(s);
        end
      got_n = 0;
      @(negedge clk);
      start = 1'b1; mode_axpy = 1'b1; row_len = 11'(rl); nheads = 4'(nh);
      @(negedge clk);
      start = 1'b0;
      for (int tk = 0; tk < ntok; tk++)
        for (int k = 0; k < nw; k++) begin
          in_valid = 1'b1;
          in_last  = (tk == ntok - 1) && (k == nw - 1);
          in_w     = {to_bf16(W[tk * rl + 2 * k + 1]), to_bf16(W[tk * rl + 2 * k])};
          for (int h = 0; h < PE_HEADS; h++) in_x[h] = {16'h0, to_bf16(X[h][tk])};
          while (!in_ready) @(negedge clk);
          @(negedge clk);
        end
      in_valid = 1'b0; in_last = 1'b0;
      wait (!busy);
      repeat (3) @(posedge clk);
      checks++;
      if (got_n != rl * nh || exp_q.size() != 0) begin
        failures++;
        $display("axpy test %0d: %0d results, %0d left", t, got_n, exp_q.size());
      end
      exp_q.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
