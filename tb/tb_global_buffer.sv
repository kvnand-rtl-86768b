// tb_global_buffer: random writes and reads of the 260 KB global buffer against an
// associative-array reference; checks the one-cycle read latency and that a read
// without re holds the previous output.
module tb_global_buffer;
  timeunit 1ns; timeprecision 100ps;
  import kvnand_pkg::*;
  localparam int AW = $clog2(260 * 1024 / 4);
  localparam int N  = 260 * 1024 / 4;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  logic          we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  word_t         wdata = '0, rdata;
  int checks = 0, failures = 0;
  word_t refm [int];

  global_buffer dut (.*);

  initial begin
    #400000;
    $display("watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t held;
    int a;
    @(negedge clk);
    for (int i = 0; i < 4000; i++) begin
      a = (i < 4) ? ((i % 2) ? N - 1 : 0) : int'($urandom % N);
      we = 1; waddr = AW'(a); wdata = $urandom;
      refm[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    foreach (refm[k]) begin
      re = 1; raddr = AW'(k);
      @(negedge clk);
      checks++;
      if (rdata !== refm[k]) begin
        failures++;
        if (failures < 10) $display("addr %0d: got %h exp %h", k, rdata, refm[k]);
      end
    end
    held = rdata;
    re = 0; raddr = '0;
    repeat (3) @(negedge clk);
    checks++;
    if (rdata !== held) begin
      failures++;
      $display("output changed without re");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
