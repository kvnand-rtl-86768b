// tb_flash_plane: checks the flash plane model at the paper's timing (tR = 1600,
// tP = 30000 cycles at 400 MHz): programs pages (whole and two-range partial), reads
// them back into a data-register model and compares with a reference, checks that
// unwritten words read as all ones, that erase clears a block, that a read completes
// tR cycles after the command and a program tP cycles after it, and that inj_err
// flips exactly that many data bits per codeword.
module tb_flash_plane;
  timeunit 1ns; timeprecision 100ps;
  import kvnand_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic        cmd_valid = 0;
  logic [1:0]  cmd_op = 0;
  blk_t        cmd_blk = '0;
  page_t       cmd_page = '0;
  col_t        cmd_col0 = '0, cmd_pcol0 = '0;
  logic [10:0] cmd_ncol = '0;
  logic [5:0]  cmd_npcol = '0;
  logic [6:0]  inj_err = '0;
  logic        busy, arr_we, arr_done;
  col_t        arr_addr, arr_rd_addr;
  word_t       arr_wdata, arr_rdata;
  logic [31:0] n_reads, n_progs;
  int checks = 0, failures = 0;

  flash_plane dut (.*);

  word_t cache [PAGE_WORDS];
  word_t dreg  [PAGE_WORDS];
  assign arr_rdata = cache[arr_rd_addr];
  always @(posedge clk) if (arr_we) dreg[arr_addr] <= arr_wdata;

  word_t refp [int];    // key blk*768+page -> base; words kept per page
  word_t refw [int];

  function automatic int key(int b, int p, int c);
    return (b * PAGES_PER_BLOCK + p) * PAGE_WORDS + c;
  endfunction

  task automatic issue(int op, int b, int p, int c0, int nc, int pc0, int npc, output int cyc);
    @(negedge clk);
    cmd_valid = 1; cmd_op = 2'(op); cmd_blk = blk_t'(b); cmd_page = page_t'(p);
    cmd_col0 = col_t'(c0); cmd_ncol = 11'(nc); cmd_pcol0 = col_t'(pc0); cmd_npcol = 6'(npc);
    @(negedge clk);
    cmd_valid = 0;
    cyc = 1;
    if (op == 0) begin
      while (!arr_done) begin @(negedge clk); cyc++; end
      @(negedge clk);
    end else begin
      while (busy) begin @(negedge clk); cyc++; end
    end
  endtask

  task automatic prog_page(int b, int p, int c0, int nc, int pc0, int npc);
    int cyc;
    for (int i = 0; i < PAGE_WORDS; i++) cache[i] = $urandom;
    for (int i = c0; i < c0 + nc; i++) refw[key(b, p, i)] = cache[i];
    for (int i = pc0; i < pc0 + npc; i++) refw[key(b, p, i)] = cache[i];
    issue(1, b, p, c0, nc, pc0, npc, cyc);
    checks++;
    if (cyc < T_PROG_CYC - 2 || cyc > T_PROG_CYC + 2) begin
      failures++;
      $display("program took %0d cycles", cyc);
    end
  endtask

  task automatic read_check(int b, int p);
    int cyc;
    issue(0, b, p, 0, 0, 0, 0, cyc);
    checks++;
    if (cyc < T_READ_CYC - 2 || cyc > T_READ_CYC + 2) begin
      failures++;
      $display("read took %0d cycles", cyc);
    end
    for (int i = 0; i < PAGE_WORDS; i++) begin
      word_t e;
      e = refw.exists(key(b, p, i)) ? refw[key(b, p, i)] : '1;
      checks++;
      if (dreg[i] !== e) begin
        failures++;
        if (failures < 10) $display("blk %0d page %0d word %0d: got %h exp %h", b, p, i, dreg[i], e);
      end
    end
  endtask

  initial begin
    #20000000;
    $display("watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    prog_page(3, 10, 0, PAGE_WORDS, 0, 0);
    read_check(3, 10);
    read_check(3, 11);                         // never written
    prog_page(7, 0, 256, 256, 1052, 28);         // sector 1 and its parity
    prog_page(7, 0, 512, 256, 1080, 28);         // sector 2, same page
    read_check(7, 0);
    issue(2, 3, 0, 0, 0, 0, 0, cyc);           // erase block 3
    foreach (refw[k]) if (k / (PAGES_PER_BLOCK * PAGE_WORDS) == 3) refw.delete(k);
    read_check(3, 10);
    // raw bit errors
    inj_err = 7'd5;
    issue(0, 7, 0, 0, 0, 0, 0, cyc);
    inj_err = '0;
    for (int c = 0; c < CW_PER_PAGE; c++) begin
      int nb;
      nb = 0;
      for (int w = c * CW_DATA_WORDS; w < (c + 1) * CW_DATA_WORDS; w++) begin
        word_t e;
        e = refw.exists(key(7, 0, w)) ? refw[key(7, 0, w)] : '1;
        nb += $countones(dreg[w] ^ e);
      end
      checks++;
      if (nb != 5) begin
        failures++;
        $display("codeword %0d: %0d bit errors, expected 5", c, nb);
      end
    end
    checks++;
    if (n_reads != 5 || n_progs != 3) begin
      failures++;
      $display("counters: %0d reads %0d programs", n_reads, n_progs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
