// kvnand_top: the KVNAND system without its NPU. The SoC side holds the multi-channel
// flash controller (with the discrete variant's BCH encoder), the 5 MB SoC KV buffer
// with its page-level mapping table, the SoC block manager that hands out KV blocks
// for that buffer, and the head-group scheduler; NUM_DIES IFC dies hang off the
// controller, one per channel.
//
// The NPU (prefill, softmax, non-linear layers, the stage sequencing per HG) sits
// outside and drives the ports:
//  * hc_/hw_/hr_: die commands, data words and global-buffer reads (see
//    flash_controller). Results of a GEMV, Logit or Attend come back through hr_*.
//  * kv_*: newly generated K/V words for the SoC KV buffer (discrete variant); full
//    4 KB slots are encoded and programmed into the KV dies (G2 = dies G1_DIES..).
//    In the compact variant the NPU instead sends KV words straight to the dies
//    with OP_KV_APP, where each plane's own 8 KB buffer and encoder handle them.
//  * step_*, qkv_*, att_*: the HG scheduler's handshake. compact selects the
//    variant for the step (a change counts as a mode switch).
//  * inj_err: bit errors added to every page read (test only; 0 in use).
// Status: OR/sum of the dies' counters and flags, and the scheduler's counters;
// kv_alloc_fail pulses when the SoC block manager has no free KV block left.
// The partitioning follows the paper's system figure; the port-level protocol and
// the status set are this design's choices.
// Lint notes that stand: the SoC KV buffer's column (always 0: the SoC programs whole
// pages), its flush count and pending flag, the SoC block manager's busy and refresh
// outputs (KV blocks live for one request and are released by firmware) and the dies'
// refresh block numbers are not brought out. rst_n is reported as used both
// asynchronously and synchronously because the concurrent assertions in the blocks are
// disabled during reset with it; the flip-flops themselves all reset asynchronously.
module kvnand_top
  import kvnand_pkg::*;
#(
  parameter int unsigned NUM_DIES      = 4,      // paper: 8 (scaled for simulator memory)
  parameter int unsigned G1_DIES       = 2,
  parameter int unsigned PLANES        = PLANES_PER_DIE,
  parameter int unsigned T_READ        = T_READ_CYC,
  parameter int unsigned T_PROG        = T_PROG_CYC,
  parameter int unsigned KV_SLOTS      = 1280,    // 1280 x 4 KB = 5 MB
  parameter int unsigned KV_SLOT_WORDS = DATA_WORDS,
  localparam int unsigned DW    = (NUM_DIES > 1) ? $clog2(NUM_DIES) : 1,
  localparam int unsigned SW    = (KV_SLOTS > 1) ? $clog2(KV_SLOTS) : 1,
  localparam int unsigned GB_AW = $clog2(260 * 1024 / 4)
) (
  input  logic                clk,
  input  logic                rst_n,
  // host / NPU link
  input  logic                hc_valid,
  output logic                hc_ready,
  input  logic [NUM_DIES-1:0] hc_dies,
  input  die_cmd_t            hc_cmd,
  input  logic                hw_valid,
  output logic                hw_ready,
  input  logic [NUM_DIES-1:0] hw_dies,
  input  wkind_e              hw_kind,
  input  logic [10:0]         hw_addr,
  input  word_t               hw_data,
  input  logic                hr_en,
  input  logic [DW-1:0]       hr_die,
  input  logic [GB_AW-1:0]    hr_addr,
  output word_t               hr_data,
  // new KV words for the SoC KV buffer
  input  logic                kv_valid,
  output logic                kv_ready,
  input  logic [SW-1:0]       kv_slot,
  input  word_t               kv_data,
  // head-group scheduling
  input  logic                step_start,
  input  logic                compact,
  input  logic [7:0]          n_hg,
  output logic                qkv_start,
  output logic [7:0]          qkv_hg,
  input  logic                qkv_done,
  output logic                att_start,
  output logic [7:0]          att_hg,
  input  logic                att_done,
  output logic                step_done,
  output logic                step_busy,
  // test and status
  input  logic [6:0]          inj_err,
  output logic [NUM_DIES-1:0] die_busy,
  output logic                uncorrectable,
  output logic                kv_alloc_fail,
  output logic [31:0]         n_results,
  output logic [31:0]         n_pages,
  output logic [31:0]         n_corr,
  output logic [31:0]         n_pe_stall,
  output logic [31:0]         n_kv_flush_die,
  output logic [31:0]         n_kv_pages_soc,
  output logic [31:0]         n_overlap,
  output logic [31:0]         n_switch,
  output logic [NUM_DIES-1:0] refresh_valid,
  input  logic [NUM_DIES-1:0] refresh_ack
);
  // ---------------- SoC KV buffer and its block manager ----------------
  logic          fl_valid, fl_ready, fl_first, fl_last;
  logic [SW-1:0] fl_slot;
  blk_t          fl_blk;
  page_t         fl_page;
  col_t          fl_col;
  word_t         fl_data;
  logic          kv_alloc_req, kv_alloc_gnt, kv_alloc_busy;
  blk_t          kv_alloc_blk;
  logic [31:0]   n_soc_flushes;
  logic          kv_pending;
  logic          soc_rd_note [1];
  blk_t          soc_rd_blk  [1];
  logic          soc_refresh;
  logic          soc_refresh_plane;
  blk_t          soc_refresh_blk;

  kv_buffer #(.BUF_WORDS(KV_SLOTS * KV_SLOT_WORDS), .SLOTS(KV_SLOTS),
              .SLOT_WORDS(KV_SLOT_WORDS)) u_soc_kvb (
    .clk, .rst_n,
    .in_valid(kv_valid), .in_ready(kv_ready), .in_slot(kv_slot), .in_data(kv_data),
    .fl_valid, .fl_ready, .fl_first, .fl_last, .fl_slot, .fl_blk, .fl_page, .fl_col,
    .fl_data, .alloc_req(kv_alloc_req), .alloc_gnt(kv_alloc_gnt),
    .alloc_blk(kv_alloc_blk), .pending(kv_pending), .n_flushes(n_soc_flushes));

  assign soc_rd_note[0] = 1'b0;   // KV page reads are counted by the dies
  assign soc_rd_blk[0]  = '0;
  block_manager #(.PLANES(1)) u_soc_bm (
    .clk, .rst_n,
    .alloc_req(kv_alloc_req && !kv_alloc_gnt), .alloc_plane(1'b0),
    .alloc_gnt(kv_alloc_gnt), .alloc_fail(kv_alloc_fail), .alloc_blk(kv_alloc_blk),
    .rd_note(soc_rd_note), .rd_blk(soc_rd_blk),
    .rel_req(1'b0), .rel_plane(1'b0), .rel_blk('0),
    .refresh_valid(soc_refresh), .refresh_plane(soc_refresh_plane),
    .refresh_blk(soc_refresh_blk), .refresh_ack(1'b0), .busy(kv_alloc_busy));

  // ---------------- flash controller ----------------
  logic          d_cmd_valid [NUM_DIES];
  logic          d_cmd_ready [NUM_DIES];
  die_cmd_t      d_cmd;
  logic          d_wr_valid  [NUM_DIES];
  logic          d_wr_ready  [NUM_DIES];
  wkind_e        d_wr_kind;
  logic [10:0]   d_wr_addr;
  word_t         d_wr_data;
  logic          d_rd_en     [NUM_DIES];
  logic [GB_AW-1:0] d_rd_addr;
  word_t         d_rd_data   [NUM_DIES];

  flash_controller #(.NUM_DIES(NUM_DIES), .G1_DIES(G1_DIES), .SLOTS(KV_SLOTS)) u_fc (
    .clk, .rst_n,
    .hc_valid, .hc_ready, .hc_dies, .hc_cmd,
    .hw_valid, .hw_ready, .hw_dies, .hw_kind, .hw_addr, .hw_data,
    .hr_en, .hr_die, .hr_addr, .hr_data,
    .fl_valid, .fl_ready, .fl_first, .fl_last, .fl_slot, .fl_blk, .fl_page, .fl_data,
    .d_cmd_valid, .d_cmd_ready, .d_cmd, .d_wr_valid, .d_wr_ready, .d_wr_kind,
    .d_wr_addr, .d_wr_data, .d_rd_en, .d_rd_addr, .d_rd_data,
    .n_kv_pages(n_kv_pages_soc));

  // ---------------- head-group scheduler ----------------
  hg_scheduler u_hg (
    .clk, .rst_n, .start(step_start), .compact, .n_hg,
    .qkv_start, .qkv_hg, .qkv_done, .att_start, .att_hg, .att_done,
    .busy(step_busy), .done(step_done), .n_overlap, .n_switch);

  // ---------------- IFC dies ----------------
  logic          x_unc   [NUM_DIES];
  logic [31:0]   x_res   [NUM_DIES];
  logic [31:0]   x_pages [NUM_DIES];
  logic [31:0]   x_kvfl  [NUM_DIES];
  logic [31:0]   x_stall [NUM_DIES];
  logic [31:0]   x_corr  [NUM_DIES];
  blk_t          x_rblk  [NUM_DIES];

  for (genvar d = 0; d < NUM_DIES; d++) begin : g_die
    ifc_die #(.PLANES(PLANES), .T_READ(T_READ), .T_PROG(T_PROG)) u_die (
      .clk, .rst_n,
      .cmd_valid(d_cmd_valid[d]), .cmd_ready(d_cmd_ready[d]), .cmd(d_cmd),
      .wr_valid(d_wr_valid[d]), .wr_ready(d_wr_ready[d]), .wr_kind(d_wr_kind),
      .wr_addr(d_wr_addr), .wr_data(d_wr_data),
      .rd_en(d_rd_en[d]), .rd_addr(d_rd_addr), .rd_data(d_rd_data[d]),
      .inj_err, .busy(die_busy[d]), .uncorrectable(x_unc[d]),
      .n_results(x_res[d]), .n_pages(x_pages[d]), .n_kv_flush(x_kvfl[d]),
      .n_pe_stall(x_stall[d]), .n_corr(x_corr[d]),
      .refresh_valid(refresh_valid[d]), .refresh_blk(x_rblk[d]),
      .refresh_ack(refresh_ack[d]));
  end

  always_comb begin
    uncorrectable  = 1'b0;
    n_results      = '0;
    n_pages        = '0;
    n_corr         = '0;
    n_pe_stall     = '0;
    n_kv_flush_die = '0;
    for (int d = 0; d < NUM_DIES; d++) begin
      uncorrectable  = uncorrectable | x_unc[d];
      n_results      = n_results + x_res[d];
      n_pages        = n_pages + x_pages[d];
      n_corr         = n_corr + x_corr[d];
      n_pe_stall     = n_pe_stall + x_stall[d];
      n_kv_flush_die = n_kv_flush_die + x_kvfl[d];
    end
  end
endmodule
