// ifc_die: one compute-enabled 3D NAND die, the logic die bonded on top of 32 flash
// planes (I/O interface, control logic, buffers, logic units and registers).
//
// Channel side (a plain synchronous word link standing in for the ONFI interface):
//  * cmd_*: a die_cmd_t; its plane command is handed to every plane in plane_mask
//    (a multi-plane operation). cmd_ready is low until every addressed plane has
//    taken it.
//  * wr_*: data words. WK_VEC words are broadcast to the vector registers of all
//    planes at once (the input vector or Q slice, one write reaches every plane);
//    WK_PROG and WK_KV words go to the single plane named in wr_addr[4:0].
//  * rd_*: reads of the global buffer, one cycle of latency.
// Inside, a round-robin collector moves one PE result per cycle from the planes into
// the 260 KB global buffer at address {plane, head, idx[7:0]}; planes that are not
// served stall. The die-level block manager allocates KV blocks for the planes'
// KV buffers (compact variant) and counts page reads for the refresh policy.
// The structure follows the paper's figure of the logic die; the link, the command
// set, the result addressing and the arbitration are this design's choices.
// A command's results must fit 256 per head per plane before the buffer is read out.
// Lint notes that stand: refresh_plane of the block manager is not forwarded (the
// die reports the block; firmware scans the planes), and the loop index p of the
// round-robin search is wider than the plane number it is cut to.
module ifc_die
  import kvnand_pkg::*;
#(
  parameter int unsigned PLANES = PLANES_PER_DIE,
  parameter int unsigned T_READ = T_READ_CYC,
  parameter int unsigned T_PROG = T_PROG_CYC,
  localparam int unsigned GB_AW = $clog2(260 * 1024 / 4)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  die_cmd_t         cmd,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  wkind_e           wr_kind,
  input  logic [10:0]      wr_addr,
  input  word_t            wr_data,
  input  logic             rd_en,
  input  logic [GB_AW-1:0] rd_addr,
  output word_t            rd_data,
  input  logic [6:0]       inj_err,
  output logic             busy,
  output logic             uncorrectable,
  output logic [31:0]      n_results,
  output logic [31:0]      n_pages,
  output logic [31:0]      n_kv_flush,
  output logic [31:0]      n_pe_stall,
  output logic [31:0]      n_corr,
  output logic             refresh_valid,
  output blk_t             refresh_blk,
  input  logic             refresh_ack
);
  localparam int unsigned PW = (PLANES > 1) ? $clog2(PLANES) : 1;

  logic [PLANES-1:0] pend;
  logic              p_cmd_valid [PLANES];
  logic              p_cmd_ready [PLANES];
  logic              p_wr_valid  [PLANES];
  logic              p_wr_ready  [PLANES];
  logic              p_res_valid [PLANES];
  logic              p_res_ready [PLANES];
  pe_res_t           p_res       [PLANES];
  logic              p_alloc_req [PLANES];
  logic              p_alloc_gnt [PLANES];
  logic              p_rd_note   [PLANES];
  blk_t              p_rd_blk    [PLANES];
  logic              p_busy      [PLANES];
  logic              p_unc       [PLANES];
  logic [15:0]       p_corr      [PLANES];
  logic [31:0]       p_pages     [PLANES];
  logic [31:0]       p_kvfl      [PLANES];
  logic [31:0]       p_stall     [PLANES];
  plane_cmd_t        pc_q;

  logic              vec_we;
  blk_t              alloc_blk;
  logic              bm_gnt, bm_fail, bm_busy;
  logic [PW-1:0]     alloc_sel, alloc_owner, refresh_plane;
  logic              alloc_any, alloc_active;

  // ---------------- command distribution ----------------
  assign cmd_ready = (pend == '0);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0;
      pc_q <= '0;
    end else begin
      if (cmd_valid && cmd_ready) begin
        pend <= cmd.plane_mask[PLANES-1:0];
        pc_q <= cmd.pc;
      end else begin
        for (int p = 0; p < PLANES; p++)
          if (p_cmd_valid[p] && p_cmd_ready[p]) pend[p] <= 1'b0;
      end
    end
  end

  // ---------------- data words ----------------
  assign vec_we = wr_valid && (wr_kind == WK_VEC);
  always_comb begin
    wr_ready = (wr_kind == WK_VEC);
    for (int p = 0; p < PLANES; p++) begin
      p_cmd_valid[p] = pend[p];
      p_wr_valid[p]  = wr_valid && (wr_kind != WK_VEC) && (int'(wr_addr[4:0]) == p);
      if (wr_kind != WK_VEC && int'(wr_addr[4:0]) == p) wr_ready = p_wr_ready[p];
    end
  end

  // ---------------- planes ----------------
  for (genvar p = 0; p < PLANES; p++) begin : g_pl
    ifc_plane #(.T_READ(T_READ), .T_PROG(T_PROG)) u_plane (
      .clk, .rst_n,
      .cmd_valid(p_cmd_valid[p]), .cmd_ready(p_cmd_ready[p]), .cmd(pc_q),
      .vec_we, .vec_head(wr_addr[10:8]), .vec_addr(wr_addr[7:0]), .vec_data(wr_data),
      .wr_valid(p_wr_valid[p]), .wr_ready(p_wr_ready[p]), .wr_data,
      .res_valid(p_res_valid[p]), .res_ready(p_res_ready[p]), .res(p_res[p]),
      .alloc_req(p_alloc_req[p]), .alloc_gnt(p_alloc_gnt[p]), .alloc_blk,
      .rd_note(p_rd_note[p]), .rd_blk(p_rd_blk[p]), .inj_err,
      .busy(p_busy[p]), .uncorrectable(p_unc[p]), .n_corr(p_corr[p]),
      .n_pages(p_pages[p]), .n_kv_flush(p_kvfl[p]), .n_pe_stall(p_stall[p]));
  end

  // ---------------- result collector (round robin) ----------------
  logic [PW-1:0]    rr, gsel;
  logic             gany;
  logic             gb_we;
  logic [GB_AW-1:0] gb_waddr;
  word_t            gb_wdata;

  always_comb begin
    gany = 1'b0;
    gsel = '0;
    for (int k = PLANES - 1; k >= 0; k--) begin
      int unsigned p;
      p = (int'(rr) + k) % PLANES;
      if (p_res_valid[p]) begin
        gany = 1'b1;
        gsel = PW'(p);
      end
    end
    for (int p = 0; p < PLANES; p++) p_res_ready[p] = gany && (int'(gsel) == p);
    gb_we    = gany;
    gb_waddr = GB_AW'({gsel, p_res[gsel].head, p_res[gsel].idx[7:0]});
    gb_wdata = p_res[gsel].val;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr        <= '0;
      n_results <= '0;
    end else if (gany) begin
      rr        <= (int'(gsel) == PLANES - 1) ? '0 : gsel + 1'b1;
      n_results <= n_results + 1'b1;
    end
  end

  global_buffer u_gbuf (
    .clk, .we(gb_we), .waddr(gb_waddr), .wdata(gb_wdata),
    .re(rd_en), .raddr(rd_addr), .rdata(rd_data));

  // ---------------- block manager ----------------
  always_comb begin
    alloc_any = 1'b0;
    alloc_sel = '0;
    for (int p = PLANES - 1; p >= 0; p--)
      if (p_alloc_req[p]) begin
        alloc_any = 1'b1;
        alloc_sel = PW'(p);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      alloc_active <= 1'b0;
      alloc_owner  <= '0;
    end else if (!alloc_active && alloc_any && !bm_busy) begin
      alloc_active <= 1'b1;
      alloc_owner  <= alloc_sel;
    end else if (alloc_active && (bm_gnt || bm_fail)) begin
      alloc_active <= 1'b0;
    end
  end

  always_comb
    for (int p = 0; p < PLANES; p++) p_alloc_gnt[p] = bm_gnt && alloc_active && (int'(alloc_owner) == p);

  block_manager #(.PLANES(PLANES)) u_bm (
    .clk, .rst_n,
    .alloc_req(alloc_active && !bm_gnt && !bm_fail), .alloc_plane(alloc_owner),
    .alloc_gnt(bm_gnt), .alloc_fail(bm_fail), .alloc_blk,
    .rd_note(p_rd_note), .rd_blk(p_rd_blk),
    .rel_req(1'b0), .rel_plane('0), .rel_blk('0),
    .refresh_valid, .refresh_plane, .refresh_blk, .refresh_ack, .busy(bm_busy));

  // ---------------- status ----------------
  always_comb begin
    busy          = (pend != '0);
    uncorrectable = 1'b0;
    n_pages       = '0;
    n_kv_flush    = '0;
    n_pe_stall    = '0;
    n_corr        = '0;
    for (int p = 0; p < PLANES; p++) begin
      busy          = busy | p_busy[p];
      uncorrectable = uncorrectable | p_unc[p];
      n_pages       = n_pages + p_pages[p];
      n_kv_flush    = n_kv_flush + p_kvfl[p];
      n_pe_stall    = n_pe_stall + p_stall[p];
      n_corr        = n_corr + 32'(p_corr[p]);
    end
  end
endmodule
