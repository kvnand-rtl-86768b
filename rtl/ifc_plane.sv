// ifc_plane: everything under one flash plane of an IFC die. The flash array (model),
// the data/cache page register, the BCH decoder and encoder, the 16-FMAC PE, the
// per-plane KV buffer and a vector register, run by a plane sequencer.
//
// Operations (plane_cmd_t from the die's control logic):
//  * OP_GEMV / OP_ATTEND, over npages consecutive pages of one block. Page reads are
//    issued whenever the data register is free, so page p+1 is sensed while page p is
//    corrected and computed (steps 1/2 and 6/7 in the paper's timing diagrams). Each
//    page in the cache register is first checked and corrected by the decoder, then its
//    1024 data words stream into the PE, one per cycle, with the matching word of every
//    head's vector register: in dot mode the word of the row (Q slice or input vector
//    segment), in axpy mode the attention weight of the current token. Results go out
//    on res_*. Every page read is reported to the block manager (rd_note).
//  * OP_PROGRAM: the SoC streams a whole encoded page (1136 words) into the cache
//    register and it is programmed (discrete variant: KV pages come from the SoC buffer).
//  * OP_KV_APP: nwords KV words from the SoC are appended to KV-buffer slot `slot`
//    (compact variant). When a slot fills (256 words, one 1 KB sector) the plane, when
//    otherwise idle, encodes it with its own BCH encoder into the cache register and
//    programs sector plus parity as a partial page at the slot's mapped location
//    (step 5 of the compact flow).
// The vector register (8 heads x 256 words) is written by the die's broadcast
// (vec_we). Its size, the command set, the one-operation-at-a-time sequencing and
// rows not crossing page boundaries are this design's choices; the paper gives the
// blocks and the dataflow.
// Lint notes that stand: the plane command's upper row_len bits, the array's page
// count, the decoder's busy, the encoder's whole-remainder output, the KV buffer's flush
// slot number and the register's transfer strobe are outputs of shared blocks that this
// plane does not need (it sequences on done pulses and reads parity by words).
module ifc_plane
  import kvnand_pkg::*;
#(
  parameter int unsigned T_READ = T_READ_CYC,
  parameter int unsigned T_PROG = T_PROG_CYC
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  plane_cmd_t cmd,
  input  logic       vec_we,
  input  logic [2:0] vec_head,
  input  logic [7:0] vec_addr,
  input  word_t      vec_data,
  input  logic       wr_valid,
  output logic       wr_ready,
  input  word_t      wr_data,
  output logic       res_valid,
  input  logic       res_ready,
  output pe_res_t    res,
  output logic       alloc_req,
  input  logic       alloc_gnt,
  input  blk_t       alloc_blk,
  output logic       rd_note,
  output blk_t       rd_blk,
  input  logic [6:0] inj_err,
  output logic       busy,
  output logic       uncorrectable,
  output logic [15:0] n_corr,
  output logic [31:0] n_pages,
  output logic [31:0] n_kv_flush,
  output logic [31:0] n_pe_stall
);
  localparam int unsigned KV_SLOTS = 8;

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_FIN, S_PWR, S_PPROG, S_PWAIT, S_KVA, S_KVF} state_e;
  typedef enum logic [1:0] {C_WAIT, C_DEC, C_STREAM} cstate_e;
  typedef enum logic [2:0] {K_DATA, K_PAR, K_PROG, K_WAIT} kstate_e;

  state_e     st;
  cstate_e    cst;
  kstate_e    kst;
  plane_cmd_t c;
  logic [9:0] rd_issued, pg_done;
  logic [10:0] wcnt;          // word in page / word counter
  logic [9:0] wrow;           // word within the current row
  logic [10:0] tok;           // token (row) counter for axpy
  word_t      vreg [PE_HEADS][VREG_WORDS];

  // ---------------- submodule wires ----------------
  logic       arr_cmd_valid, arr_busy, arr_we, arr_done;
  logic [1:0] arr_op;
  col_t       arr_addr, arr_rd_addr, arr_col0, arr_pcol0;
  logic [10:0] arr_ncol;
  logic [5:0] arr_npcol;
  page_t      arr_page;
  blk_t       arr_blk;
  word_t      arr_wdata, arr_rdata;
  logic       data_valid, cache_valid, xfer;
  col_t       reg_rd_addr, fix_addr, reg_wr_addr;
  word_t      reg_rd_data, fix_mask, reg_wr_data;
  logic       fix_we, reg_wr_we, cache_load, cache_release;
  logic       dec_start, dec_busy, dec_done, dec_unc;
  logic [8:0] dec_ncorr;
  col_t       dec_rd_addr;
  logic       pe_start, pe_in_valid, pe_in_ready, pe_in_last, pe_busy;
  word_t      pe_x [PE_HEADS];
  logic       kvb_in_valid, kvb_in_ready, kvb_fl_valid, kvb_fl_ready;
  logic       kvb_fl_first, kvb_fl_last, kvb_pending;
  logic [2:0] kvb_fl_slot;
  blk_t       kvb_fl_blk;
  page_t      kvb_fl_page;
  col_t       kvb_fl_col;
  word_t      kvb_fl_data, enc_par_word;
  logic [31:0] kvb_nfl, arr_nrd, arr_npg;
  logic       enc_start, enc_valid;
  logic [4:0] enc_idx;
  logic [BCH_P-1:0] enc_parity;
  blk_t       kf_blk;
  page_t      kf_page;
  col_t       kf_col;

  flash_plane #(.T_READ(T_READ), .T_PROG(T_PROG)) u_array (
    .clk, .rst_n,
    .cmd_valid(arr_cmd_valid), .cmd_op(arr_op), .cmd_blk(arr_blk), .cmd_page(arr_page),
    .cmd_col0(arr_col0), .cmd_ncol(arr_ncol), .cmd_pcol0(arr_pcol0), .cmd_npcol(arr_npcol),
    .inj_err, .busy(arr_busy),
    .arr_we, .arr_addr, .arr_wdata, .arr_done, .arr_rd_addr, .arr_rdata,
    .n_reads(arr_nrd), .n_progs(arr_npg));

  page_register u_reg (
    .clk, .rst_n,
    .arr_we, .arr_addr, .arr_wdata, .arr_done, .arr_rd_addr, .arr_rdata, .data_valid,
    .cache_valid, .rd_addr(reg_rd_addr), .rd_data(reg_rd_data),
    .fix_we, .fix_addr, .fix_mask,
    .wr_we(reg_wr_we), .wr_addr(reg_wr_addr), .wr_data(reg_wr_data),
    .cache_load, .cache_release, .xfer);

  bch_decoder u_dec (
    .clk, .rst_n, .start(dec_start), .busy(dec_busy), .done(dec_done),
    .n_corr(dec_ncorr), .uncorrectable(dec_unc),
    .rd_addr(dec_rd_addr), .rd_data(reg_rd_data), .fix_we, .fix_addr, .fix_mask);

  fmac_pe u_pe (
    .clk, .rst_n, .start(pe_start), .mode_axpy(cmd.op == OP_ATTEND),
    .row_len(cmd.row_len), .nheads(cmd.nheads),
    .in_valid(pe_in_valid), .in_ready(pe_in_ready), .in_w(reg_rd_data), .in_x(pe_x),
    .in_last(pe_in_last),
    .out_valid(res_valid), .out_ready(res_ready), .out_val(res.val),
    .out_head(res.head), .out_idx(res.idx), .busy(pe_busy));

  kv_buffer #(.BUF_WORDS(2048), .SLOTS(KV_SLOTS)) u_kvb (
    .clk, .rst_n,
    .in_valid(kvb_in_valid), .in_ready(kvb_in_ready), .in_slot(c.slot[2:0]), .in_data(wr_data),
    .fl_valid(kvb_fl_valid), .fl_ready(kvb_fl_ready), .fl_first(kvb_fl_first),
    .fl_last(kvb_fl_last), .fl_slot(kvb_fl_slot), .fl_blk(kvb_fl_blk),
    .fl_page(kvb_fl_page), .fl_col(kvb_fl_col), .fl_data(kvb_fl_data),
    .alloc_req, .alloc_gnt, .alloc_blk, .pending(kvb_pending), .n_flushes(kvb_nfl));

  bch_encoder u_enc (
    .clk, .rst_n, .start(enc_start), .in_valid(enc_valid), .in_data(kvb_fl_data),
    .par_idx(enc_idx), .par_word(enc_par_word), .parity(enc_parity));

  // ---------------- combinational control ----------------
  logic issue_rd;
  logic row_last;      // current word ends its row
  assign row_last = ({wrow, 1'b0} + 11'd2) >= c.row_len;
  assign issue_rd = (st == S_RUN) && (rd_issued < c.npages) && !arr_busy && !data_valid && !arr_done;

  always_comb begin
    arr_cmd_valid = 1'b0;
    arr_op        = 2'd0;
    arr_blk       = c.blk;
    arr_page      = page_t'(int'(c.page) + int'(rd_issued));
    arr_col0      = '0;
    arr_ncol      = 11'(PAGE_WORDS);
    arr_pcol0     = '0;
    arr_npcol     = '0;
    if (issue_rd) arr_cmd_valid = 1'b1;
    if (st == S_PPROG && !arr_busy) begin
      arr_cmd_valid = 1'b1;
      arr_op        = 2'd1;
      arr_page      = c.page;
    end
    if (st == S_KVF && kst == K_PROG && !arr_busy) begin
      arr_cmd_valid = 1'b1;
      arr_op        = 2'd1;
      arr_blk       = kf_blk;
      arr_page      = kf_page;
      arr_col0      = kf_col;
      arr_ncol      = 11'(CW_DATA_WORDS);
      arr_pcol0     = col_t'(DATA_WORDS + (int'(kf_col) / CW_DATA_WORDS) * CW_PAR_WORDS);
      arr_npcol     = 6'(CW_PAR_WORDS);
    end
  end

  assign rd_note = issue_rd;
  assign rd_blk  = c.blk;

  always_comb begin
    for (int h = 0; h < PE_HEADS; h++) begin
      if (c.op == OP_ATTEND) pe_x[h] = {16'd0, tok[0] ? vreg[h][tok[8:1]][31:16] : vreg[h][tok[8:1]][15:0]};
      else                   pe_x[h] = vreg[h][wrow[7:0]];
    end
  end

  always_comb begin
    cmd_ready    = (st == S_IDLE) && !(kvb_fl_valid && !cache_valid && !data_valid && !arr_busy);
    reg_rd_addr  = (cst == C_STREAM) ? col_t'(wcnt) : dec_rd_addr;
    dec_start    = (st == S_RUN) && (cst == C_WAIT) && cache_valid;
    pe_in_valid  = (st == S_RUN) && (cst == C_STREAM);
    pe_in_last   = (pg_done + 10'd1 == c.npages) && (wcnt == 11'(DATA_WORDS - 1));
    pe_start     = (st == S_IDLE) && cmd_valid && cmd_ready &&
                   (cmd.op == OP_GEMV || cmd.op == OP_ATTEND);
    cache_release = ((st == S_RUN) && (cst == C_STREAM) && pe_in_ready && (wcnt == 11'(DATA_WORDS - 1)))
                 || ((st == S_PWAIT) && !arr_busy)
                 || ((st == S_KVF) && (kst == K_WAIT) && !arr_busy);
    cache_load   = ((st == S_PWR) && wr_valid && (wcnt == 11'(PAGE_WORDS - 1)))
                 || ((st == S_KVF) && (kst == K_PAR) && (enc_idx == 5'(CW_PAR_WORDS - 1)));
    reg_wr_we    = 1'b0;
    reg_wr_addr  = col_t'(wcnt);
    reg_wr_data  = wr_data;
    if (st == S_PWR && wr_valid) reg_wr_we = 1'b1;
    if (st == S_KVF && kst == K_DATA && kvb_fl_valid) begin
      reg_wr_we   = 1'b1;
      reg_wr_addr = col_t'(int'(kvb_fl_col) + int'(wcnt));
      reg_wr_data = kvb_fl_data;
    end
    if (st == S_KVF && kst == K_PAR) begin
      reg_wr_we   = 1'b1;
      reg_wr_addr = col_t'(DATA_WORDS + (int'(kf_col) / CW_DATA_WORDS) * CW_PAR_WORDS + int'(enc_idx));
      reg_wr_data = enc_par_word;
    end
    kvb_fl_ready = (st == S_KVF) && (kst == K_DATA);
    enc_start    = (st == S_KVF) && (kst == K_DATA) && kvb_fl_first;
    enc_valid    = (st == S_KVF) && (kst == K_DATA) && kvb_fl_valid;
    kvb_in_valid = (st == S_KVA) && wr_valid;
    wr_ready     = (st == S_PWR) || ((st == S_KVA) && kvb_in_ready);
  end

  // ---------------- sequencer ----------------
  always_ff @(posedge clk) begin
    if (vec_we) vreg[vec_head][vec_addr] <= vec_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st            <= S_IDLE;
      cst           <= C_WAIT;
      kst           <= K_DATA;
      c             <= '0;
      rd_issued     <= '0;
      pg_done       <= '0;
      wcnt          <= '0;
      wrow          <= '0;
      tok           <= '0;
      enc_idx       <= '0;
      kf_blk        <= '0;
      kf_page       <= '0;
      kf_col        <= '0;
      uncorrectable <= 1'b0;
      n_corr        <= '0;
      n_pe_stall    <= '0;
    end else begin
      if (issue_rd) rd_issued <= rd_issued + 1'b1;
      if (dec_done) begin
        n_corr <= n_corr + 16'(dec_ncorr);
        if (dec_unc) uncorrectable <= 1'b1;
      end
      if (pe_in_valid && !pe_in_ready) n_pe_stall <= n_pe_stall + 1'b1;
      case (st)
        S_IDLE: begin
          if (kvb_fl_valid && !cache_valid && !data_valid && !arr_busy) begin
            st      <= S_KVF;
            kst     <= K_DATA;
            wcnt    <= '0;
            enc_idx <= '0;
            kf_blk  <= kvb_fl_blk;
            kf_page <= kvb_fl_page;
            kf_col  <= kvb_fl_col;
          end else if (cmd_valid) begin
            c         <= cmd;
            rd_issued <= '0;
            pg_done   <= '0;
            wcnt      <= '0;
            wrow      <= '0;
            tok       <= '0;
            cst       <= C_WAIT;
            case (cmd.op)
              OP_GEMV, OP_ATTEND: st <= (cmd.npages == 0) ? S_IDLE : S_RUN;
              OP_PROGRAM:         st <= S_PWR;
              OP_KV_APP:          st <= (cmd.nwords == 0) ? S_IDLE : S_KVA;
              default:            st <= S_IDLE;
            endcase
          end
        end
        S_RUN: begin
          case (cst)
            C_WAIT:   if (cache_valid) cst <= C_DEC;
            C_DEC:    if (dec_done) begin cst <= C_STREAM; wcnt <= '0; end
            C_STREAM: if (pe_in_ready) begin
              if (row_last) begin
                wrow <= '0;
                tok  <= tok + 1'b1;
              end else begin
                wrow <= wrow + 1'b1;
              end
              if (wcnt == 11'(DATA_WORDS - 1)) begin
                wcnt    <= '0;
                pg_done <= pg_done + 1'b1;
                cst     <= C_WAIT;
                if (pg_done + 10'd1 == c.npages) st <= S_FIN;
              end else begin
                wcnt <= wcnt + 1'b1;
              end
            end
            default: cst <= C_WAIT;
          endcase
        end
        S_FIN: if (!pe_busy) st <= S_IDLE;
        S_PWR: if (wr_valid) begin
          if (wcnt == 11'(PAGE_WORDS - 1)) begin
            wcnt <= '0;
            st   <= S_PPROG;
          end else begin
            wcnt <= wcnt + 1'b1;
          end
        end
        S_PPROG: if (!arr_busy) st <= S_PWAIT;
        S_PWAIT: if (!arr_busy) st <= S_IDLE;
        S_KVA: if (wr_valid && kvb_in_ready) begin
          if (wcnt + 11'd1 == c.nwords) begin
            wcnt <= '0;
            st   <= S_IDLE;
          end else begin
            wcnt <= wcnt + 1'b1;
          end
        end
        S_KVF: begin
          case (kst)
            K_DATA: if (kvb_fl_valid) begin
              wcnt <= wcnt + 1'b1;
              if (kvb_fl_last) begin
                kst     <= K_PAR;
                enc_idx <= '0;
              end
            end
            K_PAR: begin
              if (enc_idx == 5'(CW_PAR_WORDS - 1)) kst <= K_PROG;
              else enc_idx <= enc_idx + 1'b1;
            end
            K_PROG: if (!arr_busy) kst <= K_WAIT;
            K_WAIT: if (!arr_busy) begin
              kst <= K_DATA;
              st  <= S_IDLE;
            end
            default: kst <= K_DATA;
          endcase
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy       = (st != S_IDLE) || kvb_pending || arr_busy;
  assign n_pages    = arr_nrd;
  assign n_kv_flush = kvb_nfl;

  a_pe_rows: assert property (@(posedge clk) disable iff (!rst_n)
      pe_start |-> (cmd.row_len >= 11'd2) && (cmd.row_len <= 11'(2 * VREG_WORDS)));
endmodule
