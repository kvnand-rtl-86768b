// flash_controller: the SoC's multi-channel flash controller. One IFC die per channel
// (8 channels x 1 die in the main configuration); every die has its own link.
//
// Host side (the NPU / firmware):
//  * hc_*: a die command (die_cmd_t) sent to every die in hc_dies at once (the same
//    operation on several dies, e.g. a GEMV spread over all G1 dies). hc_ready is high
//    once every addressed die has taken it.
//  * hw_*: data words (broadcast vectors, KV words, pages) sent to the dies in hw_dies;
//    the word is taken when every addressed die is ready.
//  * hr_*: reads of one die's global buffer; data one cycle after hr_en plus the die's
//    one-cycle buffer latency (two cycles in total).
// KV write path of the discrete variant: a full SoC KV-buffer slot (one 4 KB page of
// one head and layer, fl_* stream) is BCH-encoded here, "in the SoC flash controller
// as in the discrete design", and programmed into a KV die: the controller sends
// OP_PROGRAM, streams the 1024 data words through to the die while encoding them, keeps
// the 28 parity words of each 1 KB codeword (28 cycles per codeword to copy them out of
// the encoder) and sends the 112 parity words after the data. While this runs the host
// ports are held off. Slot s goes to KV die G1_DIES + (s mod G2), plane (s / G2) mod 32,
// so the streams of a step spread over all KV dies and planes; the page's block comes
// from the SoC block manager and is used in every KV plane (a multi-plane superblock).
// The paper gives the controller's role, its channels and where the encoder sits; the
// link, the command set, the slot-to-die mapping and the arbitration are this design's.
// Lint note that stands: the encoder's whole-remainder output is unused; parity is
// read out a word at a time through par_idx.
module flash_controller
  import kvnand_pkg::*;
#(
  parameter int unsigned NUM_DIES = 8,
  parameter int unsigned G1_DIES  = 4,
  parameter int unsigned SLOTS    = 1280,
  localparam int unsigned DW      = (NUM_DIES > 1) ? $clog2(NUM_DIES) : 1,
  localparam int unsigned SW      = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned GB_AW   = $clog2(260 * 1024 / 4)
) (
  input  logic             clk,
  input  logic             rst_n,
  // host
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
  // SoC KV buffer flush stream
  input  logic                fl_valid,
  output logic                fl_ready,
  input  logic                fl_first,
  input  logic                fl_last,
  input  logic [SW-1:0]       fl_slot,
  input  blk_t                fl_blk,
  input  page_t               fl_page,
  input  word_t               fl_data,
  // dies
  output logic                d_cmd_valid [NUM_DIES],
  input  logic                d_cmd_ready [NUM_DIES],
  output die_cmd_t            d_cmd,
  output logic                d_wr_valid  [NUM_DIES],
  input  logic                d_wr_ready  [NUM_DIES],
  output wkind_e              d_wr_kind,
  output logic [10:0]         d_wr_addr,
  output word_t               d_wr_data,
  output logic                d_rd_en     [NUM_DIES],
  output logic [GB_AW-1:0]    d_rd_addr,
  input  word_t               d_rd_data   [NUM_DIES],
  output logic [31:0]         n_kv_pages
);
  localparam int unsigned G2 = (NUM_DIES > G1_DIES) ? NUM_DIES - G1_DIES : 1;

  typedef enum logic [2:0] {K_IDLE, K_CMD, K_DATA, K_COPY, K_PAR} kstate_e;
  kstate_e      ks;
  logic [DW-1:0] kdie;
  logic [4:0]    kplane;
  blk_t          kblk;
  page_t         kpage;
  logic [10:0]   kcnt;          // data word count, then parity word count
  logic [4:0]    kpi;           // parity word being copied
  word_t         pbuf [CW_PER_PAGE * CW_PAR_WORDS];
  logic [NUM_DIES-1:0] hc_sent;    // dies that have taken the current host command
  logic [NUM_DIES-1:0] hc_take;

  // encoder
  logic  enc_start, enc_valid;
  word_t enc_par;
  logic [BCH_P-1:0] enc_parity;   // whole remainder, not needed here (read by words)
  bch_encoder u_enc (
    .clk, .rst_n, .start(enc_start), .in_valid(enc_valid), .in_data(fl_data),
    .par_idx(kpi), .par_word(enc_par), .parity(enc_parity));

  logic kdie_ready;
  assign kdie_ready = d_wr_ready[kdie];

  always_comb begin
    // die commands
    d_cmd = hc_cmd;
    if (ks == K_CMD) begin
      d_cmd            = '0;
      d_cmd.plane_mask = PLANES_PER_DIE'(1) << kplane;
      d_cmd.pc.op      = OP_PROGRAM;
      d_cmd.pc.blk     = kblk;
      d_cmd.pc.page    = kpage;
      d_cmd.pc.npages  = 10'd1;
    end
    for (int d = 0; d < NUM_DIES; d++)
      d_cmd_valid[d] = (ks == K_CMD) ? (DW'(d) == kdie)
                                     : (ks == K_IDLE && hc_valid && hc_dies[d] && !hc_sent[d]);
    // die data words
    d_wr_kind = hw_kind;
    d_wr_addr = hw_addr;
    d_wr_data = hw_data;
    hw_ready  = (ks == K_IDLE);
    for (int d = 0; d < NUM_DIES; d++)
      if (hw_dies[d] && !d_wr_ready[d]) hw_ready = 1'b0;
    for (int d = 0; d < NUM_DIES; d++)
      d_wr_valid[d] = (ks == K_IDLE) && hw_valid && hw_ready && hw_dies[d];
    fl_ready  = 1'b0;
    enc_valid = 1'b0;
    enc_start = 1'b0;
    if (ks == K_DATA || ks == K_PAR) begin
      d_wr_kind = WK_PROG;
      d_wr_addr = 11'(kplane);
      d_wr_data = (ks == K_DATA) ? fl_data : pbuf[kcnt[6:0]];
      for (int d = 0; d < NUM_DIES; d++)
        d_wr_valid[d] = (DW'(d) == kdie) && ((ks == K_PAR) || fl_valid);
      if (ks == K_DATA) begin
        fl_ready  = kdie_ready;
        enc_valid = fl_valid && kdie_ready;
        enc_start = enc_valid && (kcnt[7:0] == 8'd0);
      end
    end
    // reads
    d_rd_addr = hr_addr;
    for (int d = 0; d < NUM_DIES; d++) d_rd_en[d] = hr_en && (DW'(d) == hr_die);
  end

  // host command accepted once every addressed die has taken it
  always_comb begin
    for (int d = 0; d < NUM_DIES; d++) hc_take[d] = d_cmd_valid[d] && d_cmd_ready[d];
    hc_ready = (ks == K_IDLE) && hc_valid && (((hc_sent | hc_take) & hc_dies) == hc_dies);
  end

  logic [DW-1:0] hr_die_q;
  assign hr_data = d_rd_data[hr_die_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ks         <= K_IDLE;
      kdie       <= '0;
      kplane     <= '0;
      kblk       <= '0;
      kpage      <= '0;
      kcnt       <= '0;
      kpi        <= '0;
      hc_sent    <= '0;
      hr_die_q   <= '0;
      n_kv_pages <= '0;
      for (int i = 0; i < CW_PER_PAGE * CW_PAR_WORDS; i++) pbuf[i] <= '0;
    end else begin
      if (hr_en) hr_die_q <= hr_die;
      if (ks == K_IDLE && hc_valid) hc_sent <= hc_ready ? '0 : (hc_sent | hc_take);
      case (ks)
        K_IDLE: if (fl_valid && fl_first && hc_sent == '0 && !(hc_valid && hc_take != '0)) begin
          kdie   <= DW'(G1_DIES + int'(fl_slot) % G2);
          kplane <= 5'((int'(fl_slot) / G2) % PLANES_PER_DIE);
          kblk   <= fl_blk;
          kpage  <= fl_page;
          kcnt   <= '0;
          ks     <= K_CMD;
        end
        K_CMD: if (d_cmd_ready[kdie]) ks <= K_DATA;
        K_DATA: if (fl_valid && kdie_ready) begin
          kcnt <= kcnt + 1'b1;
          if (kcnt[7:0] == 8'hFF) begin
            kpi <= '0;
            ks  <= K_COPY;
          end
        end
        K_COPY: begin
          pbuf[(int'(kcnt[10:8]) - 1) * CW_PAR_WORDS + int'(kpi)] <= enc_par;
          if (kpi == 5'(CW_PAR_WORDS - 1)) begin
            if (kcnt == 11'(DATA_WORDS)) begin
              kcnt <= '0;
              ks   <= K_PAR;
            end else begin
              ks <= K_DATA;
            end
          end else begin
            kpi <= kpi + 1'b1;
          end
        end
        K_PAR: if (kdie_ready) begin
          if (kcnt == 11'(CW_PER_PAGE * CW_PAR_WORDS - 1)) begin
            n_kv_pages <= n_kv_pages + 1'b1;
            ks         <= K_IDLE;
          end else begin
            kcnt <= kcnt + 1'b1;
          end
        end
        default: ks <= K_IDLE;
      endcase
    end
  end

  // a flush stream is one whole page whose last word ends the data phase
  a_fl_last: assert property (@(posedge clk) disable iff (!rst_n)
    (ks == K_DATA && fl_valid && fl_ready && fl_last) |-> (kcnt == 11'(DATA_WORDS - 1)));
endmodule
