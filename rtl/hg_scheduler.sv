// hg_scheduler: orders the two per-layer attention stages over the head groups (HGs)
// of one decode step, in either variant.
//
//  * Discrete (compact = 0): the weight dies (G1) generate Q/K/V for HG i+1 while the
//    KV dies (G2) run Logit/Attend for HG i (head-group pipelining). QKV of HG i can
//    start as soon as QKV of HG i-1 is done; attention of HG i starts once its QKV
//    is done and attention of HG i-1 has finished.
//  * Compact (compact = 1): every die holds weights and KV cache, so the two stages
//    share the hardware and do not overlap: QKV for all HGs is generated first (head
//    parallelism), then attention runs for every HG.
// The stages themselves are run by the flash controller and the dies; this block only
// issues qkv_start/att_start pulses with the HG number and waits for the matching
// done pulses. n_overlap counts cycles in which both stages were active; n_switch
// counts starts whose variant differs from the previous start (a context-length mode
// switch).
// The pipelining rule and the compact sequencing are the paper's; the handshake and
// the counters are this design's choices.
module hg_scheduler
  import kvnand_pkg::*;
#(
  parameter int unsigned MAX_HG = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        compact,
  input  logic [7:0]  n_hg,        // head groups this step, 1..MAX_HG
  output logic        qkv_start,
  output logic [7:0]  qkv_hg,
  input  logic        qkv_done,
  output logic        att_start,
  output logic [7:0]  att_hg,
  input  logic        att_done,
  output logic        busy,
  output logic        done,
  output logic [31:0] n_overlap,
  output logic [31:0] n_switch
);
  logic       mode_c, last_mode, started_once;
  logic [7:0] nh;
  logic [7:0] q_next, q_fin, a_next, a_fin;
  logic       q_busy, a_busy;
  logic       q_go, a_go;

  always_comb begin
    q_go = busy && !q_busy && (q_next < nh) && !(mode_c && a_busy);
    a_go = busy && !a_busy && (a_next < q_fin) && !q_go
           && (!mode_c || (q_fin == nh));
  end

  assign qkv_start = q_go;
  assign qkv_hg    = q_next;
  assign att_start = a_go;
  assign att_hg    = a_next;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy         <= 1'b0;
      done         <= 1'b0;
      mode_c       <= 1'b0;
      last_mode    <= 1'b0;
      started_once <= 1'b0;
      nh           <= '0;
      q_next       <= '0;
      q_fin        <= '0;
      a_next       <= '0;
      a_fin        <= '0;
      q_busy       <= 1'b0;
      a_busy       <= 1'b0;
      n_overlap    <= '0;
      n_switch     <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start && n_hg != 0) begin
          busy         <= 1'b1;
          mode_c       <= compact;
          nh           <= n_hg;
          q_next       <= '0;
          q_fin        <= '0;
          a_next       <= '0;
          a_fin        <= '0;
          started_once <= 1'b1;
          last_mode    <= compact;
          if (started_once && compact != last_mode) n_switch <= n_switch + 1'b1;
        end
      end else begin
        if (q_go) begin
          q_busy <= 1'b1;
          q_next <= q_next + 1'b1;
        end
        if (a_go) begin
          a_busy <= 1'b1;
          a_next <= a_next + 1'b1;
        end
        if (q_busy && qkv_done) begin
          q_busy <= 1'b0;
          q_fin  <= q_fin + 1'b1;
        end
        if (a_busy && att_done) begin
          a_busy <= 1'b0;
          a_fin  <= a_fin + 1'b1;
          if (a_fin + 1'b1 == nh) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
        if (q_busy && a_busy) n_overlap <= n_overlap + 1'b1;
      end
    end
  end

  // a done pulse only for a stage that is running
  a_qdone: assert property (@(posedge clk) disable iff (!rst_n) qkv_done |-> q_busy);
  a_adone: assert property (@(posedge clk) disable iff (!rst_n) att_done |-> a_busy);
  initial assert (MAX_HG <= 255);
endmodule
