// fmac_pe: the processing element of one flash plane, 16 FMACs arranged as
// LANES (2) page elements per cycle times HEADS (8) query vectors.
//
// Each cycle it takes one 32-bit word of the corrected page (two BF16 elements) and,
// for every active head h, one word of that head's broadcast vector. The page element
// is shared by all heads, so one page read serves up to h/k query heads of a GQA head
// group; a plain weight GEMV uses one head and leaves 14 FMACs idle, as the paper notes.
//
// Two modes (both follow the paper's Logit and Attend GEMVs; their encoding is this
// design's own):
//  * dot  (weight GEMV and Logit Q x K^T): the page is a sequence of rows of row_len
//    elements; for each row and head the result is sum_i w[i] * x_h[i]. Each lane keeps
//    its own FP32 partial and the two lanes are added when the row ends.
//  * axpy (Attend S x V): each row is one token's V slice; lane l of head h accumulates
//    acc[h][i] += s_h * v[i], where s_h is the attention weight in bits [15:0] of the
//    head's vector word. The row_len x nheads sums are emitted after in_last.
//
// Interface: start (one cycle, with mode/row_len/nheads) clears the accumulators;
// words are accepted on in_valid && in_ready; in_last marks the final word of the whole
// operation. Results leave one FP32 value per cycle on out_valid/out_ready together
// with the head and the row (dot) or element (axpy) index. While results drain the
// input is stalled (in_ready = 0), so a row yields nheads stall cycles.
// A word is absorbed in the cycle it is accepted; a dot result appears the cycle after
// the last word of its row.
// Lint note that stands: the upper bits of the integer head index are unused.
module fmac_pe
  import kvnand_pkg::*;
#(
  parameter int unsigned LANES     = PE_LANES,
  parameter int unsigned HEADS     = PE_HEADS,
  parameter int unsigned ACC_DEPTH = 16          // max elements per token in axpy mode
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        mode_axpy,
  input  logic [10:0] row_len,
  input  logic [3:0]  nheads,
  input  logic        in_valid,
  output logic        in_ready,
  input  word_t       in_w,
  input  word_t       in_x [HEADS],
  input  logic        in_last,
  output logic        out_valid,
  input  logic        out_ready,
  output fp32_t       out_val,
  output logic [2:0]  out_head,
  output logic [10:0] out_idx,
  output logic        busy
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN_ROW, S_DRAIN_ALL} state_e;
  state_e      state;
  logic        axpy_q;
  logic [10:0] row_len_q;
  logic [3:0]  nheads_q;
  logic [9:0]  wc;          // word within the current row
  logic [10:0] rc;          // row counter (dot)
  logic        last_seen;
  fp32_t       acc [HEADS][ACC_DEPTH];
  fp32_t       res [HEADS];
  fp32_t       fm_out [HEADS][LANES];
  logic [2:0]  dh;
  logic [10:0] di;

  logic accept;
  logic row_end;
  assign in_ready = (state == S_RUN);
  assign accept   = in_valid && in_ready;
  assign row_end  = ({wc, 1'b0} + 11'(LANES)) >= row_len_q;

  // the 16 FMAC units
  for (genvar h = 0; h < HEADS; h++) begin : g_h
    for (genvar l = 0; l < LANES; l++) begin : g_l
      bf16_t a_op, b_op;
      fp32_t acc_in;
      int unsigned idx;
      always_comb begin
        a_op   = in_w[16*l +: 16];
        b_op   = axpy_q ? in_x[h][15:0] : in_x[h][16*l +: 16];
        idx    = axpy_q ? (int'(wc) * LANES + l) % ACC_DEPTH : l;
        acc_in = acc[h][idx];
      end
      fmac u_fmac (.a(a_op), .b(b_op), .acc_in(acc_in), .acc_out(fm_out[h][l]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      axpy_q    <= 1'b0;
      row_len_q <= 11'd2;
      nheads_q  <= 4'd1;
      wc        <= '0;
      rc        <= '0;
      last_seen <= 1'b0;
      dh        <= '0;
      di        <= '0;
      for (int h = 0; h < HEADS; h++) begin
        res[h] <= '0;
        for (int i = 0; i < ACC_DEPTH; i++) acc[h][i] <= '0;
      end
    end else begin
      if (start) begin
        state     <= S_RUN;
        axpy_q    <= mode_axpy;
        row_len_q <= row_len;
        nheads_q  <= (nheads == 0) ? 4'd1 : ((nheads > 4'(HEADS)) ? 4'(HEADS) : nheads);
        wc        <= '0;
        rc        <= '0;
        last_seen <= 1'b0;
        for (int h = 0; h < HEADS; h++)
          for (int i = 0; i < ACC_DEPTH; i++) acc[h][i] <= '0;
      end else begin
        case (state)
          S_RUN: if (accept) begin
            if (!axpy_q) begin
              if (row_end) begin
                for (int h = 0; h < HEADS; h++) begin
                  res[h]    <= fp32_add(fm_out[h][0], fm_out[h][LANES-1]);
                  acc[h][0] <= '0;
                  acc[h][1] <= '0;
                end
                wc        <= '0;
                dh        <= '0;
                last_seen <= in_last;
                state     <= S_DRAIN_ROW;
              end else begin
                for (int h = 0; h < HEADS; h++)
                  for (int l = 0; l < LANES; l++) acc[h][l] <= fm_out[h][l];
                wc <= wc + 1'b1;
              end
            end else begin
              for (int h = 0; h < HEADS; h++)
                for (int l = 0; l < LANES; l++)
                  acc[h][(int'(wc) * LANES + l) % ACC_DEPTH] <= fm_out[h][l];
              wc <= row_end ? '0 : wc + 1'b1;
              if (in_last) begin
                dh    <= '0;
                di    <= '0;
                state <= S_DRAIN_ALL;
              end
            end
          end
          S_DRAIN_ROW: if (out_ready) begin
            if (4'(dh) + 4'd1 >= nheads_q) begin
              dh    <= '0;
              rc    <= rc + 1'b1;
              state <= last_seen ? S_IDLE : S_RUN;
            end else begin
              dh <= dh + 1'b1;
            end
          end
          S_DRAIN_ALL: if (out_ready) begin
            if (di + 11'd1 >= row_len_q) begin
              di <= '0;
              if (4'(dh) + 4'd1 >= nheads_q) state <= S_IDLE;
              else dh <= dh + 1'b1;
            end else begin
              di <= di + 1'b1;
            end
          end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    out_valid = (state == S_DRAIN_ROW) || (state == S_DRAIN_ALL);
    out_head  = dh;
    out_idx   = (state == S_DRAIN_ROW) ? rc : di;
    out_val   = (state == S_DRAIN_ROW) ? res[dh] : acc[dh][di[$clog2(ACC_DEPTH)-1:0]];
    busy      = (state != S_IDLE);
  end

  // axpy rows must fit in the accumulator file; rows are a whole number of words
  a_rowlen: assert property (@(posedge clk) disable iff (!rst_n)
      start |-> (row_len[0] == 1'b0) && (row_len != 0) && (!mode_axpy || row_len <= 11'(ACC_DEPTH)));
endmodule
