// kv_buffer: KV buffer with the page-level KV cache mapping.
//
// Newly generated K or V words arrive tagged with a slot: one slot per stream that
// must stay contiguous in flash (one layer's K or V of the head this buffer serves).
// Each slot owns SLOT_WORDS words of the buffer. Words are appended in token order;
// when a slot is full its contents are flushed as one program unit to the slot's
// current flash location, so every flash page holds consecutive tokens of a single
// layer and head instead of the generation-order mix. The mapping table keeps, per
// slot, the current block, page and column; a flush advances the column by
// SLOT_WORDS (partial-page program when SLOT_WORDS < 1024), moves to the next page when
// the page's 4 KB of data is full and asks the block manager for a fresh block when
// the block's 768 pages are used up (or on the slot's first flush).
//
// Two instances appear in the design, as in the paper: 8 KB inside every plane for the
// compact variant, and a 5 MB SRAM on the SoC for the discrete variant. Slot count,
// slot size and the handshakes are this design's choices; the paper gives the sizes,
// the "fill a page with one head of one layer, then write" rule and partial-page
// updates.
// Interface: in_valid/in_ready/in_slot/in_data append one word per cycle; a word for
// the slot being flushed, or for a full slot, waits (in_ready = 0). The flush stream
// fl_valid/fl_ready carries SLOT_WORDS words with fl_first/fl_last and the target
// (fl_blk, fl_page, fl_col of the first word). alloc_req/alloc_gnt/alloc_blk fetch a
// block; pending is high from a slot filling until its flush has been sent.
// Memory reads are combinational.
module kv_buffer
  import kvnand_pkg::*;
#(
  parameter int unsigned BUF_WORDS  = 2048,                    // 8 KB
  parameter int unsigned SLOTS      = 8,
  parameter int unsigned SLOT_WORDS = BUF_WORDS / SLOTS,       // 256 = one 1 KB codeword
  localparam int unsigned SW        = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [SW-1:0] in_slot,
  input  word_t         in_data,
  output logic          fl_valid,
  input  logic          fl_ready,
  output logic          fl_first,
  output logic          fl_last,
  output logic [SW-1:0] fl_slot,
  output blk_t          fl_blk,
  output page_t         fl_page,
  output col_t          fl_col,
  output word_t         fl_data,
  output logic          alloc_req,
  input  logic          alloc_gnt,
  input  blk_t          alloc_blk,
  output logic          pending,     // a full slot waits for or is in its flush
  output logic [31:0]   n_flushes
);
  localparam int unsigned FW = $clog2(SLOT_WORDS + 1);

  word_t          mem [SLOTS * SLOT_WORDS];
  logic [FW-1:0]  fill [SLOTS];
  logic           mvalid [SLOTS];
  blk_t           mblk [SLOTS];
  page_t          mpage [SLOTS];
  col_t           mcol [SLOTS];

  typedef enum logic [1:0] {F_IDLE, F_ALLOC, F_SEND} fstate_e;
  fstate_e        fst;
  logic [SW-1:0]  fs;         // slot being flushed
  logic [FW-1:0]  fi;         // word within flush

  // first full slot
  logic           any_full;
  logic [SW-1:0]  full_slot;
  always_comb begin
    any_full  = 1'b0;
    full_slot = '0;
    for (int s = SLOTS - 1; s >= 0; s--)
      if (fill[s] == FW'(SLOT_WORDS)) begin
        any_full  = 1'b1;
        full_slot = SW'(s);
      end
  end

  assign in_ready = (fill[in_slot] != FW'(SLOT_WORDS));

  always_ff @(posedge clk) begin
    if (in_valid && in_ready)
      mem[int'(in_slot) * SLOT_WORDS + int'(fill[in_slot])] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fst       <= F_IDLE;
      fs        <= '0;
      fi        <= '0;
      n_flushes <= '0;
      for (int s = 0; s < SLOTS; s++) begin
        fill[s]   <= '0;
        mvalid[s] <= 1'b0;
        mblk[s]   <= '0;
        mpage[s]  <= '0;
        mcol[s]   <= '0;
      end
    end else begin
      if (in_valid && in_ready) fill[in_slot] <= fill[in_slot] + 1'b1;
      case (fst)
        F_IDLE: if (any_full) begin
          fs  <= full_slot;
          fi  <= '0;
          fst <= mvalid[full_slot] ? F_SEND : F_ALLOC;
        end
        F_ALLOC: if (alloc_gnt) begin
          mvalid[fs] <= 1'b1;
          mblk[fs]   <= alloc_blk;
          mpage[fs]  <= '0;
          mcol[fs]   <= '0;
          fst        <= F_SEND;
        end
        F_SEND: if (fl_ready) begin
          if (fi == FW'(SLOT_WORDS - 1)) begin
            fill[fs]  <= '0;
            n_flushes <= n_flushes + 1'b1;
            fst       <= F_IDLE;
            if (int'(mcol[fs]) + SLOT_WORDS >= DATA_WORDS) begin
              mcol[fs] <= '0;
              if (int'(mpage[fs]) == PAGES_PER_BLOCK - 1) mvalid[fs] <= 1'b0;
              else mpage[fs] <= mpage[fs] + 1'b1;
            end else begin
              mcol[fs] <= mcol[fs] + col_t'(SLOT_WORDS);
            end
          end else begin
            fi <= fi + 1'b1;
          end
        end
        default: fst <= F_IDLE;
      endcase
    end
  end

  always_comb begin
    fl_valid  = (fst == F_SEND);
    fl_first  = (fi == '0);
    fl_last   = (fi == FW'(SLOT_WORDS - 1));
    fl_slot   = fs;
    fl_blk    = mblk[fs];
    fl_page   = mpage[fs];
    fl_col    = mcol[fs];
    fl_data   = mem[int'(fs) * SLOT_WORDS + int'(fi)];
    alloc_req = (fst == F_ALLOC);
    pending   = any_full || (fst != F_IDLE);
  end

  // a flush unit is a whole number of 1 KB codewords or divides one page evenly
  initial assert (DATA_WORDS % SLOT_WORDS == 0 && SLOT_WORDS > 0);
endmodule
