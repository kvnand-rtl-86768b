// block_manager: access-aware block allocation for KV cache blocks.
//
// Keeps, for every block of every plane it serves, a state (free / in use / retired),
// a program/erase counter and a page-read counter. An allocation picks a pseudo-random
// starting block (16-bit LFSR) and takes the first free, not worn-out block from there,
// so KV blocks move around the plane from one inference request to the next and wear
// is spread; the P/E counter is incremented for the erase that precedes reuse. Every
// page read of a block increments its read counter; when a counter reaches READ_LIMIT
// a refresh request names the block (the data must be migrated and the FTL updated,
// which is left to the firmware that handles the request). Releasing a block (end of
// an inference request, or after a refresh) makes it free again and clears its read
// count; a block whose P/E count reaches PE_LIMIT is retired instead.
// The paper states the policy (randomised blocks, access and P/E counters, refresh at
// the limits); the LFSR, the linear search and the limits' encoding are this design's.
// READ_LIMIT defaults to the 10^6 disturbance limit and PE_LIMIT to the 100K SLC
// endurance the paper quotes.
// Timing: an allocation takes 1 + (number of blocks skipped) cycles; reads and
// releases take one cycle each; a release waits while an allocation is searching.
// Every plane can report one page read per cycle.
module block_manager
  import kvnand_pkg::*;
#(
  parameter int unsigned PLANES     = PLANES_PER_DIE,
  parameter int unsigned BLOCKS     = BLOCKS_PER_PLANE,
  parameter int unsigned READ_LIMIT = 1000000,
  parameter int unsigned PE_LIMIT   = 100000,
  localparam int unsigned PW        = (PLANES > 1) ? $clog2(PLANES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // allocation
  input  logic          alloc_req,
  input  logic [PW-1:0] alloc_plane,
  output logic          alloc_gnt,
  output logic          alloc_fail,
  output blk_t          alloc_blk,
  // page read notification, one per plane per cycle
  input  logic          rd_note [PLANES],
  input  blk_t          rd_blk  [PLANES],
  // release
  input  logic          rel_req,
  input  logic [PW-1:0] rel_plane,
  input  blk_t          rel_blk,
  // refresh request
  output logic          refresh_valid,
  output logic [PW-1:0] refresh_plane,
  output blk_t          refresh_blk,
  input  logic          refresh_ack,
  output logic          busy
);
  typedef enum logic [1:0] {B_FREE = 2'd0, B_USED = 2'd1, B_RETIRED = 2'd2} bstate_e;

  localparam int unsigned N = PLANES * BLOCKS;
  bstate_e     bst   [N];
  logic [16:0] pe_c  [N];
  logic [19:0] rd_c  [N];

  logic [15:0] lfsr;
  logic        searching;
  logic [PW-1:0] s_plane;
  blk_t        s_blk;
  int unsigned s_cnt;

  function automatic int unsigned idx(logic [PW-1:0] p, blk_t b);
    return int'(p) * BLOCKS + int'(b);
  endfunction

  assign busy = searching;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr          <= 16'hACE1;
      searching     <= 1'b0;
      s_plane       <= '0;
      s_blk         <= '0;
      s_cnt         <= 0;
      alloc_gnt     <= 1'b0;
      alloc_fail    <= 1'b0;
      alloc_blk     <= '0;
      refresh_valid <= 1'b0;
      refresh_plane <= '0;
      refresh_blk   <= '0;
      for (int i = 0; i < N; i++) begin
        bst[i]  <= B_FREE;
        pe_c[i] <= '0;
        rd_c[i] <= '0;
      end
    end else begin
      lfsr       <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      alloc_gnt  <= 1'b0;
      alloc_fail <= 1'b0;
      if (refresh_ack) refresh_valid <= 1'b0;

      // page reads (a grant or release in the same cycle takes precedence)
      for (int p = 0; p < PLANES; p++) begin
        if (rd_note[p]) begin
          if (rd_c[idx(PW'(p), rd_blk[p])] + 1 >= 20'(READ_LIMIT) && !refresh_valid) begin
            refresh_valid <= 1'b1;
            refresh_plane <= PW'(p);
            refresh_blk   <= rd_blk[p];
          end
          rd_c[idx(PW'(p), rd_blk[p])] <= rd_c[idx(PW'(p), rd_blk[p])] + 1'b1;
        end
      end

      if (!searching) begin
        if (alloc_req && !alloc_gnt && !alloc_fail) begin
          searching <= 1'b1;
          s_plane   <= alloc_plane;
          s_blk     <= blk_t'(int'(lfsr) % BLOCKS);
          s_cnt     <= 0;
        end else if (rel_req) begin
          bst[idx(rel_plane, rel_blk)]  <= (pe_c[idx(rel_plane, rel_blk)] >= 17'(PE_LIMIT))
                                           ? B_RETIRED : B_FREE;
          rd_c[idx(rel_plane, rel_blk)] <= '0;
        end
      end else begin
        if (bst[idx(s_plane, s_blk)] == B_FREE && pe_c[idx(s_plane, s_blk)] < 17'(PE_LIMIT)) begin
          bst[idx(s_plane, s_blk)]  <= B_USED;
          pe_c[idx(s_plane, s_blk)] <= pe_c[idx(s_plane, s_blk)] + 1'b1;
          rd_c[idx(s_plane, s_blk)] <= '0;
          alloc_blk <= s_blk;
          alloc_gnt <= 1'b1;
          searching <= 1'b0;
        end else if (s_cnt == BLOCKS - 1) begin
          alloc_fail <= 1'b1;
          searching  <= 1'b0;
        end else begin
          s_blk <= (int'(s_blk) == BLOCKS - 1) ? '0 : s_blk + 1'b1;
          s_cnt <= s_cnt + 1;
        end
      end
    end
  end

  // read-only views of the counters
  function automatic logic [19:0] read_count(int unsigned p, int unsigned b);
    return rd_c[p * BLOCKS + b];
  endfunction
  function automatic logic [16:0] pe_count(int unsigned p, int unsigned b);
    return pe_c[p * BLOCKS + b];
  endfunction
endmodule
