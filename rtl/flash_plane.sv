// flash_plane: behavioural model of one 3D NAND flash plane (not synthesizable logic:
// the memory array and its sense/program circuits are analog). 177 blocks of 768
// pages of 4544 bytes (4 KB data + 448 B spare), SLC, as in the paper's configuration.
//
// Storage is sparse (an associative array of written words); a word never programmed
// since the last erase reads as all ones. A page read takes T_READ cycles (tR = 4 us)
// and ends with the page streamed into the data register, one word per cycle over the
// last PAGE_WORDS cycles, followed by arr_done. A program takes T_PROG cycles (tP =
// 75 us); it copies words [col0, col0+ncol) and [pcol0, pcol0+npcol) from the cache
// register (two ranges, so one 1 KB sector and its parity can be programmed as a
// partial page). Erase clears a block. inj_err flips that many randomly chosen bits
// of each codeword's data on every read, to model raw bit errors.
// Commands are accepted on cmd_valid when busy is low.
// Being a model of storage, it writes the associative array with blocking assignments
// inside the clocked process (the BLKSEQ lint notes): the array is not a flip-flop
// and only this process touches it.
module flash_plane
  import kvnand_pkg::*;
#(
  parameter int unsigned T_READ = T_READ_CYC,
  parameter int unsigned T_PROG = T_PROG_CYC
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cmd_valid,
  input  logic [1:0] cmd_op,       // 0 read, 1 program, 2 erase
  input  blk_t       cmd_blk,
  input  page_t      cmd_page,
  input  col_t       cmd_col0,
  input  logic [10:0] cmd_ncol,
  input  col_t       cmd_pcol0,
  input  logic [5:0] cmd_npcol,
  input  logic [6:0] inj_err,
  output logic       busy,
  // data register fill
  output logic       arr_we,
  output col_t       arr_addr,
  output word_t      arr_wdata,
  output logic       arr_done,
  // cache register read for programming
  output col_t       arr_rd_addr,
  input  word_t      arr_rdata,
  output logic [31:0] n_reads,
  output logic [31:0] n_progs
);
  word_t store [int unsigned];

  typedef enum logic [1:0] {P_IDLE, P_READ, P_PROG} st_e;
  st_e         st;
  int unsigned cnt;
  int unsigned k;
  blk_t        blk_q;
  page_t       page_q;
  col_t        col0_q, pcol0_q;
  logic [10:0] ncol_q;
  logic [5:0]  npcol_q;
  logic [6:0]  inj_q;
  logic [31:0] flip [CW_PER_PAGE][BCH_T];

  function automatic int unsigned key(blk_t b, page_t p, int unsigned col);
    return (int'(b) * PAGES_PER_BLOCK + int'(p)) * PAGE_WORDS + col;
  endfunction

  function automatic word_t rd_word(blk_t b, page_t p, int unsigned col);
    word_t w;
    w = store.exists(key(b, p, col)) ? store[key(b, p, col)] : '1;
    for (int cw = 0; cw < CW_PER_PAGE; cw++)
      for (int e = 0; e < BCH_T; e++)
        if (e < int'(inj_q) && flip[cw][e][31:5] == 27'(col)) w[flip[cw][e][4:0]] = ~w[flip[cw][e][4:0]];
    return w;
  endfunction

  assign busy = (st != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= P_IDLE;
      cnt       <= 0;
      arr_we    <= 1'b0;
      arr_done  <= 1'b0;
      arr_addr  <= '0;
      arr_wdata <= '0;
      n_reads   <= '0;
      n_progs   <= '0;
      inj_q     <= '0;
    end else begin
      arr_we   <= 1'b0;
      arr_done <= 1'b0;
      case (st)
        P_IDLE: if (cmd_valid) begin
          blk_q   <= cmd_blk;
          page_q  <= cmd_page;
          col0_q  <= cmd_col0;
          ncol_q  <= cmd_ncol;
          pcol0_q <= cmd_pcol0;
          npcol_q <= cmd_npcol;
          inj_q   <= inj_err;
          cnt     <= 0;
          case (cmd_op)
            2'd0: begin
              st <= P_READ;
              n_reads <= n_reads + 1;
              // choose distinct-position bit errors for each codeword (data area)
              for (int cw = 0; cw < CW_PER_PAGE; cw++)
                for (int e = 0; e < BCH_T; e++)
                  flip[cw][e] <= 32'(cw * BCH_K + e * (BCH_K / BCH_T) + int'($urandom % (BCH_K / BCH_T)));
            end
            2'd1: begin st <= P_PROG; n_progs <= n_progs + 1; end
            default: begin
              for (int p = 0; p < PAGES_PER_BLOCK; p++)
                for (int c = 0; c < PAGE_WORDS; c++)
                  if (store.exists(key(cmd_blk, page_t'(p), c))) store.delete(key(cmd_blk, page_t'(p), c));
            end
          endcase
        end
        P_READ: begin
          cnt <= cnt + 1;
          if (cnt + PAGE_WORDS >= T_READ && cnt + PAGE_WORDS < T_READ + PAGE_WORDS) begin
            k = cnt + PAGE_WORDS - T_READ;
            arr_we    <= 1'b1;
            arr_addr  <= col_t'(k);
            arr_wdata <= rd_word(blk_q, page_q, k);
          end
          if (cnt == T_READ - 1) begin
            arr_done <= 1'b1;
            st       <= P_IDLE;
          end
        end
        P_PROG: begin
          cnt <= cnt + 1;
          // copy the cache register during the first cycles, then wait out tP
          if (cnt < int'(ncol_q)) store[key(blk_q, page_q, int'(col0_q) + cnt)] = arr_rdata;
          else if (cnt < int'(ncol_q) + int'(npcol_q))
            store[key(blk_q, page_q, int'(pcol0_q) + cnt - int'(ncol_q))] = arr_rdata;
          if (cnt >= T_PROG - 1 && cnt >= int'(ncol_q) + int'(npcol_q)) st <= P_IDLE;
        end
        default: st <= P_IDLE;
      endcase
    end
  end

  always_comb begin
    if (st == P_PROG && cnt < int'(ncol_q)) arr_rd_addr = col_t'(int'(col0_q) + cnt);
    else if (st == P_PROG) arr_rd_addr = col_t'(int'(pcol0_q) + cnt - int'(ncol_q));
    else arr_rd_addr = '0;
  end

  initial assert (T_READ >= PAGE_WORDS + 1);
endmodule
