// bch_decoder: on-die ECC decoder for BCH(9088, 8192, 64), correcting up to 64 bit
// errors in each of the four codewords of a page while the page sits in the cache
// register ("data ... passes through lightweight on-die ECC, and is then fed into
// the PE").
//
// For each codeword it runs three steps, all on the register contents in place:
//  1. Syndromes: 32 bits per cycle (284 cycles per codeword). The 64 odd syndromes
//     S_j = r(alpha^j) are updated by Horner's rule, S_j <- S_j * alpha^(32j) +
//     sum_i r_i alpha^(j*i); the even ones follow as S_2j = S_j^2.
//  2. If any syndrome is non-zero: the even syndromes are formed by squaring (63
//     cycles), then inversion-free Berlekamp-Massey for binary codes runs 64
//     iterations, each a discrepancy pass and an update pass over the 65 coefficients
//     with one to two GF multipliers (about 8.4k cycles), giving the error locator
//     Lambda(x) of degree L.
//  3. Chien search, one bit position per cycle (9088 cycles), recording each root;
//     if the number of roots equals L the recorded bits are flipped through the
//     register's fix port, otherwise the codeword is flagged uncorrectable and left
//     untouched.
// Codeword c occupies data words c*256 .. c*256+255 and parity words
// 1024 + c*28 .. 1024 + c*28 + 27 of the page; bit 31 of a word comes first.
// The code is the paper's; the algorithm and its speed are this design's choices:
// an error-free page takes 4 x 284 cycles (about 2.8 us at 400 MHz, inside tR),
// a codeword with errors adds about 17.7k cycles. The paper quotes 14.6 Gb/s per plane
// for its decoder, which this design reaches only for error-free codewords.
// Interface: start (pulse) while the cache register holds a page; done pulses once
// the whole page is checked; n_corr and uncorrectable describe that page.
module bch_decoder
  import kvnand_pkg::*;
  import bch_tables_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       busy,
  output logic       done,
  output logic [8:0] n_corr,
  output logic       uncorrectable,
  output col_t       rd_addr,
  input  word_t      rd_data,
  output logic       fix_we,
  output col_t       fix_addr,
  output word_t      fix_mask
);
  localparam int unsigned NS  = BCH_T;          // odd syndromes kept
  localparam int unsigned NL  = BCH_T + 1;      // locator coefficients
  localparam int unsigned CWW = CW_DATA_WORDS + CW_PAR_WORDS;  // 284 words

  typedef enum logic [3:0] {S_IDLE, S_SYN, S_CHK, S_EVEN, S_BM, S_CINIT, S_CHIEN, S_FIX, S_NEXT} state_e;
  state_e state;

  logic [1:0]  cw;
  logic [8:0]  wi;                 // word in codeword
  logic [13:0] pos;                // Chien step = stream bit index
  logic [6:0]  r;                  // BM iteration
  gf_t         syn [NS];           // S_1, S_3, ..., S_127 while summing
  gf_t         s_all [128];        // s_all[j] = S_j once complete, s_all[0] unused
  gf_t         lam [NL];
  gf_t         bpoly [NL];
  gf_t         gam;
  logic [7:0]  L;
  gf_t         chien [NL];
  logic [13:0] errpos [BCH_T];
  logic [7:0]  nroots;
  logic [6:0]  fi;

  // ---------------- word address of the current codeword word ----------------
  function automatic col_t cw_addr(logic [1:0] cwi, logic [8:0] w);
    if (w < 9'(CW_DATA_WORDS)) return col_t'(int'(cwi) * CW_DATA_WORDS + int'(w));
    return col_t'(DATA_WORDS + int'(cwi) * CW_PAR_WORDS + int'(w) - CW_DATA_WORDS);
  endfunction

  assign rd_addr = cw_addr(cw, wi);

  // ---------------- syndrome update constants and logic ----------------
  gf_t syn_next [NS];
  for (genvar jj = 0; jj < NS; jj++) begin : g_syn
    always_comb begin
      gf_t s;
      s = gf_mat_apply(SYN_A32[jj], syn[jj]);
      for (int k = 0; k < GF_M; k++) s[k] = s[k] ^ (^(SYN_WM[jj][k] & rd_data));
      syn_next[jj] = s;
    end
  end

  logic syn_zero;
  always_comb begin
    syn_zero = 1'b1;
    for (int j = 0; j < NS; j++) if (syn[j] != '0) syn_zero = 1'b0;
  end

  // ---------------- Berlekamp-Massey, one coefficient per cycle ----------------
  logic [6:0] ci;                  // coefficient index
  logic       bm_upd;              // 0: discrepancy pass, 1: update pass
  gf_t        delta;
  logic       case_a;
  int         sk;
  gf_t        s_sel, d_term, lam_upd;
  always_comb begin
    sk      = 2 * int'(r) + 1 - int'(ci);
    s_sel   = (sk >= 1 && sk <= 127) ? s_all[sk] : '0;
    d_term  = gf_mul(lam[ci], s_sel);
    lam_upd = gf_mul(gam, lam[ci]) ^ ((ci != 0) ? gf_mul(delta, bpoly[ci-1]) : '0);
    case_a  = (delta != '0) && (8'(r) >= L);
  end

  // ---------------- Chien search ----------------
  gf_t chien_step [NL];
  gf_t init_term;
  logic chien_root;
  for (genvar i = 0; i < NL; i++) begin : g_ch
    assign chien_step[i] = gf_mat_apply(CH_STEP[i], chien[i]);
  end
  assign init_term = gf_mul(lam[ci], CH_INIT[ci]);
  always_comb begin
    gf_t s;
    s = '0;
    for (int i = 0; i < NL; i++) s = s ^ chien[i];
    chien_root = (s == '0);
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      cw            <= '0;
      wi            <= '0;
      pos           <= '0;
      r             <= '0;
      gam           <= '0;
      L             <= '0;
      nroots        <= '0;
      fi            <= '0;
      n_corr        <= '0;
      uncorrectable <= 1'b0;
      done          <= 1'b0;
      ci            <= '0;
      bm_upd        <= 1'b0;
      delta         <= '0;
      for (int j = 0; j < NS; j++) syn[j] <= '0;
      for (int j = 0; j < 128; j++) s_all[j] <= '0;
      for (int i = 0; i < NL; i++) begin
        lam[i]   <= '0;
        bpoly[i] <= '0;
        chien[i] <= '0;
      end
      for (int i = 0; i < BCH_T; i++) errpos[i] <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          cw            <= '0;
          wi            <= '0;
          n_corr        <= '0;
          uncorrectable <= 1'b0;
          for (int j = 0; j < NS; j++) syn[j] <= '0;
          state         <= S_SYN;
        end
        S_SYN: begin
          for (int j = 0; j < NS; j++) syn[j] <= syn_next[j];
          if (wi == 9'(CWW - 1)) state <= S_CHK;
          else wi <= wi + 1'b1;
        end
        S_CHK: begin
          if (syn_zero) state <= S_NEXT;
          else begin
            for (int j = 0; j < NS; j++) s_all[2*j+1] <= syn[j];
            ci    <= 7'd2;
            state <= S_EVEN;
          end
        end
        S_EVEN: begin
          // even syndromes S_2j = S_j^2, in increasing order
          s_all[ci] <= gf_mul(s_all[{1'b0, ci[6:1]}], s_all[{1'b0, ci[6:1]}]);
          if (ci == 7'd126) begin
            for (int i = 0; i < NL; i++) begin
              lam[i]   <= (i == 0) ? gf_t'(1) : '0;
              bpoly[i] <= (i == 0) ? gf_t'(1) : '0;
            end
            gam    <= gf_t'(1);
            L      <= '0;
            r      <= '0;
            ci     <= '0;
            delta  <= '0;
            bm_upd <= 1'b0;
            state  <= S_BM;
          end else begin
            ci <= ci + 7'd2;
          end
        end
        S_BM: begin
          if (!bm_upd) begin
            // discrepancy: delta = sum_i lambda_i S_(2r+1-i)
            delta <= delta ^ d_term;
            if (ci == 7'(NL - 1)) bm_upd <= 1'b1;  // ci stays at the top coefficient
            else ci <= ci + 1'b1;
          end else begin
            // update from the top coefficient down, so lower ones are still old
            lam[ci]   <= lam_upd;
            bpoly[ci] <= case_a ? ((ci != 0) ? lam[ci-1] : '0)
                                : ((ci > 1) ? bpoly[ci-2] : '0);
            if (ci == 0) begin
              if (case_a) begin
                gam <= delta;
                L   <= 8'(2 * int'(r) + 1) - L;
              end
              delta  <= '0;
              bm_upd <= 1'b0;
              if (r == 7'(BCH_T - 1)) begin
                state <= S_CINIT;
              end
              r <= r + 1'b1;
            end else begin
              ci <= ci - 1'b1;
            end
          end
        end
        S_CINIT: begin
          // chien_i = lambda_i alpha^(-9087 i): evaluation starts at position 9087
          chien[ci] <= init_term;
          if (ci == 7'(NL - 1)) begin
            state  <= S_CHIEN;
            pos    <= '0;
            nroots <= '0;
          end else begin
            ci <= ci + 1'b1;
          end
        end
        S_CHIEN: begin
          begin
            if (chien_root) begin
              if (nroots < 8'(BCH_T)) errpos[nroots[5:0]] <= pos;
              nroots <= nroots + 1'b1;
            end
            for (int i = 0; i < NL; i++) chien[i] <= chien_step[i];
            if (pos == 14'(BCH_N - 1)) begin
              fi    <= '0;
              state <= S_FIX;
            end
            pos <= pos + 1'b1;
          end
        end
        S_FIX: begin
          if (nroots != L || nroots > 8'(BCH_T)) begin
            uncorrectable <= 1'b1;
            state         <= S_NEXT;
          end else if (8'(fi) >= nroots) begin
            n_corr <= n_corr + 9'(nroots);
            state  <= S_NEXT;
          end else begin
            fi <= fi + 1'b1;
          end
        end
        S_NEXT: begin
          for (int j = 0; j < NS; j++) syn[j] <= '0;
          wi <= '0;
          if (cw == 2'(CW_PER_PAGE - 1)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            cw    <= cw + 1'b1;
            state <= S_SYN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // correction writes during S_FIX
  always_comb begin
    logic [13:0] p;
    p        = errpos[fi[5:0]];
    fix_we   = (state == S_FIX) && (nroots == L) && (8'(fi) < nroots);
    fix_addr = cw_addr(cw, 9'(p >> 5));
    fix_mask = word_t'(1) << (31 - int'(p[4:0]));
  end

  assign busy = (state != S_IDLE);
endmodule
