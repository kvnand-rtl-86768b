// kvnand_pkg: constants, types and arithmetic functions shared by the KVNAND
// in-flash-computing design.
//
// Flash geometry (page 4 KB data + 448 B spare, 768 pages/block, 177 blocks/plane,
// 32 planes/die), the read/program times tR = 4 us and tP = 75 us, the ECC code
// BCH(9088, 8192, 64), the 16 FMACs per plane and the 8 KB per-plane KV buffer follow
// the paper's configuration table. Everything else here is this design's own choice:
// a 400 MHz clock (the frequency the paper uses to size the FMACs) turns the times into
// cycle counts, every internal stream is 32 bits wide (two BF16 values), BF16 inputs
// are multiplied into an FP32 accumulator, and the Galois field GF(2^14) uses the
// primitive polynomial x^14 + x^10 + x^6 + x + 1.
package kvnand_pkg;

  // ---------------- clock and flash timing ----------------
  localparam int unsigned CLK_MHZ        = 400;
  localparam int unsigned T_READ_CYC     = 4 * CLK_MHZ;    // tR = 4 us
  localparam int unsigned T_PROG_CYC     = 75 * CLK_MHZ;   // tP = 75 us

  // ---------------- flash geometry ----------------
  localparam int unsigned PAGE_DATA_BYTES  = 4096;
  localparam int unsigned PAGE_SPARE_BYTES = 448;
  localparam int unsigned PAGE_BYTES       = PAGE_DATA_BYTES + PAGE_SPARE_BYTES; // 4544
  localparam int unsigned WORD_BITS        = 32;
  localparam int unsigned PAGE_WORDS       = PAGE_BYTES * 8 / WORD_BITS;         // 1136
  localparam int unsigned DATA_WORDS       = PAGE_DATA_BYTES * 8 / WORD_BITS;    // 1024
  localparam int unsigned PAGES_PER_BLOCK  = 768;
  localparam int unsigned BLOCKS_PER_PLANE = 177;
  localparam int unsigned PLANES_PER_DIE   = 32;

  typedef logic [WORD_BITS-1:0] word_t;
  typedef logic [$clog2(PAGE_WORDS)-1:0] col_t;       // word address inside a page
  typedef logic [$clog2(PAGES_PER_BLOCK)-1:0] page_t;
  typedef logic [$clog2(BLOCKS_PER_PLANE)-1:0] blk_t;

  // ---------------- BCH(9088, 8192, 64) over GF(2^14) ----------------
  localparam int unsigned GF_M          = 14;
  localparam int unsigned GF_N          = (1 << GF_M) - 1;           // 16383
  localparam logic [GF_M:0] GF_POLY     = 15'h4443;                  // x^14+x^10+x^6+x+1
  localparam int unsigned BCH_T         = 64;
  localparam int unsigned BCH_K         = 8192;
  localparam int unsigned BCH_P         = BCH_T * GF_M;              // 896 parity bits
  localparam int unsigned BCH_N         = BCH_K + BCH_P;             // 9088
  localparam int unsigned CW_PER_PAGE   = PAGE_DATA_BYTES * 8 / BCH_K;  // 4
  localparam int unsigned CW_DATA_WORDS = BCH_K / WORD_BITS;         // 256
  localparam int unsigned CW_PAR_WORDS  = BCH_P / WORD_BITS;         // 28

  // g(x) = LCM of the minimal polynomials of alpha^1 .. alpha^128 (degree 896).
  // Bit i is the coefficient of x^i; the x^896 term is implied.
  localparam logic [BCH_P:0] BCH_GEN = 897'h1f7b14e733603c79eeb2ed60fd7a2816c649dd31e078e4c9b1f1115c551f11d134506168bd0fd485d6baad116d6cefe15ee5021fb38b2e031001d099f8829154b4d7311a5b33ff1c3a12337ac2ab152a786846aa15d29d8d585bb0f366ef38543bdf62456d62380ba45c7f4e1017a1055;

  typedef logic [GF_M-1:0] gf_t;

  function automatic gf_t gf_mul(gf_t a, gf_t b);
    logic [GF_M-1:0] r, x;
    r = '0;
    x = a;
    for (int i = 0; i < GF_M; i++) begin
      if (b[i]) r = r ^ x;
      x = x[GF_M-1] ? ((x << 1) ^ GF_POLY[GF_M-1:0]) : (x << 1);
    end
    return r;
  endfunction

  // alpha^e for any non-negative e (square and multiply)
  function automatic gf_t gf_pow(int unsigned e);
    gf_t r, b;
    int unsigned k;
    r = gf_t'(1);
    b = gf_t'(2);
    k = e % GF_N;
    for (int i = 0; i < GF_M; i++) begin
      if (k[i]) r = gf_mul(r, b);
      b = gf_mul(b, b);
    end
    return r;
  endfunction

  // Multiplication by the constant c as a bit matrix: row k selects the input bits
  // whose products with c have bit k set, so y[k] = ^(x & m[k]).
  typedef logic [GF_M-1:0][GF_M-1:0] gf_mat_t;
  function automatic gf_mat_t gf_const_mat(gf_t c);
    gf_mat_t m;
    gf_t     col;
    m = '0;
    for (int b = 0; b < GF_M; b++) begin
      col = gf_mul(c, gf_t'(1) << b);
      for (int k = 0; k < GF_M; k++) m[k][b] = col[k];
    end
    return m;
  endfunction

  function automatic gf_t gf_mat_apply(gf_mat_t m, gf_t x);
    gf_t y;
    for (int k = 0; k < GF_M; k++) y[k] = ^(m[k] & x);
    return y;
  endfunction

  // ---------------- compute element: BF16 x BF16 + FP32 ----------------
  localparam int unsigned PE_LANES = 2;   // page elements consumed per cycle
  localparam int unsigned PE_HEADS = 8;   // query vectors sharing one fetched element (h/k)

  typedef logic [15:0] bf16_t;
  typedef logic [31:0] fp32_t;

  // Exact product of two BF16 numbers as FP32. Zero/denormal inputs give +0,
  // exponent overflow gives infinity.
  function automatic fp32_t bf16_mul(bf16_t a, bf16_t b);
    logic        s;
    logic [15:0] pm;
    int          e;
    logic [22:0] m;
    s = a[15] ^ b[15];
    if (a[14:7] == 8'd0 || b[14:7] == 8'd0) return {s, 31'd0};
    pm = {1'b1, a[6:0]} * {1'b1, b[6:0]};
    e  = int'(a[14:7]) + int'(b[14:7]) - 127;
    if (pm[15]) begin
      e = e + 1;
      m = {pm[14:0], 8'd0};
    end else begin
      m = {pm[13:0], 9'd0};
    end
    if (e <= 0)   return {s, 31'd0};
    if (e >= 255) return {s, 8'hff, 23'd0};
    return {s, e[7:0], m};
  endfunction

  // FP32 addition, round toward zero, denormals flushed to zero.
  function automatic fp32_t fp32_add(fp32_t a, fp32_t b);
    fp32_t       x, y;
    logic [26:0] mx, my;      // hidden bit, 23 fraction bits, 3 guard bits
    logic [27:0] sum;
    int          ex, d, sh;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? 32'd0 : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    ex = int'(x[30:23]);
    d  = ex - int'(y[30:23]);
    mx = {1'b1, x[22:0], 3'b000};
    my = (d > 26) ? 27'd0 : ({1'b1, y[22:0], 3'b000} >> d);
    if (x[31] == y[31]) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[27]) begin
        sum = sum >> 1;
        ex  = ex + 1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, my};
      if (sum == 28'd0) return 32'd0;
      sh = 0;
      for (int i = 26; i >= 0; i--) if (sum[i] && sh == 0) sh = 27 - i;
      sh  = sh - 1;
      sum = sum << sh;
      ex  = ex - sh;
    end
    if (ex <= 0)   return 32'd0;
    if (ex >= 255) return {x[31], 8'hff, 23'd0};
    return {x[31], ex[7:0], sum[25:3]};
  endfunction

  // ---------------- plane / die operations ----------------
  typedef enum logic [2:0] {
    OP_NOP     = 3'd0,
    OP_GEMV    = 3'd1,  // read pages, dot-product rows with the broadcast vectors
    OP_ATTEND  = 3'd2,  // read pages, weighted sum of rows (S x V)
    OP_PROGRAM = 3'd3,  // program a page streamed in from the SoC (discrete KV write)
    OP_KV_APP  = 3'd4   // append KV words to the plane KV buffer (compact)
  } op_e;

  // One command for a plane. Pages are read from (blk, page .. page+npages-1).
  typedef struct packed {
    op_e          op;
    blk_t         blk;
    page_t        page;
    logic [9:0]   npages;
    logic [10:0]  row_len;   // elements per row (GEMV/Logit) or per token (Attend), even
    logic [3:0]   nheads;    // active query vectors, 1..8
    logic [4:0]   slot;      // KV buffer slot for OP_KV_APP
    logic [10:0]  nwords;    // words to follow for OP_KV_APP
  } plane_cmd_t;

  // Per-head vector register of each plane (query slice or attention weights)
  localparam int unsigned VREG_WORDS = 256;

  // Kind of a data word sent to a die over its channel
  typedef enum logic [1:0] {
    WK_VEC  = 2'd0,   // broadcast vector word: addr = {head, word}
    WK_PROG = 2'd1,   // page word for OP_PROGRAM: addr = word in page
    WK_KV   = 2'd2    // KV word for OP_KV_APP
  } wkind_e;

  // A command to a die: a plane command for every plane whose mask bit is set
  typedef struct packed {
    logic [PLANES_PER_DIE-1:0] plane_mask;
    plane_cmd_t                pc;
  } die_cmd_t;

  // Result word a plane sends to the die's global buffer
  typedef struct packed {
    logic [2:0]  head;
    logic [10:0] idx;
    fp32_t       val;
  } pe_res_t;

endpackage
