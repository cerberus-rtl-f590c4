// cerberus_pkg: sizes, types and the parity-check matrices of the Cerberus cross-layer ECC.
//
// One 32-byte access is protected by one 288-bit codeword  c = {R2, R1, D}:
//   bits   0..255  D   user data          (symbols 0..15)
//   bits 256..271  R1  16-bit redundancy   (symbol 16)
//   bits 272..287  R2  16-bit redundancy   (symbol 17)
// A symbol (also called a bounded region) is 16 consecutive codeword bits.
//
// Two parity-check matrices are used, and the second contains the first:
//   H2      (16 x 288)  link check (write path) and on-die SEC-DED (read path)
//   H_S-ECC (32 x 288)  system SSC+DEC in the memory controller; its first 16 rows are H2
// A 32-bit column of H_S-ECC is held as {low16, up16}: bits [15:0] are the H2 rows, bits
// [31:16] the extra rows of the system layer. A syndrome follows the same layout, so the
// link and on-die decoders simply use syndrome bits [15:0].
//
// Following the paper, every column of H2 has odd weight (SEC-DED), and in each 16-column
// region the last 8 columns are XOR combinations of the first 8 (the same combinations, MASK,
// in every region), which makes the bounded-fault rule and the "any 8 consecutive columns
// independent" (CRC8-like) rule easy to meet. The lower 16 rows of each symbol are a
// multiplication by a GF(2^16) element, as in the paper's symbol view of H_S-ECC.
//
// The concrete numbers are this design's own: the paper gives the rules and the search method,
// not the matrices. They come from an algebraic construction in GF(2^16), p(x) = x^16+x^12+x^3+x+1,
// with F = GF(2^8) its subfield:
//   H2 column b of region a     = GAMMA[a] * PSI[b]    (PSI[b] in F; GAMMA[a] on distinct F-lines)
//   lower column b of symbol a  = ALPHA_J[a] * BETA[b] (BETA a basis of GF(2^16), BETA[b]-PSI[b] in alpha*F)
// Because the regions lie on distinct lines {GAMMA*F}, sums inside one region never equal a
// column of another region (bounded fault) and neighbouring regions are independent (CRC8
// across region borders). Because the lower elements ALPHA_J differ pairwise outside F*, every
// symbol error has its own 32-bit syndrome (SSC). GAMMA was picked so that all columns have odd
// weight, and ALPHA_J by a greedy search until all double-bit syndromes of distinct symbols are
// unique and differ from all symbol syndromes (DEC, SSC+DEC). The testbenches re-check these rules.
package cerberus_pkg;

  localparam int unsigned K      = 256;          // data bits per access (32 B)
  localparam int unsigned N      = 288;          // codeword bits (256 + 32 redundancy)
  localparam int unsigned SYM_W  = 16;           // symbol / bounded-region width
  localparam int unsigned NSYM   = N / SYM_W;    // 18 symbols
  localparam int unsigned R_LINK = 16;           // rows of H2 (R2 width)
  localparam int unsigned R_SYS  = 32;           // rows of H_S-ECC (R1 + R2)

  typedef logic [K-1:0]      data_t;
  typedef logic [N-1:0]      codeword_t;
  typedef logic [R_LINK-1:0] syn16_t;
  typedef logic [R_SYS-1:0]  syn32_t;
  typedef logic [SYM_W-1:0]  sym_t;

  // System-decoder outcome.
  typedef enum logic [1:0] {
    DEC_NE  = 2'd0,   // no error
    DEC_SSC = 2'd1,   // one symbol corrected
    DEC_DEC = 2'd2,   // two bits in distinct symbols corrected
    DEC_DUE = 2'd3    // detected, uncorrectable
  } dec_kind_e;

  localparam logic [16:0] GF_POLY = 17'h1100B;

  // First halves of the 16 region columns, as elements of F (before multiplication by GAMMA).
  localparam logic [7:0][15:0] PSI_BASE = {16'hb045, 16'hebbd, 16'hac68, 16'hb1de,
                                           16'h5a79, 16'heb79, 16'h0b37, 16'hfcbc};
  // Column 8+i of every region is the XOR of the first-half columns selected by MASK[i].
  localparam logic [7:0][7:0] MASK = {8'h76, 8'h85, 8'h98, 8'hfe, 8'h1a, 8'h37, 8'hc1, 8'h23};
  localparam logic [15:0][15:0] BETA = {
    16'h2e2b, 16'h9fda, 16'h7468, 16'hc423, 16'hda74, 16'h6523, 16'h2bd8, 16'h1038,
    16'h4dd0, 16'h01cc, 16'hb932, 16'hd431, 16'h5a4d, 16'h4ad1, 16'hd928, 16'h5c9e};
  localparam logic [17:0][15:0] GAMMA = {
    16'h70e3, 16'h10c8, 16'hc9cf, 16'h8722, 16'heb6c, 16'hc140, 16'h56de, 16'h835e, 16'hebf5,
    16'h1cd6, 16'h8bde, 16'ha563, 16'h7472, 16'h32fd, 16'h8baa, 16'h3618, 16'h321f, 16'h10c7};
  localparam logic [17:0][15:0] ALPHA_J = {
    16'h2d20, 16'h6f89, 16'hc5c0, 16'h4174, 16'ha3c0, 16'hf1f3, 16'h2b1a, 16'hbe17, 16'h4106,
    16'hd7f3, 16'hfc82, 16'h9af8, 16'h023a, 16'h614a, 16'h67aa, 16'hbdbe, 16'h5886, 16'h61e6};

  // ---------------------------------------------------------------- GF(2^16) arithmetic
  function automatic logic [15:0] gf_mul(input logic [15:0] a, input logic [15:0] b);
    logic [16:0] x;
    logic [15:0] r;
    x = {1'b0, a};
    r = '0;
    for (int i = 0; i < 16; i++) begin
      if (b[i]) r ^= x[15:0];
      x = x << 1;
      if (x[16]) x ^= GF_POLY;
    end
    return r;
  endfunction

  // a^(2^16-2) = a^-1
  function automatic logic [15:0] gf_inv(input logic [15:0] a);
    logic [15:0] r, p;
    r = 16'h0001;
    p = a;
    for (int i = 0; i < 16; i++) begin
      if (i != 0) r = gf_mul(r, p);   // exponent 2^16-2 has bits 1..15 set
      p = gf_mul(p, p);
    end
    return r;
  endfunction

  // ---------------------------------------------------------------- matrix columns
  function automatic logic [15:0] psi(input int unsigned b);
    logic [15:0] v;
    if (b < 8) return PSI_BASE[b];
    v = '0;
    for (int i = 0; i < 8; i++) if (MASK[b-8][i]) v ^= PSI_BASE[i];
    return v;
  endfunction

  // H2 column of codeword bit i (16 bits).
  function automatic syn16_t h2_col(input int unsigned i);
    return gf_mul(GAMMA[i / SYM_W], psi(i % SYM_W));
  endfunction

  // H_S-ECC column of codeword bit i: {lower 16 rows, H2 rows}.
  function automatic syn32_t hs_col(input int unsigned i);
    return {gf_mul(ALPHA_J[i / SYM_W], BETA[i % SYM_W]), h2_col(i)};
  endfunction

  typedef logic [N-1:0][R_SYS-1:0] hs_mat_t;
  function automatic hs_mat_t gen_hs();
    hs_mat_t m;
    for (int i = 0; i < N; i++) m[i] = hs_col(i);
    return m;
  endfunction

  // All 288 columns of H_S-ECC; H2 is bits [15:0] of each.
  localparam hs_mat_t HS = gen_hs();

  // ---------------------------------------------------------------- matrix inverses
  // Inverse of the 32x32 matrix formed by the redundancy columns 256..287 of H_S-ECC:
  // column p of the result is the R = {R2,R1} that produces syndrome bit p alone.
  typedef logic [R_SYS-1:0][R_SYS-1:0] mat32_t;
  function automatic mat32_t gen_red_inv();
    mat32_t v, x;
    logic [R_SYS-1:0] tv, tx;
    for (int k = 0; k < R_SYS; k++) begin
      v[k] = HS[K + k];
      x[k] = '0;
      x[k][k] = 1'b1;
    end
    for (int p = 0; p < R_SYS; p++) begin
      for (int q = p; q < R_SYS; q++) begin
        if (v[q][p]) begin
          tv = v[p]; v[p] = v[q]; v[q] = tv;
          tx = x[p]; x[p] = x[q]; x[q] = tx;
          break;
        end
      end
      for (int q = 0; q < R_SYS; q++) begin
        if (q != p && v[q][p]) begin
          v[q] ^= v[p];
          x[q] ^= x[p];
        end
      end
    end
    return x;
  endfunction

  localparam mat32_t RED_INV = gen_red_inv();

  // Inverse of the BETA basis: maps a field element back to the 16 symbol bits.
  typedef logic [15:0][15:0] mat16_t;
  function automatic mat16_t gen_beta_inv();
    mat16_t v, x;
    logic [15:0] tv, tx;
    for (int k = 0; k < 16; k++) begin
      v[k] = BETA[k];
      x[k] = '0;
      x[k][k] = 1'b1;
    end
    for (int p = 0; p < 16; p++) begin
      for (int q = p; q < 16; q++) begin
        if (v[q][p]) begin
          tv = v[p]; v[p] = v[q]; v[q] = tv;
          tx = x[p]; x[p] = x[q]; x[q] = tx;
          break;
        end
      end
      for (int q = 0; q < 16; q++) begin
        if (q != p && v[q][p]) begin
          v[q] ^= v[p];
          x[q] ^= x[p];
        end
      end
    end
    return x;
  endfunction

  localparam mat16_t BETA_INV = gen_beta_inv();

  // Apply BETA_INV to a field element.
  function automatic sym_t beta_solve(input logic [15:0] z);
    sym_t e;
    e = '0;
    for (int p = 0; p < 16; p++) if (z[p]) e ^= BETA_INV[p];
    return e;
  endfunction

  // Symbol-error pattern implied by the lower syndrome half for symbol a:
  // e = BETA^-1 (ALPHA_J[a]^-1 * s_low). Column p of this 16x16 map.
  typedef logic [NSYM-1:0][15:0][15:0] lowinv_t;
  function automatic lowinv_t gen_low_inv();
    lowinv_t m;
    logic [15:0] ai;
    for (int a = 0; a < NSYM; a++) begin
      ai = gf_inv(ALPHA_J[a]);
      for (int p = 0; p < 16; p++) m[a][p] = beta_solve(gf_mul(ai, 16'(1) << p));
    end
    return m;
  endfunction

  localparam lowinv_t LOW_INV = gen_low_inv();

  // ---------------------------------------------------------------- linear maps used by the RTL
  // 16-bit H2 syndrome of a codeword.
  function automatic syn16_t syndrome16(input codeword_t c);
    syn16_t s;
    s = '0;
    for (int i = 0; i < N; i++) if (c[i]) s ^= HS[i][15:0];
    return s;
  endfunction

  // 32-bit H_S-ECC syndrome of a codeword.
  function automatic syn32_t syndrome32(input codeword_t c);
    syn32_t s;
    s = '0;
    for (int i = 0; i < N; i++) if (c[i]) s ^= HS[i];
    return s;
  endfunction

  // Candidate symbol-error pattern of symbol a for lower syndrome half sl.
  function automatic sym_t low_solve(input int unsigned a, input logic [15:0] sl);
    sym_t e;
    e = '0;
    for (int p = 0; p < 16; p++) if (sl[p]) e ^= LOW_INV[a][p];
    return e;
  endfunction

  // H2 rows applied to a pattern e placed in symbol a.
  function automatic syn16_t up_apply(input int unsigned a, input sym_t e);
    syn16_t s;
    s = '0;
    for (int b = 0; b < SYM_W; b++) if (e[b]) s ^= HS[a*SYM_W + b][15:0];
    return s;
  endfunction

  // Population count of a vector of up to N bits (the decoders count hits with it).
  function automatic int unsigned popcount(input logic [N-1:0] v);
    int unsigned c;
    c = 0;
    for (int i = 0; i < N; i++) c += int'(v[i]);
    return c;
  endfunction

endpackage
