// pd_pkg -- constants, types and elaboration-time tables shared by the
// (195,178)^2 extended-BCH product decoder.
//
// The component code is an extended BCH code with t = 2, shortened from the
// (256,239) eBCH code to n = 195 (194 BCH bits plus one extension parity bit).
// Arithmetic is in GF(2^8).  The paper does not name the field polynomial;
// this design uses x^8 + x^4 + x^3 + x^2 + 1 (0x11D).
//
// Bit positions: a component codeword is a vector cw[N-1:0].  Index j
// (0-based) is position q = j+1 of the paper's 1-based notation.  BCH bit at
// index j carries the field weight alpha^(N-2-j), so that the error location
// returned by the decoder, (n-1) - log(S1), is directly the 1-based position.
// Index N-1 holds the extension parity bit.
//
// All lookup tables (antilog, log, cube, quadratic roots, syndrome masks) are
// computed by constant functions below, never read from files.
package pd_pkg;

  // ---- code and architecture sizes (paper's values) ----
  localparam int unsigned M     = 8;    // GF(2^M)
  localparam int unsigned Q     = 255;  // 2^M - 1, multiplicative order
  localparam int unsigned PRIM  = 'h11D;
  localparam int unsigned N     = 195;  // eBCH component length
  localparam int unsigned K     = 178;  // eBCH component information bits
  localparam int unsigned T     = 2;    // correctable errors
  localparam int unsigned PC    = 13;   // component decoders
  localparam int unsigned PL    = 2;    // loading lanes
  localparam int unsigned RPD   = N / PC; // rows (columns) per decoder = 15
  localparam int unsigned NP    = 6;    // component decoder pipeline depth
  localparam int unsigned PPMAX = T + 1; // rows/columns handled by post processing

  typedef logic [M-1:0] gf_t;
  typedef logic [255:0][M-1:0] lut8_t;
  typedef logic [255:0][2*M:0] lut17_t;  // {valid, log rho2, log rho1}

  // decoder status of one eBCH decoding
  typedef struct packed {
    logic no_err;
    logic one_err;
    logic two_err;
    logic failure;
  } ebch_status_t;

  // ---- GF(2^8) helpers ----
  function automatic gf_t gf_mul(gf_t a, gf_t b);
    logic [M-1:0] p;
    logic [M-1:0] aa;
    p  = '0;
    aa = a;
    for (int i = 0; i < M; i++) begin
      if (b[i]) p ^= aa;
      aa = aa[M-1] ? ((aa << 1) ^ M'(PRIM)) : (aa << 1);
    end
    return p;
  endfunction

  // alpha^e for e in 0..254
  function automatic lut8_t gen_exp();
    lut8_t t;
    gf_t   v;
    v = 8'h01;
    for (int e = 0; e < 256; e++) begin
      t[e] = v;
      v = v[M-1] ? ((v << 1) ^ M'(PRIM)) : (v << 1);
    end
    t[255] = 8'h01;
    return t;
  endfunction

  // log_alpha(x), log(0) is returned as 0 (never used: guarded by the zero flags)
  function automatic lut8_t gen_log();
    lut8_t t;
    lut8_t ex;
    ex = gen_exp();
    t  = '0;
    for (int e = 0; e < Q; e++) t[ex[e]] = gf_t'(e);
    return t;
  endfunction

  function automatic lut8_t gen_cube();
    lut8_t t;
    for (int x = 0; x < 256; x++) t[x] = gf_mul(gf_mul(gf_t'(x), gf_t'(x)), gf_t'(x));
    return t;
  endfunction

  // Root table of x^2 + x + c = 0, addressed by log(c).  Entry is
  // {valid, log(rho2), log(rho1)}.  Roots come in pairs {y, y+1}.
  function automatic lut17_t gen_roots();
    lut17_t t;
    lut8_t  lg;
    gf_t    c;
    lg = gen_log();
    t  = '0;
    for (int y = 2; y < 256; y++) begin
      c = gf_mul(gf_t'(y), gf_t'(y)) ^ gf_t'(y);
      if (!t[lg[c]][2*M]) t[lg[c]] = {1'b1, lg[gf_t'(y) ^ 8'h01], lg[gf_t'(y)]};
    end
    return t;
  endfunction

  // Syndrome masks: bit b of S_pow is the XOR of the codeword bits j whose
  // weight alpha^(pow*(N-2-j)) has bit b set.
  typedef logic [M-1:0][N-2:0] synmask_t;
  function automatic synmask_t gen_synmask(int unsigned pw);
    synmask_t m;
    lut8_t    ex;
    gf_t      w;
    ex = gen_exp();
    for (int j = 0; j < N - 1; j++) begin
      w = ex[(pw * (N - 2 - j)) % Q];
      for (int b = 0; b < M; b++) m[b][j] = w[b];
    end
    return m;
  endfunction

  // (a - b) mod 255 for a, b in 0..254
  function automatic gf_t sub_mod_q(gf_t a, gf_t b);
    logic [M:0] d;
    d = {1'b0, a} - {1'b0, b};
    if (d[M]) d = d + (M+1)'(Q);
    return d[M-1:0];
  endfunction

  // an error location (1-based) is inside the shortened code
  function automatic logic loc_ok(gf_t loc);
    return (loc != '0) && (loc <= M'(N - 1));
  endfunction

endpackage
