// tb_ref_pkg -- reference model used by the testbenches.
//
// Builds the generator polynomial g(x) = m1(x) m3(x) of the t = 2 BCH code
// over GF(2^8) (field polynomial x^8+x^4+x^3+x^2+1) from scratch, and encodes
// eBCH(195,178) component words and (195,178)^2 product codewords with it.
// Word layout as in the design: index j holds the coefficient of x^(193-j),
// information bits at indices 0..177, BCH parity at 178..193, extension
// parity at 194.  Nothing here reuses the design's tables.
package tb_ref_pkg;
  localparam int N = 195;
  localparam int K = 178;
  localparam int R = 16;

  typedef logic [N-1:0] word_t;

  function automatic logic [7:0] rmul(logic [7:0] a, logic [7:0] b);
    logic [15:0] p;
    p = '0;
    for (int i = 0; i < 8; i++) if (b[i]) p ^= 16'(a) << i;
    for (int i = 15; i >= 8; i--) if (p[i]) p ^= 16'h11D << (i - 8);
    return p[7:0];
  endfunction

  function automatic logic [7:0] rpow(int e);
    logic [7:0] v;
    v = 8'd1;
    for (int i = 0; i < e; i++) v = rmul(v, 8'd2);
    return v;
  endfunction

  // minimal polynomial of alpha^3: product of (x + alpha^(3*2^i)), i = 0..7
  function automatic logic [8:0] minpoly3();
    logic [7:0] c [0:8];
    logic [7:0] r;
    logic [8:0] out;
    for (int i = 0; i <= 8; i++) c[i] = 8'd0;
    c[0] = 8'd1;
    for (int i = 0; i < 8; i++) begin
      r = rpow((3 * (1 << i)) % 255);
      for (int d = 8; d >= 1; d--) c[d] = c[d-1] ^ rmul(c[d], r);
      c[0] = rmul(c[0], r);
    end
    for (int d = 0; d <= 8; d++) out[d] = c[d][0];
    return out;
  endfunction

  function automatic logic [R:0] genpoly();
    logic [8:0]  m1, m3;
    logic [R:0]  g;
    m1 = 9'h11D;
    m3 = minpoly3();
    g  = '0;
    for (int i = 0; i <= 8; i++) if (m1[i]) g ^= (R+1)'(m3) << i;
    return g;
  endfunction

  function automatic word_t encode(logic [K-1:0] info);
    logic [R:0]   g;
    logic [R-1:0] rem;
    logic         fb;
    word_t        w;
    g   = genpoly();
    rem = '0;
    for (int j = 0; j < K; j++) begin
      fb  = info[j] ^ rem[R-1];
      rem = {rem[R-2:0], 1'b0} ^ (fb ? g[R-1:0] : '0);
    end
    w = '0;
    for (int j = 0; j < K; j++) w[j] = info[j];
    for (int e = 0; e < R; e++) w[N-2-e] = rem[e];
    w[N-1] = ^w[N-2:0];
    return w;
  endfunction

  function automatic logic [K-1:0] rand_info();
    logic [K-1:0] v;
    for (int i = 0; i < K; i++) v[i] = 1'($urandom);
    return v;
  endfunction

  // word with nerr distinct random bits set
  function automatic word_t rand_err(int nerr);
    word_t e;
    int    p;
    e = '0;
    for (int k = 0; k < nerr; k++) begin
      do p = $urandom_range(N-1); while (e[p]);
      e[p] = 1'b1;
    end
    return e;
  endfunction
endpackage
