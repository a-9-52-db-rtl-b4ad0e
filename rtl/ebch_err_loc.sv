// ebch_err_loc -- error locator module of the eBCH decoder.
//
// Solves x^2 + x + (S1^3+S3)/S1^3 = 0 with a 17-bit table addressed by the
// log of the constant, which returns {valid, log(rho2), log(rho1)}, and turns
// the roots into 1-based error locations (n-1-log S1) - log(rho_k).  It then
// classifies the decoding with the paper's boolean equations:
//   NoErrors = S1z & S3z
//   Fail1    = S1z & ~S3z & ~SUMz
//   1Error1  = SUMz & ~S1z
//   2Errors1 = (S1z & ~S3z & SUMz) | (~S1z & ~SUMz)
//   Fail2    = 2Errors1 & ((parity & ValidRoots) | ~ValidRoots)
//   Fail3    = 2Errors1 & (loc1 or loc2 outside the code)
//   Fail4    = 1Error1  & (loc1 outside the code)
//   Failure  = Fail1 | Fail2 | Fail3 | Fail4
//   OneError = 1Error1 & ~Failure,  TwoErrors = 2Errors1 & ~Failure
// Stage 1 (before the internal register): root lookup, second location, the
// first four equations.  Stage 2: first location (mux between the single
// error location and the first root location), the failure equations.
// Latency: 2 cycles.  The extension-parity bit travels alongside.
//
// Departures from the paper: the subtractions are taken modulo 255 and a
// location is "outside the code" when it is 0 or above n-1; the paper tests
// only "> n-1" on 8-bit differences, which misses locations that wrap past
// the start of the shortened code.
module ebch_err_loc
  import pd_pkg::*;
(
  input  logic         clk,
  input  logic         s1_z,
  input  logic         s3_z,
  input  logic         sum_z,
  input  gf_t          log_ratio,
  input  gf_t          nlog_s1,
  input  logic         par_in,   // overall parity, aligned with the inputs
  output ebch_status_t status,   // one-hot decoder status
  output gf_t          loc1,     // first error location (1-based)
  output gf_t          loc2,     // second error location (1-based)
  output logic         par_out   // overall parity, aligned with the outputs
);
  localparam lut17_t ROOTS = gen_roots();

  // stage 1
  logic valid_q, noerr_q, fail1_q, e1_q, e2_q, par_q;
  gf_t  lrho1_q, nlog_q, loc2_q;

  always_ff @(posedge clk) begin
    valid_q <= ROOTS[log_ratio][2*M];
    lrho1_q <= ROOTS[log_ratio][M-1:0];
    loc2_q  <= sub_mod_q(nlog_s1, ROOTS[log_ratio][2*M-1:M]);
    nlog_q  <= nlog_s1;
    noerr_q <= s1_z & s3_z;
    fail1_q <= s1_z & ~s3_z & ~sum_z;
    e1_q    <= sum_z & ~s1_z;
    e2_q    <= (s1_z & ~s3_z & sum_z) | (~s1_z & ~sum_z);
    par_q   <= par_in;
  end

  // stage 2
  gf_t  loc1c;
  logic fail2, fail3, fail4, failure;

  always_comb begin
    loc1c   = sub_mod_q(nlog_q, lrho1_q);
    fail2   = e2_q & ((par_q & valid_q) | ~valid_q);
    fail3   = e2_q & (~loc_ok(loc1c) | ~loc_ok(loc2_q));
    fail4   = e1_q & ~loc_ok(nlog_q);
    failure = fail1_q | fail2 | fail3 | fail4;
  end

  always_ff @(posedge clk) begin
    status.no_err  <= noerr_q;
    status.failure <= failure;
    status.one_err <= e1_q & ~failure;
    status.two_err <= e2_q & ~failure;
    loc1           <= e1_q ? nlog_q : loc1c;
    loc2           <= loc2_q;
    par_out        <= par_q;
  end
endmodule
