// ebch_bitflip_pp -- bit-flipping and post-processing module of the eBCH
// decoder (combinational, last block of the component decoder).
//
// Each error location is decoded into a one-hot N-bit flip vector (location q
// sets bit q-1).  The vectors are masked by the decoder status: both are
// cleared for "no errors" and "failure", the second is cleared for "one
// error".  The extension parity bit (index N-1) is flipped as Algorithm 1
// prescribes: d_e = (d + sum r) mod 2 is applied when d + d_e <= t, i.e. for
// no errors with odd parity and for one error with even parity.
// Post processing: when the decoding failed and pp_en is set by the control
// (last column half iteration with 1..3 failed rows) the flip vector is
// replaced by pp_mask, the row-failure register, so that all bits at the
// crossing of this column and the failed rows are flipped.
module ebch_bitflip_pp
  import pd_pkg::*;
#(
  parameter int unsigned NB = N    // component code length
) (
  input  ebch_status_t  status,
  input  gf_t           loc1,
  input  gf_t           loc2,
  input  logic          par,      // overall parity of the received word
  input  logic          pp_en,    // post-processing substitution enabled
  input  logic [NB-1:0] pp_mask,  // row-failure register
  output logic [NB-1:0] flip      // bits to flip in the scratch memory
);
  logic [NB-1:0] f1, f2;
  logic          pflip;

  always_comb begin
    f1 = '0;
    f2 = '0;
    for (int q = 1; q < NB; q++) begin
      f1[q-1] = (loc1 == gf_t'(q)) & (status.one_err | status.two_err);
      f2[q-1] = (loc2 == gf_t'(q)) & status.two_err;
    end
    pflip = (status.no_err & par) | (status.one_err & ~par);
    if (status.failure && pp_en) flip = pp_mask;
    else                         flip = f1 | f2 | {pflip, {(NB-1){1'b0}}};
  end
endmodule
