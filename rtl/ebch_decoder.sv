// ebch_decoder -- extended BCH (195,178,t=2) component decoder.
//
// Implements Algorithm 1 with the Peterson-Gorenstein-Zierler shortcut for
// t = 2: syndromes S1/S3 and the overall parity are computed in parallel,
// then the selectors-and-logarithms and error-locator modules classify the
// word and locate up to two errors, and the bit-flipping module turns the
// result into an N-bit flip vector.  The decoder never holds the codeword:
// its output is the set of bits to XOR in the scratch memory.
//
// Timing: fully pipelined, one codeword per clock.  The flip vector and the
// status for the word presented in cycle c appear in cycle c+6 (six register
// stages: 2 syndrome/parity, 2 selectors-and-logarithms, 2 error locator),
// matching the paper's pipeline depth of six.  pp_en and pp_mask act
// combinationally on the output stage and must be aligned with it.
module ebch_decoder
  import pd_pkg::*;
(
  input  logic          clk,
  input  logic [N-1:0]  cw,        // received word (index N-1 = extension bit)
  input  logic          pp_en,     // post-processing substitution enable
  input  logic [N-1:0]  pp_mask,   // row-failure register
  output logic [N-1:0]  flip,      // bits to flip, 6 cycles after cw
  output logic          failure,   // decoding failure, 6 cycles after cw
  output ebch_status_t  status     // full status, 6 cycles after cw
);
  gf_t  s1, s3, log_ratio, nlog_s1, loc1, loc2;
  logic par2, s1_z, s3_z, sum_z, par_out;
  logic par3, par4;

  ebch_syndrome u_syn (.clk, .cw, .s1, .s3);
  ebch_parity #(.NB(N)) u_par (.clk, .cw, .par(par2));

  ebch_sel_log #(.NB(N)) u_sal (
    .clk, .s1, .s3, .s1_z, .s3_z, .sum_z, .log_ratio, .nlog_s1
  );

  // parity pipeline registers matching the selectors-and-logarithms stages
  always_ff @(posedge clk) begin
    par3 <= par2;
    par4 <= par3;
  end

  ebch_err_loc u_elo (
    .clk, .s1_z, .s3_z, .sum_z, .log_ratio, .nlog_s1, .par_in(par4),
    .status, .loc1, .loc2, .par_out
  );

  ebch_bitflip_pp #(.NB(N)) u_bfp (
    .status, .loc1, .loc2, .par(par_out), .pp_en, .pp_mask, .flip
  );

  assign failure = status.failure;
endmodule
