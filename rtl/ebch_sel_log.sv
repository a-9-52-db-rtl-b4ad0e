// ebch_sel_log -- selectors and logarithms module of the eBCH decoder.
//
// From the syndromes it derives everything the error locator needs:
//   * S1^3 by lookup table, and S1^3 + S3 with eight XOR gates;
//   * the zero flags S1^z, S3^z and (S1^3+S3)^z ("selection NORs");
//   * log(S1^3) and log(S1^3+S3) from one shared log table;
//   * (n-1) - log(S1) from its own table.
// All tables sit before the internal pipeline register; the log-domain
// difference log(S1^3+S3) - log(S1^3), which replaces the division of the
// quadratic equation's constant, is computed after it.  The paper sizes this
// subtraction as an 8-bit adder; here it is taken modulo 255 (the order of
// alpha), which is what the field arithmetic requires.  (n-1) - log(S1) is
// likewise stored modulo 255.  Latency: 2 cycles.
module ebch_sel_log
  import pd_pkg::*;
#(
  parameter int unsigned NB = N   // component code length
) (
  input  logic clk,
  input  gf_t  s1,
  input  gf_t  s3,
  output logic s1_z,              // S1 == 0
  output logic s3_z,              // S3 == 0
  output logic sum_z,             // S1^3 + S3 == 0
  output gf_t  log_ratio,         // log(S1^3+S3) - log(S1^3) mod 255
  output gf_t  nlog_s1            // (n-1) - log(S1) mod 255
);
  localparam lut8_t CUBE = gen_cube();
  localparam lut8_t LOG  = gen_log();

  gf_t  cube, sum;
  gf_t  log_cube_q, log_sum_q, nlog_q;
  logic s1_z_q, s3_z_q, sum_z_q;

  always_comb begin
    cube = CUBE[s1];
    sum  = cube ^ s3;
  end

  always_ff @(posedge clk) begin
    // stage 1: tables and selection NORs
    s1_z_q     <= ~|s1;
    s3_z_q     <= ~|s3;
    sum_z_q    <= ~|sum;
    log_cube_q <= LOG[cube];
    log_sum_q  <= LOG[sum];
    nlog_q     <= sub_mod_q(M'(NB - 1), LOG[s1]);
    // stage 2: log-domain division
    s1_z       <= s1_z_q;
    s3_z       <= s3_z_q;
    sum_z      <= sum_z_q;
    nlog_s1    <= nlog_q;
    log_ratio  <= sub_mod_q(log_sum_q, log_cube_q);
  end
endmodule
