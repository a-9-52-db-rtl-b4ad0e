// ebch_syndrome -- syndrome calculation module of the eBCH component decoder.
//
// Computes S1 = sum r_j alpha^e(j) and S3 = sum r_j alpha^(3 e(j)) over the
// N-1 BCH bits of the incoming codeword, where e(j) = N-2-j (see pd_pkg).
// Since r_j is a single bit, every product is an AND with a constant and every
// sum an XOR, so each syndrome bit is the XOR of the codeword bits selected by
// a constant mask.  The XOR tree is split in two halves, as in the paper's
// "A" and "B" sub-blocks: stage A XORs each half of the masked bits and
// registers both partial sums, stage B combines them and registers the
// syndromes.  Latency: 2 clock cycles from cw to s1/s3.
// The masks are specific to the n = 195 code, hence no length parameter.
// The split point of the tree (half the bits each) is this design's choice.
module ebch_syndrome
  import pd_pkg::*;
(
  input  logic          clk,
  input  logic [N-1:0]  cw,       // received component codeword
  output gf_t           s1,       // registered S1 (2-cycle latency)
  output gf_t           s3        // registered S3 (2-cycle latency)
);
  localparam synmask_t MASK1 = gen_synmask(1);
  localparam synmask_t MASK3 = gen_synmask(3);
  localparam int unsigned HALF = (N - 1) / 2;

  gf_t s1_lo_q, s1_hi_q, s3_lo_q, s3_hi_q;
  gf_t s1_lo, s1_hi, s3_lo, s3_hi;

  always_comb begin
    for (int b = 0; b < M; b++) begin
      s1_lo[b] = ^(cw[HALF-1:0]    & MASK1[b][HALF-1:0]);
      s1_hi[b] = ^(cw[N-2:HALF]   & MASK1[b][N-2:HALF]);
      s3_lo[b] = ^(cw[HALF-1:0]    & MASK3[b][HALF-1:0]);
      s3_hi[b] = ^(cw[N-2:HALF]   & MASK3[b][N-2:HALF]);
    end
  end

  always_ff @(posedge clk) begin
    s1_lo_q <= s1_lo;
    s1_hi_q <= s1_hi;
    s3_lo_q <= s3_lo;
    s3_hi_q <= s3_hi;
    s1      <= s1_lo_q ^ s1_hi_q;
    s3      <= s3_lo_q ^ s3_hi_q;
  end
endmodule
