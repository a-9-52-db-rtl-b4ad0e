// ebch_parity -- parity calculation module of the eBCH component decoder.
//
// XORs all N bits of the received component codeword (the sum over r_1..r_n of
// Algorithm 1, extension bit included).  Like the syndrome module it runs in
// two stages: stage A XORs each half of the codeword and registers the two
// partial parities, stage B combines and registers them.  Latency: 2 cycles,
// so that the result stays aligned with the syndromes.
module ebch_parity
  import pd_pkg::*;
#(
  parameter int unsigned NB = N   // component code length
) (
  input  logic          clk,
  input  logic [NB-1:0] cw,       // received component codeword
  output logic          par       // registered overall parity (2-cycle latency)
);
  localparam int unsigned HALF = NB / 2;
  logic lo_q, hi_q;

  always_ff @(posedge clk) begin
    lo_q <= ^cw[HALF-1:0];
    hi_q <= ^cw[NB-1:HALF];
    par  <= lo_q ^ hi_q;
  end
endmodule
