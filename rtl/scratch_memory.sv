// scratch_memory -- n x n register matrix holding the product codeword.
//
// Every bit is a flip-flop preceded by an XOR: in each cycle a bit is toggled
// by the flip signal of the row decoder that owns its row and by that of the
// column decoder that owns its column (only one of the two is active in any
// half iteration).  Loading is row-wise over PL = 2 lanes: a "load reset" of
// row r replaces the row with the lane data at the next clock edge, and in the
// same cycle the old content of that row is presented on the matching output
// lane, so the previous, decoded, codeword leaves while the next one enters.
// The full matrix is exposed for the component decoders' input multiplexers.
// No reset: every row is overwritten by loading before it is decoded.
module scratch_memory
  import pd_pkg::*;
#(
  parameter int unsigned NB = N
) (
  input  logic                  clk,
  input  logic                  ld_en1,      // load reset, lane 1
  input  logic [$clog2(NB)-1:0] ld_row1,
  input  logic [NB-1:0]         ld_data1,
  input  logic                  ld_en2,      // load reset, lane 2
  input  logic [$clog2(NB)-1:0] ld_row2,
  input  logic [NB-1:0]         ld_data2,
  input  logic [NB-1:0]         row_flip [NB], // row_flip[r][c] toggles bit (r,c)
  input  logic [NB-1:0]         col_flip [NB], // col_flip[c][r] toggles bit (r,c)
  output logic [NB-1:0]         rows     [NB], // current content
  output logic [NB-1:0]         out_data1,   // old content of ld_row1
  output logic [NB-1:0]         out_data2    // old content of ld_row2
);
  logic [NB-1:0] mem [NB];

  always_ff @(posedge clk) begin
    for (int r = 0; r < NB; r++) begin
      if (ld_en1 && ld_row1 == r[$clog2(NB)-1:0])      mem[r] <= ld_data1;
      else if (ld_en2 && ld_row2 == r[$clog2(NB)-1:0]) mem[r] <= ld_data2;
      else begin
        for (int c = 0; c < NB; c++)
          mem[r][c] <= mem[r][c] ^ row_flip[r][c] ^ col_flip[c][r];
      end
    end
  end

  assign rows      = mem;
  assign out_data1 = mem[ld_row1];
  assign out_data2 = mem[ld_row2];
endmodule
