// failure_regs -- row- and column-failure registers of the product decoder.
//
// Two n-bit registers record which rows and which columns failed to decode in
// the last half iteration that processed them.  A register is cleared by
// row_clr / col_clr at the start of a half iteration of its kind and bit i is
// written with the decoder's Failure flag whenever upd[i] validates the
// decoder output for row (column) i.  The block also provides what the
// control needs: the number of failures |R| and |C| (|C| also for the value
// being written, so the post-processing decision can be taken in the last
// cycle of the fourth half iteration) and the indices of the first PPMAX = 3
// failed rows and columns, which select the rows and columns of the
// post-processing iteration.  The paper collects these indices inside the
// component decoders; taking them from the registers gives the same set and
// is this design's choice.
module failure_regs
  import pd_pkg::*;
#(
  parameter int unsigned NB = N
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    row_clr,
  input  logic                    col_clr,
  input  logic [NB-1:0]           row_upd,
  input  logic [NB-1:0]           row_fail_in,
  input  logic [NB-1:0]           col_upd,
  input  logic [NB-1:0]           col_fail_in,
  output logic [NB-1:0]           row_fail,      // R as a bit mask
  output logic [NB-1:0]           col_fail,      // C as a bit mask
  output logic [$clog2(NB+1)-1:0] row_cnt,       // |R|
  output logic [$clog2(NB+1)-1:0] col_cnt,       // |C|
  output logic [$clog2(NB+1)-1:0] col_cnt_next,  // |C| after this cycle
  output logic [$clog2(NB)-1:0]   row_idx [PPMAX], // first failed rows
  output logic [PPMAX-1:0]        row_idx_vld,
  output logic [$clog2(NB)-1:0]   col_idx [PPMAX], // first failed columns
  output logic [PPMAX-1:0]        col_idx_vld
);
  localparam int unsigned CW = $clog2(NB + 1);
  localparam int unsigned IW = $clog2(NB);

  logic [NB-1:0] row_d, col_d;

  always_comb begin
    row_d = row_clr ? '0 : row_fail;
    col_d = col_clr ? '0 : col_fail;
    for (int i = 0; i < NB; i++) begin
      if (row_upd[i]) row_d[i] = row_fail_in[i];
      if (col_upd[i]) col_d[i] = col_fail_in[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_fail <= '0;
      col_fail <= '0;
    end else begin
      row_fail <= row_d;
      col_fail <= col_d;
    end
  end

  function automatic logic [CW-1:0] popcnt(logic [NB-1:0] v);
    logic [CW-1:0] s;
    s = '0;
    for (int i = 0; i < NB; i++) s += CW'(v[i]);
    return s;
  endfunction

  assign row_cnt      = popcnt(row_fail);
  assign col_cnt      = popcnt(col_fail);
  assign col_cnt_next = popcnt(col_d);

  // first PPMAX set bits, lowest index first
  always_comb begin
    int unsigned nr, nc;
    nr = 0;
    nc = 0;
    row_idx_vld = '0;
    col_idx_vld = '0;
    for (int k = 0; k < PPMAX; k++) begin
      row_idx[k] = '0;
      col_idx[k] = '0;
    end
    for (int i = 0; i < NB; i++) begin
      if (row_fail[i] && nr < PPMAX) begin
        row_idx[nr]     = IW'(i);
        row_idx_vld[nr] = 1'b1;
        nr++;
      end
      if (col_fail[i] && nc < PPMAX) begin
        col_idx[nc]     = IW'(i);
        col_idx_vld[nc] = 1'b1;
        nc++;
      end
    end
  end
endmodule
