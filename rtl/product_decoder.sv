// product_decoder -- top level of the (195,178)^2 extended-BCH product decoder.
//
// A 195 x 195 register matrix (scratch memory) holds the received product
// codeword.  Thirteen pipelined eBCH component decoders decode 15 rows or 15
// columns each, one per clock, and their flip vectors toggle the wrong bits in
// place.  Schedule per codeword (see pd_control): load plus first row half
// iteration (111 cycles), column / row / column half iterations (21 cycles
// each, post processing applied during the last one), an optional
// post-processing iteration over the at most three failed rows and columns
// (2 x 9 cycles) and one cycle to report the result: 193 cycles worst case,
// 175 without the post-processing iteration.
//
// Interface: when loading, the decoder asserts ld_en1/ld_en2 with the row
// numbers ld_row1/ld_row2 and samples in_cw1/in_cw2 in the same cycle (an
// external input buffer must present those rows combinationally).  The
// previously decoded codeword leaves on out_cw1/out_cw2 (out_row1/out_row2,
// qualified by out_valid1/out_valid2) during the same cycles.  dec_done pulses
// for one cycle when a codeword is finished; dec_success is then valid and
// stays until the next dec_done.  Bit c of a row is column c; index 194 of a
// row or column is its extension parity bit.
module product_decoder
  import pd_pkg::*;
#(
  parameter int unsigned ITER = 2   // decoding iterations L (post-processing iteration not counted)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,        // load a codeword when idle/done
  input  logic [N-1:0]         in_cw1,       // loading lane 1
  input  logic [N-1:0]         in_cw2,       // loading lane 2
  output logic                 ld_en1,
  output logic [$clog2(N)-1:0] ld_row1,
  output logic                 ld_en2,
  output logic [$clog2(N)-1:0] ld_row2,
  output logic                 out_valid1,
  output logic [$clog2(N)-1:0] out_row1,
  output logic [N-1:0]         out_cw1,
  output logic                 out_valid2,
  output logic [$clog2(N)-1:0] out_row2,
  output logic [N-1:0]         out_cw2,
  output logic                 dec_done,
  output logic                 dec_success,
  output logic                 dec_pp_iter,  // the post-processing iteration ran
  output logic                 busy
);
  localparam int unsigned CW = $clog2(N + 1);
  localparam int unsigned RW = $clog2(N);
  localparam int unsigned IW = $clog2(RPD);

  logic [N-1:0] rows [N];
  logic [N-1:0] row_flip [N];
  logic [N-1:0] col_flip [N];
  logic [N-1:0] row_upd, col_upd, fail_out, row_fail, col_fail;
  logic [CW-1:0] row_cnt, col_cnt, col_cnt_next;
  logic [RW-1:0] row_idx [PPMAX];
  logic [RW-1:0] col_idx [PPMAX];
  logic [PPMAX-1:0] row_idx_vld, col_idx_vld;
  logic first_half, col_mode, pp_en, row_clr, col_clr;
  logic [IW-1:0] in_idx [PC];
  logic [IW-1:0] out_idx [PC];
  logic [PC-1:0] out_vld;

  pd_control #(.ITER(ITER)) u_ctrl (
    .clk, .rst_n, .start,
    .row_cnt, .col_cnt, .col_cnt_next,
    .row_idx, .row_idx_vld, .col_idx, .col_idx_vld,
    .ld_en1, .ld_row1, .ld_en2, .ld_row2,
    .out_vld1(out_valid1), .out_vld2(out_valid2),
    .first_half, .col_mode, .in_idx, .out_vld, .out_idx,
    .pp_en, .row_clr, .col_clr,
    .dec_done, .dec_success, .dec_pp_iter, .busy
  );

  scratch_memory #(.NB(N)) u_mem (
    .clk,
    .ld_en1, .ld_row1, .ld_data1(in_cw1),
    .ld_en2, .ld_row2, .ld_data2(in_cw2),
    .row_flip, .col_flip, .rows,
    .out_data1(out_cw1), .out_data2(out_cw2)
  );

  decoder_array u_arr (
    .clk, .first_half, .col_mode,
    .lane1(in_cw1), .lane2(in_cw2), .rows,
    .in_idx, .out_vld, .out_idx, .pp_en, .row_fail,
    .row_flip, .col_flip, .row_upd, .col_upd, .fail_out
  );

  failure_regs #(.NB(N)) u_frg (
    .clk, .rst_n, .row_clr, .col_clr,
    .row_upd, .row_fail_in(fail_out), .col_upd, .col_fail_in(fail_out),
    .row_fail, .col_fail, .row_cnt, .col_cnt, .col_cnt_next,
    .row_idx, .row_idx_vld, .col_idx, .col_idx_vld
  );

  assign out_row1 = ld_row1;
  assign out_row2 = ld_row2;
endmodule
