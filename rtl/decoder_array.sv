// decoder_array -- the PC = 13 component decoders with their input
// multiplexers and output validation.
//
// Decoder d (0-based) is wired to scratch-memory rows and columns
// d*RPD .. d*RPD+RPD-1 (RPD = 15), i.e. row/column (n_eBCH-1)*15 + currRowIn
// in the paper's 1-based terms.  Its input is
//   * during the first half iteration (first_half = 1): a loading lane,
//     fixed per decoder: lane 1 for decoders 0..5 and 12, lane 2 for 6..11,
//     so that words being loaded bypass the memory and are decoded at once;
//   * otherwise row or column d*RPD + in_idx[d] of the scratch memory
//     (col_mode selects columns).
// Six cycles later its flip vector is ANDed with the control's out_vld[d]
// (Valid Output) and routed only to row/column d*RPD + out_idx[d] (Correct
// row selection, out_idx being the delayed currRowIn); the same validation
// writes the decoder's Failure flag into the row- or column-failure register.
// pp_en and the row-failure register are passed to every decoder's
// post-processing stage.
module decoder_array
  import pd_pkg::*;
(
  input  logic                   clk,
  input  logic                   first_half,
  input  logic                   col_mode,
  input  logic [N-1:0]           lane1,
  input  logic [N-1:0]           lane2,
  input  logic [N-1:0]           rows      [N],
  input  logic [$clog2(RPD)-1:0] in_idx    [PC],   // currRowIn per decoder
  input  logic [PC-1:0]          out_vld,          // Valid Output per decoder
  input  logic [$clog2(RPD)-1:0] out_idx   [PC],   // currRowOut per decoder
  input  logic                   pp_en,
  input  logic [N-1:0]           row_fail,         // row-failure register
  output logic [N-1:0]           row_flip  [N],
  output logic [N-1:0]           col_flip  [N],
  output logic [N-1:0]           row_upd,
  output logic [N-1:0]           col_upd,
  output logic [N-1:0]           fail_out          // Failure routed per index
);
  localparam int unsigned H = PC / PL;   // decoders per lane in full slots

  for (genvar d = 0; d < PC; d++) begin : g_dec
    localparam bit ON_LANE1 = (d < H) || (d == PC - 1);
    logic [N-1:0] din, flip;
    logic         failure;
    ebch_status_t status;

    always_comb begin
      din = '0;
      if (first_half) begin
        din = ON_LANE1 ? lane1 : lane2;
      end else begin
        for (int k = 0; k < RPD; k++) begin
          if (in_idx[d] == k[$clog2(RPD)-1:0]) begin
            if (col_mode) for (int r = 0; r < N; r++) din[r] = rows[r][d*RPD + k];
            else          din = rows[d*RPD + k];
          end
        end
      end
    end

    ebch_decoder u_dec (
      .clk, .cw(din), .pp_en, .pp_mask(row_fail), .flip, .failure, .status
    );

    for (genvar k = 0; k < RPD; k++) begin : g_sel
      logic sel;
      assign sel = out_vld[d] && (out_idx[d] == k[$clog2(RPD)-1:0]);
      assign row_flip[d*RPD + k] = (sel && !col_mode) ? flip : '0;
      assign col_flip[d*RPD + k] = (sel &&  col_mode) ? flip : '0;
      assign row_upd [d*RPD + k] = sel && !col_mode;
      assign col_upd [d*RPD + k] = sel &&  col_mode;
      assign fail_out[d*RPD + k] = failure;
    end
  end
endmodule
