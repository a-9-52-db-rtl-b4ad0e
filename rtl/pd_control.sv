// pd_control -- control module of the product decoder.
//
// Sequences one (195,178)^2 codeword in at most 193 cycles (ITER = L = 2):
//   LOAD   111 cycles: 105 cycles of row-wise loading over two lanes (rows
//          0..89 on lane 1 and 90..179 on lane 2 in cycles 0..89, rows
//          180..194 on lane 1 in cycles 90..104), with the first (row) half
//          iteration decoding the lanes directly, plus 6 cycles of drain;
//   HALF   2L-1 half iterations (column, row, column for L = 2) of 21 cycles
//          each: 15 input cycles + 6 pipeline cycles; in the last (column)
//          one post processing is enabled if 1 <= |R| <= 3;
//   PPROW, PPCOL  9 cycles each (post-processing iteration, only if
//          1 <= |R| <= 3 and 1 <= |C| <= 3 at the end of the last half
//          iteration): three input
//          slots, one per failed row (column), + 6 pipeline cycles;
//   DONE   1 cycle: dec_done, dec_success = (|C| == 0).
// Without the post-processing iteration a codeword takes 175 cycles.  In
// general 111 + (2L-1)*21 + 1 cycles, plus 18 with the post-processing
// iteration; the paper names L as a configuration parameter (Sec. V).
// The decoded codeword leaves through the output lanes during the next LOAD.
// For every decoder the control issues currRowIn (in_idx) with an input-valid
// tag; both are delayed by the NP = 6 pipeline stages to form currRowOut
// (out_idx) and Valid Output (out_vld).  Loading starts on `start` after
// reset and after every DONE; holding start high decodes back to back.
module pd_control
  import pd_pkg::*;
#(
  parameter int unsigned ITER = 2   // decoding iterations L, excluding the post-processing one
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [$clog2(N+1)-1:0]  row_cnt,
  input  logic [$clog2(N+1)-1:0]  col_cnt,
  input  logic [$clog2(N+1)-1:0]  col_cnt_next,
  input  logic [$clog2(N)-1:0]    row_idx [PPMAX],
  input  logic [PPMAX-1:0]        row_idx_vld,
  input  logic [$clog2(N)-1:0]    col_idx [PPMAX],
  input  logic [PPMAX-1:0]        col_idx_vld,
  output logic                    ld_en1,
  output logic [$clog2(N)-1:0]    ld_row1,
  output logic                    ld_en2,
  output logic [$clog2(N)-1:0]    ld_row2,
  output logic                    out_vld1,     // old row on lane 1 is a decoded row
  output logic                    out_vld2,
  output logic                    first_half,
  output logic                    col_mode,
  output logic [$clog2(RPD)-1:0]  in_idx  [PC],
  output logic [PC-1:0]           out_vld,
  output logic [$clog2(RPD)-1:0]  out_idx [PC],
  output logic                    pp_en,
  output logic                    row_clr,
  output logic                    col_clr,
  output logic                    dec_done,
  output logic                    dec_success,
  output logic                    dec_pp_iter,  // post-processing iteration was run
  output logic                    busy
);
  typedef enum logic [2:0] {IDLE, LOAD, HALF, PPROW, PPCOL, DONE} state_t;

  localparam int unsigned H        = PC / PL;
  localparam int unsigned LOAD_CYC = (H + PC % PL) * RPD;   // 105
  localparam int unsigned LOAD_LEN = LOAD_CYC + NP;         // 111
  localparam int unsigned HALF_LEN = RPD + NP;              // 21
  localparam int unsigned PP_LEN   = PPMAX + NP;            // 9
  localparam int unsigned IW       = $clog2(RPD);
  localparam int unsigned RW       = $clog2(N);
  localparam int unsigned CW       = $clog2(N+1);

  localparam int unsigned NHALF = 2 * ITER - 1;  // half iterations after the first

  state_t     state;
  logic [7:0] t;
  logic [7:0] h;          // current half iteration after the first, 1..NHALF
  logic       last_half;  // the last column half iteration
  assign last_half = (state == HALF) && (h == 8'(NHALF));
  logic       have_frame, pp_iter;

  function automatic logic in_range(logic [CW-1:0] v);
    return (v >= CW'(1)) && (v <= CW'(PPMAX));
  endfunction

  logic last;
  always_comb begin
    unique case (state)
      LOAD:          last = (t == 8'(LOAD_LEN - 1));
      HALF:          last = (t == 8'(HALF_LEN - 1));
      PPROW, PPCOL:  last = (t == 8'(PP_LEN - 1));
      default:       last = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= IDLE;
      t           <= '0;
      have_frame  <= 1'b0;
      h           <= '0;
      pp_iter     <= 1'b0;
      dec_success <= 1'b0;
      dec_pp_iter <= 1'b0;
    end else begin
      t <= last ? '0 : t + 8'd1;
      unique case (state)
        IDLE: if (start) state <= LOAD;
        LOAD: begin
          if (t == 8'(LOAD_CYC - 1)) have_frame <= 1'b0;
          if (last) begin
            state <= HALF;
            h     <= 8'd1;
          end
        end
        HALF: if (last) begin
          h <= h + 8'd1;
          if (last_half) begin
            pp_iter <= in_range(row_cnt) && in_range(col_cnt_next);
            state   <= (in_range(row_cnt) && in_range(col_cnt_next)) ? PPROW : DONE;
          end
        end
        PPROW: if (last) state <= PPCOL;
        PPCOL: if (last) state <= DONE;
        DONE: begin
          have_frame  <= 1'b1;
          dec_success <= (col_cnt == '0);
          dec_pp_iter <= pp_iter;
          pp_iter     <= 1'b0;
          state       <= start ? LOAD : IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  // ---- loading lanes ----
  always_comb begin
    ld_en1  = (state == LOAD) && (t < 8'(LOAD_CYC));
    ld_en2  = (state == LOAD) && (t < 8'(H * RPD));
    ld_row1 = (t < 8'(H * RPD)) ? RW'(t) : RW'((PC - 1) * RPD - H * RPD + 32'(t));
    ld_row2 = RW'(H * RPD + 32'(t));
    if (!ld_en1) ld_row1 = '0;
    if (!ld_en2) ld_row2 = '0;
    out_vld1 = ld_en1 && have_frame;
    out_vld2 = ld_en2 && have_frame;
  end

  assign first_half = (state == LOAD);
  assign col_mode   = ((state == HALF) && h[0]) || (state == PPCOL);
  assign pp_en      = last_half && in_range(row_cnt);
  // In a post-processing half the register is cleared only after its failed
  // indices have been read (cycles 0..PPMAX-1); its first update arrives in
  // cycle NP, so the clear still precedes every write.
  assign row_clr    = ((t == '0) && ((state == LOAD) || ((state == HALF) && !h[0])))
                   || ((t == 8'(PPMAX - 1)) && (state == PPROW));
  assign col_clr    = ((t == '0) && ((state == HALF) && h[0]))
                   || ((t == 8'(PPMAX - 1)) && (state == PPCOL));
  assign dec_done   = (state == DONE);
  assign busy       = (state != IDLE);

  // ---- currRowIn and input-valid tags per decoder ----
  logic [PC-1:0] in_vld;
  logic [RW-1:0] pp_idx;
  logic          pp_vld;
  always_comb begin
    // index of the t-th post-processing row (column)
    pp_idx = (state == PPROW) ? row_idx[t[1:0]] : col_idx[t[1:0]];
    pp_vld = ((state == PPROW) ? row_idx_vld[t[1:0]] : col_idx_vld[t[1:0]])
             && (t < 8'(PPMAX));
    for (int d = 0; d < PC; d++) begin
      int unsigned slot;
      slot      = (d < H) ? d : ((d < 2 * H) ? d - H : H);
      in_vld[d] = 1'b0;
      in_idx[d] = '0;
      unique case (state)
        LOAD: if (t < 8'(LOAD_CYC) && 32'(t) >= slot * RPD && 32'(t) < (slot + 1) * RPD) begin
          in_vld[d] = 1'b1;
          in_idx[d] = IW'(32'(t) - slot * RPD);
        end
        HALF: if (t < 8'(RPD)) begin
          in_vld[d] = 1'b1;
          in_idx[d] = IW'(t);
        end
        PPROW, PPCOL: if (pp_vld && (32'(pp_idx) / RPD == d)) begin
          in_vld[d] = 1'b1;
          in_idx[d] = IW'(32'(pp_idx) % RPD);
        end
        default: ;
      endcase
    end
  end

  // ---- currRowOut / Valid Output: NP-stage delay of the input tags ----
  logic [PC-1:0]  vld_pipe [NP];
  logic [IW-1:0]  idx_pipe [NP][PC];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NP; s++) begin
        vld_pipe[s] <= '0;
        for (int d = 0; d < PC; d++) idx_pipe[s][d] <= '0;
      end
    end else begin
      vld_pipe[0] <= in_vld;
      for (int d = 0; d < PC; d++) idx_pipe[0][d] <= in_idx[d];
      for (int s = 1; s < NP; s++) begin
        vld_pipe[s] <= vld_pipe[s-1];
        for (int d = 0; d < PC; d++) idx_pipe[s][d] <= idx_pipe[s-1][d];
      end
    end
  end

  // a word presented in cycle c leaves the decoder in cycle c+NP
  assign out_vld = vld_pipe[NP-1];
  for (genvar d = 0; d < PC; d++) begin : g_out
    assign out_idx[d] = idx_pipe[NP-1][d];
  end
endmodule
