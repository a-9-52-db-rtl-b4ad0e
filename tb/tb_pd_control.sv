// tb_pd_control -- checks the decoder schedule cycle by cycle against the
// paper's numbers, with the failure counts and post-processing indices
// driven by the testbench:
//   * lane 1 loads rows 1..90 then 181..195, lane 2 rows 91..180 (1-based),
//     105 load cycles;
//   * first half iteration Valid Output windows: decoders 1 and 7 in cycles
//     6+1..15, ..., decoders 6 and 12 in 6+76..90, decoder 13 in 6+91..105,
//     with currRowOut counting 0..14 inside each window;
//   * three standard half iterations of 15 + 6 cycles, all decoders valid in
//     their last 15 cycles; post processing enabled only in the last one and
//     only when 1 <= |R| <= 3;
//   * frame 1: no post-processing iteration, dec_done in cycle 175;
//     frame 2: |R| = 2, |C| = 2, post-processing iteration over the given
//     rows and columns, dec_done in cycle 193;
//     frame 3: |R| = 4, no post processing, failure reported.
module tb_pd_control;
  import pd_pkg::*;
  localparam int CW = $clog2(N + 1);
  localparam int RW = $clog2(N);
  localparam int IW = $clog2(RPD);
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0;
  logic [CW-1:0] row_cnt, col_cnt, col_cnt_next;
  logic [RW-1:0] row_idx [PPMAX];
  logic [RW-1:0] col_idx [PPMAX];
  logic [PPMAX-1:0] row_idx_vld, col_idx_vld;
  logic ld_en1, ld_en2, out_vld1, out_vld2, first_half, col_mode, pp_en;
  logic row_clr, col_clr, dec_done, dec_success, dec_pp_iter, busy;
  logic [RW-1:0] ld_row1, ld_row2;
  logic [IW-1:0] in_idx [PC];
  logic [IW-1:0] out_idx [PC];
  logic [PC-1:0] out_vld;
  pd_control dut (.*);

  int checks = 0, failures = 0;
  int n_pp_en = 0, n_ppiter = 0;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic expect_eq(string what, int c, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("cycle %0d: %s = %0d, expected %0d", c, what, got, exp);
    end
  endtask

  // expected Valid Output mask and currRowOut in a 1-based cycle c of a frame
  task automatic check_cycle(int c, int frame);
    logic [PC-1:0] ev;
    int            ei [PC];
    ev = '0;
    for (int d = 0; d < PC; d++) ei[d] = -1;
    if (c <= 105) begin
      expect_eq("ld_en1", c, ld_en1, 1);
      expect_eq("ld_row1", c, ld_row1, (c <= 90) ? c - 1 : 180 + c - 91);
      expect_eq("ld_en2", c, ld_en2, c <= 90);
      if (c <= 90) expect_eq("ld_row2", c, ld_row2, 90 + c - 1);
    end else begin
      expect_eq("ld_en1", c, ld_en1, 0);
      expect_eq("ld_en2", c, ld_en2, 0);
    end
    if (c <= 111) begin
      // paper: decoders s+1 and s+7 valid in cycles 6+15s+1 .. 6+15s+15
      for (int s = 0; s < 7; s++) if (c >= 6 + 15*s + 1 && c <= 6 + 15*s + 15) begin
        if (s < 6) begin ev[s] = 1; ev[s+6] = 1; ei[s] = c - 7 - 15*s; ei[s+6] = c - 7 - 15*s; end
        else begin ev[12] = 1; ei[12] = c - 7 - 15*s; end
      end
      expect_eq("first_half", c, first_half, 1);
    end else if (c <= 174) begin
      int t;
      t = (c - 112) % 21;
      if (t >= 6) for (int d = 0; d < PC; d++) begin ev[d] = 1; ei[d] = t - 6; end
      expect_eq("col_mode", c, col_mode, ((c - 112) / 21) != 1);
      expect_eq("pp_en", c, pp_en, (c >= 154) && (frame == 2));
    end else if (frame == 2 && c <= 192) begin
      int t;
      t = (c - 175) % 9;
      expect_eq("col_mode", c, col_mode, c >= 184);
      if (c < 184) begin   // rows 20 and 140: decoders 1 and 9, idx 5
        if (t == 6) begin ev[1] = 1; ei[1] = 5; end
        if (t == 7) begin ev[9] = 1; ei[9] = 5; end
      end else begin       // columns 5, 6 and 190: decoders 0, 0, 12
        if (t == 6) begin ev[0] = 1; ei[0] = 5; end
        if (t == 7) begin ev[0] = 1; ei[0] = 6; end
        if (t == 8) begin ev[12] = 1; ei[12] = 10; end
      end
    end
    expect_eq("out_vld", c, int'(out_vld), int'(ev));
    for (int d = 0; d < PC; d++) if (ev[d]) expect_eq("out_idx", c, out_idx[d], ei[d]);
  endtask

  initial begin
    int c, exp_len;
    row_cnt = '0; col_cnt = '0; col_cnt_next = '0;
    row_idx = '{8'd20, 8'd140, 8'd0}; row_idx_vld = 3'b011;
    col_idx = '{8'd5, 8'd6, 8'd190}; col_idx_vld = 3'b111;
    repeat (2) @(posedge clk);
    rst_n = 1;
    start = 1;
    for (int frame = 1; frame <= 3; frame++) begin
      // failure counts seen by the control in this frame
      row_cnt      = (frame == 2) ? CW'(2) : (frame == 3) ? CW'(4) : CW'(0);
      col_cnt_next = (frame == 1) ? CW'(0) : (frame == 2) ? CW'(2) : CW'(5);
      col_cnt      = col_cnt_next;
      if (frame == 2) col_cnt = '0;   // all columns fixed after the post-processing iteration
      do @(negedge clk); while (!(ld_en1 && ld_row1 == 0));
      c = 1;
      exp_len = (frame == 2) ? 193 : 175;
      while (!dec_done) begin
        check_cycle(c, frame);
        if (pp_en) n_pp_en++;
        @(negedge clk);
        c++;
        if (c > 300) break;
      end
      expect_eq("frame length", c, c, exp_len);
      @(negedge clk);
      expect_eq("dec_success", c, dec_success, frame != 3);
      expect_eq("dec_pp_iter", c, dec_pp_iter, frame == 2);
      if (dec_pp_iter) n_ppiter++;
      if (frame == 3) start = 0;
    end
    expect_eq("pp_en seen", 0, n_pp_en > 0, 1);
    expect_eq("pp iteration seen", 0, n_ppiter, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
