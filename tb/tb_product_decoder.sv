// tb_product_decoder -- end-to-end testbench of the (195,178)^2 product decoder
// at its full, default size.
//
// A behavioural input buffer presents the rows the decoder asks for.  Random
// product codewords are built with the reference encoder (rows first, then
// all columns) and corrupted with error patterns whose outcome is known:
//   clean      no errors;
//   rows2      up to 2 errors in many rows: fixed by the first half iteration
//              that runs during loading (lane bypass);
//   rows3      3 errors in some rows (rows fail) on distinct columns: fixed by
//              the column half iteration;
//   stall3x3   errors at the 9 crossings of 3 rows and 3 columns: every row
//              and column fails, post processing flips the crossings during the
//              fourth half iteration, the post-processing iteration runs;
//   rows3x2    two rows with 3 errors each on the same 3 columns: both rows
//              fail, each column holds 2 errors and is fixed by the columns;
//   latin4     12 errors, 3 in each of 4 rows and 4 columns: nothing can be
//              corrected, |R| = 4 disables post processing, failure reported
//              and the data leave unchanged.
// Codewords are decoded back to back; each one's output is checked row by row
// while the next one loads.  The cycle count from load start to dec_done is
// checked against 175 (no post-processing iteration) and 193 cycles.  Each
// mechanism (bypass corrections, column corrections, post-processing flips,
// post-processing iteration, declared failure, output streaming) is counted
// and must occur.  The number of validated decoder outputs per codeword is
// checked too (4 x 195, plus 6 in the post-processing iteration).
module tb_product_decoder;
  import pd_pkg::*;
  import tb_ref_pkg::word_t;
  import tb_ref_pkg::encode;
  import tb_ref_pkg::rand_info;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0;

  logic [N-1:0] in_cw1, in_cw2, out_cw1, out_cw2;
  logic ld_en1, ld_en2, out_valid1, out_valid2;
  logic [$clog2(N)-1:0] ld_row1, ld_row2, out_row1, out_row2;
  logic dec_done, dec_success, dec_pp_iter, busy;

  product_decoder dut (.*);

  localparam int NF = 7;   // frames incl. one trailing flush frame
  word_t clean [NF][N];
  word_t rx    [NF][N];
  int    kind  [NF];       // 0 ok, 1 ok with PP iteration, 2 failure
  string name  [NF];

  int checks = 0, failures = 0;
  int n_dec = 0;           // validated decoder outputs in the current frame
  always @(negedge clk) begin
    if (ld_en1 && dut.u_ctrl.t == 0) n_dec = 0;
    n_dec += $countones(dut.out_vld);
  end
  int n_bypass = 0, n_colfix = 0, n_ppflip = 0, n_ppiter = 0, n_fail = 0, n_out = 0;

  // behavioural input buffer
  int cur_in = 0;
  assign in_cw1 = rx[cur_in][ld_row1];
  assign in_cw2 = rx[cur_in][ld_row2];

  task automatic make_frame(int f);
    logic [K-1:0] info;
    word_t col;
    for (int r = 0; r < K; r++) clean[f][r] = encode(rand_info());
    for (int r = K; r < N; r++) clean[f][r] = '0;
    for (int c = 0; c < N; c++) begin
      for (int r = 0; r < K; r++) info[r] = clean[f][r][c];
      col = encode(info);
      for (int r = K; r < N; r++) clean[f][r][c] = col[r];
    end
    for (int r = 0; r < N; r++) rx[f][r] = clean[f][r];
  endtask

  task automatic flip(int f, int r, int c);
    rx[f][r][c] = ~rx[f][r][c];
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters, one probe per component decoder
  for (genvar d = 0; d < PC; d++) begin : g_probe
    always @(negedge clk) if (rst_n && dut.u_ctrl.out_vld[d] && |dut.u_arr.g_dec[d].flip) begin
      if (dut.u_ctrl.first_half) n_bypass++;
      else if (dut.u_ctrl.col_mode && !dut.u_arr.g_dec[d].failure) n_colfix++;
      if (dut.u_ctrl.pp_en && dut.u_arr.g_dec[d].failure) n_ppflip++;
    end
  end

  // output checking: frame f leaves while frame f+1 loads
  int out_frame = -1;
  int cyc_now = 0;
  always @(posedge clk) cyc_now++;
  always @(negedge clk) if (rst_n) begin
    if (out_valid1 || out_valid2) n_out++;
    if (out_valid1 && out_frame >= 0) begin
      checks++;
      if (out_cw1 !== (kind[out_frame] == 2 ? rx[out_frame][out_row1] : clean[out_frame][out_row1])) begin
        failures++;
        if (failures < 10) $display("frame %0d row %0d lane 1 mismatch", out_frame, out_row1);
      end
    end
    if (out_valid2 && out_frame >= 0) begin
      checks++;
      if (out_cw2 !== (kind[out_frame] == 2 ? rx[out_frame][out_row2] : clean[out_frame][out_row2])) begin
        failures++;
        if (failures < 10) $display("frame %0d row %0d lane 2 mismatch", out_frame, out_row2);
      end
    end
  end

  initial begin
    int used_col [N];
    int r, c, cyc, t0;
    // ---- build frames ----
    for (int f = 0; f < NF; f++) make_frame(f);
    name[0] = "clean";    kind[0] = 0;
    name[1] = "rows2";    kind[1] = 0;
    for (int i = 0; i < 120; i++) begin
      r = $urandom_range(N-1);
      flip(1, r, $urandom_range(N-1));
    end
    // make sure no row got 3+ flips: redo such rows with at most 2
    for (int rr = 0; rr < N; rr++) if ($countones(rx[1][rr] ^ clean[1][rr]) > 2) begin
      rx[1][rr] = clean[1][rr];
      flip(1, rr, rr);
    end
    name[2] = "rows3";    kind[2] = 0;
    for (int i = 0; i < N; i++) used_col[i] = 0;
    for (int k = 0; k < 20; k++) begin
      r = k * 9 + 3;
      for (int e = 0; e < 3; e++) begin
        do c = $urandom_range(N-1); while (used_col[c] != 0);
        used_col[c] = 1;
        flip(2, r, c);
      end
    end
    name[3] = "stall3x3"; kind[3] = 1;
    for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++)
      flip(3, (a == 0) ? 11 : (a == 1) ? 77 : 190, (b == 0) ? 5 : (b == 1) ? 100 : 194);
    name[4] = "rows3x2"; kind[4] = 0;
    // rows 20, 140 x cols 30, 31 plus col 60 on both rows: 3 errors per row,
    // columns 30, 31, 60 have 2 errors each -> corrected by columns
    flip(4, 20, 30); flip(4, 20, 31); flip(4, 20, 60);
    flip(4, 140, 30); flip(4, 140, 31); flip(4, 140, 60);
    name[5] = "latin4";   kind[5] = 2;
    for (int a = 0; a < 4; a++) for (int b = 0; b < 4; b++)
      if (a != b) flip(5, 40 + 30 * a, 7 + 50 * b);
    name[6] = "flush";    kind[6] = 0;

    // ---- run back to back ----
    repeat (3) @(posedge clk);
    rst_n = 1;
    start = 1;
    cur_in = 0;
    for (int f = 0; f < NF; f++) begin
      do @(negedge clk); while (!(ld_en1 && dut.u_ctrl.t == 0));
      t0 = cyc_now;
      do @(negedge clk); while (!dec_done);
      cyc = cyc_now - t0 + 1;
      // switch the input buffer and the output checker to the next frame
      cur_in    = (f + 1 < NF) ? f + 1 : f;
      out_frame = f;
      if (f == NF - 1) start = 0;
      checks++;
      if (cyc != (kind[f] == 1 ? 193 : 175)) begin
        failures++;
        $display("frame %0d (%s): %0d cycles", f, name[f], cyc);
      end
      // every row and column decoded in each of the 4 half iterations, plus
      // the 3 failed rows and 3 failed columns of the post-processing iteration
      checks++;
      if (n_dec != 4 * N + (kind[f] == 1 ? 6 : 0)) begin
        failures++;
        $display("frame %0d (%s): %0d decodings", f, name[f], n_dec);
      end
      @(posedge clk); #1;   // result registers updated, next load not yet sampled
      checks++;
      if (dec_success !== (kind[f] != 2) || dec_pp_iter !== (kind[f] == 1)) begin
        failures++;
        $display("frame %0d (%s): success=%b pp_iter=%b", f, name[f], dec_success, dec_pp_iter);
      end
      if (dec_pp_iter) n_ppiter++;
      if (!dec_success) n_fail++;
      $display("frame %0d %-10s cycles=%0d success=%b pp_iter=%b", f, name[f], cyc, dec_success, dec_pp_iter);
    end
    repeat (5) @(posedge clk);
    $display("bypass=%0d colfix=%0d ppflip=%0d ppiter=%0d fail=%0d out=%0d",
             n_bypass, n_colfix, n_ppflip, n_ppiter, n_fail, n_out);
    checks++; if (n_bypass == 0) begin failures++; $display("no first-half correction"); end
    checks++; if (n_colfix == 0) begin failures++; $display("no column correction"); end
    checks++; if (n_ppflip == 0) begin failures++; $display("no post-processing flip"); end
    checks++; if (n_ppiter == 0) begin failures++; $display("no post-processing iteration"); end
    checks++; if (n_fail   == 0) begin failures++; $display("no declared failure"); end
    checks++; if (n_out    == 0) begin failures++; $display("no output streaming"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
