// tb_decoder_array -- drives the 13-decoder array with the tags the control
// would issue and checks the routed flip vectors.  A random product codeword
// from the reference encoder is corrupted three times:
//   rows:    0..3 errors in every row, rows read from the matrix input;
//   lanes:   the same, but the rows arrive on the two loading lanes in the
//            load order (first half iteration, lane bypass);
//   columns: 0..2 errors per column plus one column with 3 errors while
//            post processing is enabled with a given row-failure mask.
// Flips are accumulated over the half iteration; rows/columns with <= 2
// errors must end corrected, those with 3 must be untouched (or receive the
// mask under post processing), and the failure flags written through
// row_upd/col_upd must mark exactly the 3-error rows/columns.
module tb_decoder_array;
  import pd_pkg::*;
  import tb_ref_pkg::word_t;
  import tb_ref_pkg::encode;
  import tb_ref_pkg::rand_info;
  localparam int IW = $clog2(RPD);
  localparam int H  = PC / PL;

  logic clk = 0;
  always #5 clk = ~clk;
  logic first_half, col_mode, pp_en;
  logic [N-1:0] lane1, lane2, row_fail, row_upd, col_upd, fail_out;
  logic [N-1:0] rows [N];
  logic [N-1:0] row_flip [N];
  logic [N-1:0] col_flip [N];
  logic [IW-1:0] in_idx [PC];
  logic [IW-1:0] out_idx [PC];
  logic [PC-1:0] out_vld;
  decoder_array dut (.*);

  word_t clean [N];
  word_t err [N];      // err[r][c]
  word_t acc [N];      // accumulated flips, acc[r][c]
  logic [N-1:0] failed;
  int checks = 0, failures = 0;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int slot_of(int d);
    return (d < H) ? d : ((d < 2 * H) ? d - H : H);
  endfunction

  // run one half iteration of `len` cycles; mode 0 rows, 1 lanes, 2 columns
  task automatic run(int mode, int len);
    logic [PC-1:0] hv [200];
    int            hi [200][PC];
    int            ii [PC];
    for (int r = 0; r < N; r++) acc[r] = '0;
    failed = '0;
    for (int t = 0; t < len + NP; t++) begin
      logic [PC-1:0] v;
      for (int d = 0; d < PC; d++) begin
        v[d] = 1'b0; ii[d] = 0;
        if (mode == 1) begin
          if (t < len && t >= slot_of(d) * RPD && t < (slot_of(d) + 1) * RPD) begin
            v[d] = 1'b1; ii[d] = t - slot_of(d) * RPD;
          end
        end else if (t < RPD) begin v[d] = 1'b1; ii[d] = t; end
        in_idx[d] = IW'(ii[d]);
      end
      if (mode == 1) begin
        lane1 = (t < H * RPD) ? clean[t] ^ err[t] : (t < len ? clean[(PC-1)*RPD + t - H*RPD] ^ err[(PC-1)*RPD + t - H*RPD] : '0);
        lane2 = (t < H * RPD) ? clean[H*RPD + t] ^ err[H*RPD + t] : '0;
      end
      hv[t] = v;
      for (int d = 0; d < PC; d++) hi[t][d] = ii[d];
      if (t >= NP) begin
        out_vld = hv[t-NP];
        for (int d = 0; d < PC; d++) out_idx[d] = IW'(hi[t-NP][d]);
      end else out_vld = '0;
      #1;
      for (int i = 0; i < N; i++) begin
        if (mode != 2) acc[i] ^= row_flip[i];
        else for (int r = 0; r < N; r++) acc[r][i] ^= col_flip[i][r];
        if ((mode != 2 && row_upd[i]) || (mode == 2 && col_upd[i])) failed[i] = fail_out[i];
      end
      @(posedge clk); #1;
    end
  endtask

  initial begin
    logic [K-1:0] info;
    word_t col;
    int ne, c, badcol;
    logic [N-1:0] mask;
    for (int r = 0; r < K; r++) clean[r] = encode(rand_info());
    for (int cc = 0; cc < N; cc++) begin
      for (int r = 0; r < K; r++) info[r] = clean[r][cc];
      col = encode(info);
      for (int r = K; r < N; r++) clean[r][cc] = col[r];
    end
    first_half = 0; col_mode = 0; pp_en = 0; row_fail = '0; lane1 = '0; lane2 = '0;
    out_vld = '0;

    for (int pass = 0; pass < 2; pass++) begin
      // ---- rows (pass 0) and lane bypass (pass 1): 0..3 errors per row ----
      for (int r = 0; r < N; r++) begin
        err[r] = '0;
        ne = (r + pass) % 4;
        for (int k = 0; k < ne; k++) begin
          do c = $urandom_range(N-1); while (err[r][c]);
          err[r][c] = 1'b1;
        end
      end
      for (int r = 0; r < N; r++) rows[r] = clean[r] ^ err[r];
      first_half = (pass == 1);
      col_mode   = 0;
      pp_en      = 0;
      run(pass == 1 ? 1 : 0, pass == 1 ? (H + 1) * RPD : RPD);
      for (int r = 0; r < N; r++) begin
        checks++;
        if ($countones(err[r]) <= 2 ? (acc[r] !== err[r] || failed[r]) : (acc[r] !== '0 || !failed[r])) begin
          failures++;
          if (failures < 6) $display("pass %0d row %0d (%0d errors) wrong", pass, r, $countones(err[r]));
        end
      end
    end

    // ---- columns with post processing ----
    first_half = 0; col_mode = 1; pp_en = 1;
    for (int r = 0; r < N; r++) err[r] = '0;
    badcol = 77;
    for (int cc = 0; cc < N; cc++) begin
      ne = (cc == badcol) ? 3 : cc % 3;
      for (int k = 0; k < ne; k++) begin
        do c = $urandom_range(N-1); while (err[c][cc]);
        err[c][cc] = 1'b1;
      end
    end
    mask = '0; mask[3] = 1; mask[150] = 1;
    row_fail = mask;
    for (int r = 0; r < N; r++) rows[r] = clean[r] ^ err[r];
    run(2, RPD);
    for (int cc = 0; cc < N; cc++) begin
      logic [N-1:0] a, e;
      for (int r = 0; r < N; r++) begin a[r] = acc[r][cc]; e[r] = err[r][cc]; end
      checks++;
      if (cc == badcol ? (a !== mask || !failed[cc]) : (a !== e || failed[cc])) begin
        failures++;
        if (failures < 6) $display("column %0d wrong", cc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
