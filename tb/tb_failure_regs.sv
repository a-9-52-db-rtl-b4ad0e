// tb_failure_regs -- random clears and validated updates of both registers,
// checked against a software model: register contents, |R|, |C|, the
// look-ahead |C|, and the first three failed row and column indices.
module tb_failure_regs;
  import pd_pkg::N;
  import pd_pkg::PPMAX;
  localparam int CW = $clog2(N + 1);
  localparam int IW = $clog2(N);
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, row_clr, col_clr;
  logic [N-1:0] row_upd, row_fail_in, col_upd, col_fail_in, row_fail, col_fail;
  logic [CW-1:0] row_cnt, col_cnt, col_cnt_next;
  logic [IW-1:0] row_idx [PPMAX];
  logic [IW-1:0] col_idx [PPMAX];
  logic [PPMAX-1:0] row_idx_vld, col_idx_vld;
  failure_regs dut (.*);

  logic [N-1:0] mr, mc;
  int checks = 0, failures = 0;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_idx(logic [N-1:0] m, logic [IW-1:0] idx [PPMAX], logic [PPMAX-1:0] vld);
    int n;
    n = 0;
    for (int i = 0; i < N && n < PPMAX; i++) if (m[i]) begin
      checks++;
      if (!vld[n] || idx[n] != IW'(i)) failures++;
      n++;
    end
    for (int k = n; k < PPMAX; k++) begin checks++; if (vld[k]) failures++; end
  endtask

  initial begin
    row_clr = 0; col_clr = 0; row_upd = '0; col_upd = '0; row_fail_in = '0; col_fail_in = '0;
    mr = '0; mc = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      int density;
      density = (i % 3 == 0) ? 3 : 60;   // sparse phases give 0..3 failures
      row_clr = ($urandom_range(19) == 0); col_clr = ($urandom_range(19) == 0);
      for (int j = 0; j < N; j++) begin
        row_upd[j] = ($urandom_range(9) == 0); col_upd[j] = ($urandom_range(9) == 0);
        row_fail_in[j] = ($urandom_range(99) < density); col_fail_in[j] = ($urandom_range(99) < density);
      end
      if (i % 50 == 0) begin row_clr = 1; col_clr = 1; end
      #1;
      if (row_clr) mr = '0;
      if (col_clr) mc = '0;
      for (int j = 0; j < N; j++) begin
        if (row_upd[j]) mr[j] = row_fail_in[j];
        if (col_upd[j]) mc[j] = col_fail_in[j];
      end
      checks++;
      if (int'(col_cnt_next) != $countones(mc)) failures++;
      @(posedge clk); #1;
      checks++;
      if (row_fail !== mr || col_fail !== mc || int'(row_cnt) != $countones(mr) ||
          int'(col_cnt) != $countones(mc)) begin
        failures++;
        if (failures < 5) $display("cycle %0d: register mismatch", i);
      end
      check_idx(mr, row_idx, row_idx_vld);
      check_idx(mc, col_idx, col_idx_vld);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
