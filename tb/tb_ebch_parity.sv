// tb_ebch_parity -- checks the overall parity of random words and its
// 2-cycle latency.
module tb_ebch_parity;
  import pd_pkg::N;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [N-1:0] cw;
  logic par;
  ebch_parity dut (.clk, .cw, .par);

  int checks = 0, failures = 0;
  logic q [$];

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic e;
    for (int i = 0; i < 402; i++) begin
      for (int j = 0; j < N; j++) cw[j] = 1'($urandom);
      if (i % 3 == 0) begin cw = '0; cw[$urandom_range(N-1)] = 1'b1; end
      e = 1'b0;
      for (int j = 0; j < N; j++) e ^= cw[j];
      q.push_back(e);
      @(posedge clk); #1;
      if (i >= 1) begin
        e = q.pop_front();
        checks++;
        if (par !== e) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
