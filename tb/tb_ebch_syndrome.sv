// tb_ebch_syndrome -- checks S1 and S3 of random words against a reference
// that multiplies and accumulates powers of alpha directly, and checks the
// 2-cycle latency (result of the word applied in cycle c read in cycle c+2).
module tb_ebch_syndrome;
  import pd_pkg::N;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [N-1:0] cw;
  logic [7:0] s1, s3;
  ebch_syndrome dut (.clk, .cw, .s1, .s3);

  int checks = 0, failures = 0;
  logic [7:0] pw [255];
  logic [7:0] e1 [$], e3 [$];

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [7:0] a, b;
    pw[0] = 8'd1;
    for (int i = 1; i < 255; i++) pw[i] = rmul(pw[i-1], 8'd2);
    for (int i = 0; i < 502; i++) begin
      cw = (i % 2 == 1) ? word_t'(encode(rand_info()) ^ rand_err(i % 5)) : rand_err(i % 7);
      a = '0; b = '0;
      for (int j = 0; j < N - 1; j++) if (cw[j]) begin
        a ^= pw[(N - 2 - j) % 255];
        b ^= pw[(3 * (N - 2 - j)) % 255];
      end
      e1.push_back(a); e3.push_back(b);
      @(posedge clk); #1;
      if (i >= 1) begin
        a = e1.pop_front(); b = e3.pop_front();
        checks++;
        if (s1 !== a || s3 !== b) begin
          failures++;
          if (failures < 5) $display("word %0d: s1=%h/%h s3=%h/%h", i-1, s1, a, s3, b);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
