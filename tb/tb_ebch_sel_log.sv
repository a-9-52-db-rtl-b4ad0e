// tb_ebch_sel_log -- drives random syndromes (with zeros and S1^3 = S3 cases
// mixed in) and checks the zero flags, log(S1^3+S3) - log(S1^3) mod 255 and
// (n-1) - log(S1) mod 255 against a reference built from repeated
// multiplication by alpha, 2 cycles after the inputs.
module tb_ebch_sel_log;
  import pd_pkg::N;
  import tb_ref_pkg::rmul;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [7:0] s1, s3, log_ratio, nlog_s1;
  logic s1_z, s3_z, sum_z;
  ebch_sel_log dut (.clk, .s1, .s3, .s1_z, .s3_z, .sum_z, .log_ratio, .nlog_s1);

  int checks = 0, failures = 0;
  int lg [256];
  typedef struct { logic z1, z3, zs; int ratio, nlog; } exp_t;
  exp_t q [$];

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [7:0] p, cube, sum;
    exp_t e;
    p = 8'd1;
    for (int i = 0; i < 255; i++) begin lg[p] = i; p = rmul(p, 8'd2); end
    for (int i = 0; i < 602; i++) begin
      s1 = 8'($urandom); s3 = 8'($urandom);
      if (i % 7 == 0) s1 = '0;
      if (i % 5 == 0) s3 = '0;
      cube = rmul(rmul(s1, s1), s1);
      if (i % 4 == 1) s3 = cube;
      sum  = cube ^ s3;
      e.z1 = (s1 == 0); e.z3 = (s3 == 0); e.zs = (sum == 0);
      e.ratio = (sum != 0 && cube != 0) ? (lg[sum] - lg[cube] + 255) % 255 : -1;
      e.nlog  = (s1 != 0) ? (N - 1 - lg[s1] + 255) % 255 : -1;
      q.push_back(e);
      @(posedge clk); #1;
      if (i >= 1) begin
        e = q.pop_front();
        checks++;
        if (s1_z !== e.z1 || s3_z !== e.z3 || sum_z !== e.zs ||
            (e.ratio >= 0 && int'(log_ratio) != e.ratio) ||
            (e.nlog >= 0 && int'(nlog_s1) != e.nlog)) begin
          failures++;
          if (failures < 5) $display("mismatch at %0d", i-1);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
