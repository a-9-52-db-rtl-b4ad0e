// tb_ebch_err_loc -- feeds the error locator with the inputs a reference
// computes for random error patterns (0..3 errors, extension bit included):
// syndromes, zero flags, log-domain ratio, (n-1)-log S1 and parity.  Checks,
// 2 cycles later, that 0, 1 and 2 errors give the right status and
// locations (in either order for two errors, the extension bit excluded) and
// that 3 errors always give Failure.
module tb_ebch_err_loc;
  import pd_pkg::N;
  import pd_pkg::ebch_status_t;
  import tb_ref_pkg::rmul;
  import tb_ref_pkg::rand_err;
  import tb_ref_pkg::word_t;
  logic clk = 0;
  always #5 clk = ~clk;
  logic s1_z, s3_z, sum_z, par_in, par_out;
  logic [7:0] log_ratio, nlog_s1, loc1, loc2;
  ebch_status_t status;
  ebch_err_loc dut (.clk, .s1_z, .s3_z, .sum_z, .log_ratio, .nlog_s1, .par_in,
                    .status, .loc1, .loc2, .par_out);

  int checks = 0, failures = 0;
  int lg [256];
  logic [7:0] pw [255];
  word_t q [$];

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    word_t err, eb;
    logic [7:0] s1, s3, cube, sum;
    int nb, l1, l2, cnt;
    pw[0] = 8'd1;
    for (int i = 1; i < 255; i++) pw[i] = rmul(pw[i-1], 8'd2);
    for (int i = 0; i < 255; i++) lg[pw[i]] = i;
    for (int i = 0; i < 1202; i++) begin
      err = rand_err(i % 4);
      s1 = '0; s3 = '0;
      for (int j = 0; j < N - 1; j++) if (err[j]) begin
        s1 ^= pw[(N - 2 - j) % 255];
        s3 ^= pw[(3 * (N - 2 - j)) % 255];
      end
      cube = rmul(rmul(s1, s1), s1);
      sum  = cube ^ s3;
      s1_z = (s1 == 0); s3_z = (s3 == 0); sum_z = (sum == 0);
      log_ratio = (sum != 0 && cube != 0) ? 8'((lg[sum] - lg[cube] + 255) % 255) : 8'd0;
      nlog_s1   = (s1 != 0) ? 8'((N - 1 - lg[s1] + 255) % 255) : 8'd0;
      par_in    = ^err;
      q.push_back(err);
      @(posedge clk); #1;
      if (i >= 1) begin
        err = q.pop_front();
        cnt = $countones(err);
        eb  = err; eb[N-1] = 1'b0;
        nb  = $countones(eb);
        l1 = -1; l2 = -1;
        for (int j = 0; j < N - 1; j++) if (eb[j]) begin if (l1 < 0) l1 = j + 1; else l2 = j + 1; end
        checks++;
        if (cnt == 3) begin
          if (!status.failure) failures++;
        end else if (status.failure || par_out !== ^err ||
                     (nb == 0 && !status.no_err) ||
                     (nb == 1 && (!status.one_err || int'(loc1) != l1)) ||
                     (nb == 2 && (!status.two_err ||
                        !((int'(loc1) == l1 && int'(loc2) == l2) || (int'(loc1) == l2 && int'(loc2) == l1))))) begin
          failures++;
          if (failures < 5) $display("pattern %0d (%0d errors): status %b loc %0d %0d exp %0d %0d",
                                      i-1, cnt, status, loc1, loc2, l1, l2);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
