// tb_ebch_bitflip_pp -- random status, locations, parity and post-processing
// controls; checks the flip vector against the masking rules and Algorithm 1's
// extension-parity correction.
module tb_ebch_bitflip_pp;
  import pd_pkg::*;
  ebch_status_t status;
  logic [7:0] loc1, loc2;
  logic par, pp_en;
  logic [N-1:0] pp_mask, flip, e;
  ebch_bitflip_pp dut (.status, .loc1, .loc2, .par, .pp_en, .pp_mask, .flip);

  int checks = 0, failures = 0;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int s;
    for (int i = 0; i < 2000; i++) begin
      s = $urandom_range(3);
      status = '{no_err: s == 0, one_err: s == 1, two_err: s == 2, failure: s == 3};
      loc1 = 8'($urandom_range(1, N - 1));
      do loc2 = 8'($urandom_range(1, N - 1)); while (loc2 == loc1);
      par = 1'($urandom); pp_en = 1'($urandom);
      for (int j = 0; j < N; j++) pp_mask[j] = ($urandom_range(63) == 0);
      e = '0;
      if (s == 3) e = pp_en ? pp_mask : '0;
      else begin
        if (s >= 1) e[loc1 - 1] = 1'b1;
        if (s == 2) e[loc2 - 1] = 1'b1;
        if ((s == 0 && par) || (s == 1 && !par)) e[N-1] = 1'b1;
      end
      #1;
      checks++;
      if (flip !== e) begin
        failures++;
        if (failures < 5) $display("case %0d status %0d: flip mismatch", i, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
