// tb_ebch_decoder -- self-checking testbench of the eBCH component decoder.
//
// Streams one word per cycle: valid eBCH(195,178) codewords from the
// reference encoder plus 0, 1, 2 or 3 random errors (extension bit included).
// The extended code has minimum distance 6, so up to 2 errors must be
// corrected exactly (flip == error pattern, no failure) and 3 errors must
// always be reported as a failure with an all-zero flip vector.  Words with
// pp_en set and 3 errors must return pp_mask instead.  Every result is
// checked exactly 6 cycles after its input, which checks the pipeline depth.
module tb_ebch_decoder;
  import pd_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [N-1:0] cw, pp_mask, flip;
  logic         pp_en, failure;
  ebch_status_t status;

  ebch_decoder dut (.clk, .cw, .pp_en, .pp_mask, .flip, .failure, .status);

  int checks = 0, failures = 0;
  localparam int NW = 2000;
  word_t exp_err [NW];
  int    exp_n   [NW];
  logic  exp_pp  [NW];
  word_t masks   [NW];
  int    cnt     [4];

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t c;
    cw = '0; pp_en = 0; pp_mask = '0;
    for (int i = 0; i < NW; i++) begin
      exp_n[i]   = i % 4;
      exp_err[i] = rand_err(exp_n[i]);
      exp_pp[i]  = (i % 8 == 7);
      masks[i]   = rand_err(3);
    end
    for (int i = 0; i < NW + NP; i++) begin
      if (i < NW) begin
        c  = encode(rand_info()) ^ exp_err[i];
        cw = c;
      end else cw = '0;
      // output of word i-NP is visible now; pp controls act on the output stage
      if (i >= NP) begin
        pp_en   = exp_pp[i-NP];
        pp_mask = masks[i-NP];
        #1;
        checks++;
        if (exp_n[i-NP] <= 2) begin
          if (failure || flip !== exp_err[i-NP]) begin
            failures++;
            if (failures < 10) $display("word %0d (%0d err): failure=%b flip mismatch", i-NP, exp_n[i-NP], failure);
          end
        end else begin
          if (!failure || flip !== (exp_pp[i-NP] ? masks[i-NP] : '0)) begin
            failures++;
            if (failures < 10) $display("word %0d (3 err): failure=%b not detected", i-NP, failure);
          end
        end
        cnt[exp_n[i-NP]]++;
      end
      @(posedge clk); #2;
    end
    $display("words with 0/1/2/3 errors: %0d %0d %0d %0d", cnt[0], cnt[1], cnt[2], cnt[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
