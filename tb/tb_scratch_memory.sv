// tb_scratch_memory -- loads the whole matrix over both lanes, then applies
// random row and column flip vectors and random further loads, checking every
// cycle the full matrix, and the old-row outputs of the lanes, against a
// software copy.
module tb_scratch_memory;
  import pd_pkg::N;
  localparam int RW = $clog2(N);
  logic clk = 0;
  always #5 clk = ~clk;
  logic ld_en1, ld_en2;
  logic [RW-1:0] ld_row1, ld_row2;
  logic [N-1:0] ld_data1, ld_data2, out_data1, out_data2;
  logic [N-1:0] row_flip [N];
  logic [N-1:0] col_flip [N];
  logic [N-1:0] rows [N];
  scratch_memory dut (.*);

  logic [N-1:0] model [N];
  int checks = 0, failures = 0;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [N-1:0] rnd();
    logic [N-1:0] v;
    for (int j = 0; j < N; j++) v[j] = 1'($urandom);
    return v;
  endfunction

  initial begin
    for (int r = 0; r < N; r++) begin row_flip[r] = '0; col_flip[r] = '0; end
    ld_en1 = 0; ld_en2 = 0; ld_row1 = '0; ld_row2 = '0;
    // load all rows, two per cycle
    for (int r = 0; r < N; r += 2) begin
      ld_en1 = 1; ld_row1 = RW'(r); ld_data1 = rnd(); model[r] = ld_data1;
      ld_en2 = (r + 1 < N); ld_row2 = RW'((r + 1) % N); ld_data2 = rnd();
      if (r + 1 < N) model[r+1] = ld_data2;
      @(posedge clk); #1;
    end
    ld_en1 = 0; ld_en2 = 0;
    for (int i = 0; i < 200; i++) begin
      logic [N-1:0] old1, old2;
      for (int r = 0; r < N; r++) begin row_flip[r] = '0; col_flip[r] = '0; end
      if (i % 2 == 0) begin
        for (int k = 0; k < 13; k++) row_flip[$urandom_range(N-1)] = rnd();
      end else begin
        for (int k = 0; k < 13; k++) col_flip[$urandom_range(N-1)] = rnd();
      end
      ld_en1 = (i % 5 == 0); ld_row1 = RW'($urandom_range(N-1)); ld_data1 = rnd();
      ld_en2 = (i % 7 == 0); do ld_row2 = RW'($urandom_range(N-1)); while (ld_row2 == ld_row1);
      ld_data2 = rnd();
      #1;
      old1 = model[ld_row1]; old2 = model[ld_row2];
      checks++;
      if (out_data1 !== old1 || out_data2 !== old2) failures++;
      for (int r = 0; r < N; r++) begin
        if (ld_en1 && ld_row1 == r) model[r] = ld_data1;
        else if (ld_en2 && ld_row2 == r) model[r] = ld_data2;
        else for (int c = 0; c < N; c++) model[r][c] ^= row_flip[r][c] ^ col_flip[c][r];
      end
      @(posedge clk); #1;
      for (int r = 0; r < N; r++) begin
        checks++;
        if (rows[r] !== model[r]) begin
          failures++;
          if (failures < 5) $display("cycle %0d row %0d mismatch", i, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
