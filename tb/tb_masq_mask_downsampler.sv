// tb_masq_mask_downsampler - feeds random 64x64 binary masks of varying density
// row by row and checks each 32-bit output row against a 2x2 stride-2 count of
// ones (set when the count is two or more), plus the number of output rows.
module tb_masq_mask_downsampler;
  localparam int T = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, in_valid, out_valid;
  logic [T-1:0] in_row;
  logic [T/2-1:0] out_row;
  int checks = 0, failures = 0, nout = 0;

  masq_mask_downsampler #(.T(T)) dut (.*);

  logic [T-1:0] rows [T];
  logic [T/2-1:0] exp_rows [T/2];

  always @(negedge clk) if (out_valid) begin
    checks++;
    if (out_row !== exp_rows[nout]) begin
      failures++;
      if (failures < 10) $display("FAIL row %0d got %h exp %h", nout, out_row, exp_rows[nout]);
    end
    nout++;
  end

  initial begin
    clear = 0; in_valid = 0; in_row = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      clear = 1; @(negedge clk); clear = 0;
      for (int r = 0; r < T; r++)
        for (int c = 0; c < T; c++) rows[r][c] = (($urandom % 8) < (t % 8));
      for (int r = 0; r < T / 2; r++)
        for (int c = 0; c < T / 2; c++)
          exp_rows[r][c] = (int'(rows[2*r][2*c]) + int'(rows[2*r][2*c+1]) + int'(rows[2*r+1][2*c]) + int'(rows[2*r+1][2*c+1])) >= 2;
      nout = 0;
      for (int r = 0; r < T; r++) begin
        in_valid = 1; in_row = rows[r];
        @(negedge clk);
        if ($urandom % 4 == 0) begin in_valid = 0; @(negedge clk); end
      end
      in_valid = 0;
      @(negedge clk);
      checks++;
      if (nout != T / 2) begin failures++; $display("FAIL %0d rows out", nout); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
