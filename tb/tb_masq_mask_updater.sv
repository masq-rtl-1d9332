// tb_masq_mask_updater - random stage rows and refinement rows; expects flagged
// stage-0 tokens to become stage 1 and every other token to keep its stage,
// the promotion count to match, and the result one cycle after the input.
module tb_masq_mask_updater;
  localparam int T = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  logic [T-1:0][1:0] stage_row, out_row;
  logic [T-1:0] refine_row;
  logic [15:0] promoted;
  int checks = 0, failures = 0;

  masq_mask_updater #(.T(T)) dut (.*);

  initial begin
    in_valid = 0; stage_row = '0; refine_row = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      logic [T-1:0][1:0] e; int np;
      np = 0;
      for (int j = 0; j < T; j++) begin
        stage_row[j] = 2'($urandom); refine_row[j] = 1'($urandom);
        e[j] = (stage_row[j] == 0 && refine_row[j]) ? 2'b01 : stage_row[j];
        if (stage_row[j] == 0 && refine_row[j]) np++;
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks += 3;
      if (!out_valid) begin failures++; $display("FAIL no out_valid"); end
      if (out_row !== e) begin failures++; if (failures < 10) $display("FAIL row %h exp %h", out_row, e); end
      if (int'(promoted) != np) begin failures++; $display("FAIL promoted %0d exp %0d", promoted, np); end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
