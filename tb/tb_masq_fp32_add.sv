// tb_masq_fp32_add - random FP32 additions (same and opposite signs, exponent
// gaps from 0 to 30, cancellation) compared with the real sum rounded to FP32.
module tb_masq_fp32_add;
  import masq_tb_pkg::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  masq_fp32_add dut (.a(a), .b(b), .y(y));

  task automatic check_one(logic [31:0] ai, logic [31:0] bi);
    logic [31:0] e;
    a = ai; b = bi;
    #1;
    e = real_to_f32(f32_to_real(ai) + f32_to_real(bi));
    checks++;
    if (y !== e) begin
      failures++;
      if (failures < 10) $display("FAIL %h + %h got %h exp %h", ai, bi, y, e);
    end
  endtask

  initial begin
    check_one(32'h3F80_0000, 32'h3F80_0000);   // 1 + 1
    check_one(32'h3F80_0000, 32'hBF80_0000);   // 1 - 1
    check_one(32'h3F80_0001, 32'hBF80_0000);   // cancellation
    check_one(32'h4B80_0000, 32'h3F80_0000);   // 2^24 + 1, tie to even
    check_one(32'h4B80_0000, 32'h3FC0_0000);   // 2^24 + 1.5
    check_one(32'h0000_0000, 32'hC040_0000);
    for (int i = 0; i < 5000; i++) begin
      logic [31:0] x, z;
      x = {1'($urandom), 8'(100 + $urandom % 50), 23'($urandom)};
      z = {1'($urandom), 8'(int'(x[30:23]) - 15 + int'($urandom % 31)), 23'($urandom)};
      if (i % 7 == 0) z = {~x[31], x[30:23], x[22:0] ^ 23'($urandom % 16)};
      check_one(x, z);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
