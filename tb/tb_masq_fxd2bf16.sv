// tb_masq_fxd2bf16 - random signed fixed-point values and exponent pairs are
// converted and compared with v * 2^(ea+ew-254) rounded to BF16 in real
// arithmetic; includes zero, extremes of the 24-bit range and rounding ties.
module tb_masq_fxd2bf16;
  import masq_tb_pkg::*;
  logic signed [23:0] v;
  logic [7:0] ea, ew;
  logic [15:0] bf;
  int checks = 0, failures = 0;

  masq_fxd2bf16 #(.W(24)) dut (.v(v), .ea(ea), .ew(ew), .bf(bf));

  task automatic check_one(int vi, int eai, int ewi);
    real x; logic [15:0] e;
    v = 24'(vi); ea = 8'(eai); ew = 8'(ewi);
    #1;
    x = real'(vi) * pow2(eai + ewi - 254);
    e = real_to_bf16(x);
    checks++;
    if (bf !== e) begin
      failures++;
      if (failures < 10) $display("FAIL v=%0d ea=%0d ew=%0d got %h exp %h", vi, eai, ewi, bf, e);
    end
  endtask

  initial begin
    check_one(0, 127, 127);
    check_one(1, 127, 127);
    check_one(-1, 127, 127);
    check_one(8388607, 120, 130);
    check_one(-8388608, 120, 130);
    check_one(257, 127, 127);     // tie, round to even (down)
    check_one(259, 127, 127);     // tie, round up
    check_one(511, 127, 127);     // rounds up across a binade
    for (int i = 0; i < 4000; i++)
      check_one(int'($signed(24'($urandom))) >>> ($urandom % 20), 100 + $urandom % 50, 100 + $urandom % 50);
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
