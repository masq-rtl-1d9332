// tb_masq_sam - exhaustive check of the sign-aware multiplier: every 2-bit
// activation slice, every 8-bit weight and every cfg value. The expected product
// treats the slice as signed only for cfg = 11 (the MSB slice).
module tb_masq_sam;
  logic [1:0] a, cfg;
  logic [7:0] w;
  logic signed [9:0] p;
  int checks = 0, failures = 0;

  masq_sam dut (.a(a), .w(w), .cfg(cfg), .p(p));

  initial begin
    for (int c = 0; c < 4; c++)
      for (int ai = 0; ai < 4; ai++)
        for (int wi = 0; wi < 256; wi++) begin
          int av, wv, exp_p;
          cfg = 2'(c); a = 2'(ai); w = 8'(wi);
          #1;
          av = (c == 3) ? int'($signed(a)) : ai;
          wv = int'($signed(w));
          exp_p = av * wv;
          checks++;
          if (int'(p) != exp_p) begin
            failures++;
            if (failures < 10) $display("FAIL a=%0d w=%0d cfg=%0d got %0d exp %0d", a, w, cfg, p, exp_p);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
