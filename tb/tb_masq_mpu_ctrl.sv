// tb_masq_mpu_ctrl - walks all 4 stages at timesteps on both sides of both
// downgrade points (9 and 18, then random points) and offers back-to-back and
// gapped blocks. Checks the precision type against the timestep-aware table
// (8/8/4/2, 8/4/4/2, 8/4/2/2 for stages 3..0), the slice sequence 11,10,01,00
// cut at the format's length, and that a block costs exactly 4/2/1 cycles.
module tb_masq_mpu_ctrl;
  import masq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0] timestep, dg1, dg2;
  logic blk_valid, blk_ready, pe_valid;
  stage_t stage;
  prec_e typ;
  logic [1:0] cfg;
  int checks = 0, failures = 0;

  masq_mpu_ctrl dut (.*);

  function automatic prec_e ref_prec(int s, int ts, int p1, int p2);
    int ph = (ts >= p2) ? 2 : (ts >= p1) ? 1 : 0;
    int bits;
    case (s)
      3: bits = 8;
      2: bits = (ph == 0) ? 8 : 4;
      1: bits = (ph == 2) ? 2 : 4;
      default: bits = 2;
    endcase
    return (bits == 8) ? MXINT8 : (bits == 4) ? MXINT4 : MXINT2;
  endfunction

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic run_block(int s, int ts);
    prec_e exp_t = ref_prec(s, ts, dg1, dg2);
    int n = (exp_t == MXINT8) ? 4 : (exp_t == MXINT4) ? 2 : 1;
    int cyc = 0;
    stage = stage_t'(s); timestep = 8'(ts); blk_valid = 1;
    do begin
      #1;
      check(pe_valid, "pe_valid");
      check(typ == exp_t, $sformatf("typ s=%0d ts=%0d got %0d exp %0d", s, ts, typ, exp_t));
      check(cfg == 2'(3 - cyc), $sformatf("cfg cyc=%0d got %0d", cyc, cfg));
      cyc++;
      if (blk_ready) break;
      @(negedge clk);
    end while (cyc < 8);
    check(cyc == n, $sformatf("cycles s=%0d ts=%0d got %0d exp %0d", s, ts, cyc, n));
    @(negedge clk);
    if ($urandom_range(0, 3) == 0) begin
      blk_valid = 0; #1; check(!pe_valid && !blk_ready, "idle");
      @(negedge clk);
    end
  endtask

  initial begin
    blk_valid = 0; stage = '0; timestep = '0; dg1 = 9; dg2 = 18;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int ts = 0; ts < 50; ts++)
      for (int s = 0; s < 4; s++) run_block(s, ts);
    repeat (300) begin
      dg1 = 8'($urandom_range(0, 40)); dg2 = dg1 + 8'($urandom_range(0, 40));
      run_block($urandom_range(0, 3), $urandom_range(0, 99));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin #2ms; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
