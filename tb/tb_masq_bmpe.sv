// tb_masq_bmpe - drives one BMPE with random MXINT8/4/2 activation blocks and
// MXINT8 weight blocks, K = 1..4 blocks per output, feeding the 2-bit slices MSB
// first as the MP-MPU would. The expected output is the exact integer dot product
// of each block, rounded to BF16 with both exponents applied, summed in FP32 and
// rounded to BF16. Also checks the cycle cost (4/2/1 slices per block) and the
// 3-cycle latency from the last slice to out_valid.
module tb_masq_bmpe;
  import masq_pkg::*;
  import masq_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, first_k, last_k, out_valid;
  prec_e typ;
  logic [1:0] cfg;
  logic [31:0][1:0] a;
  logic [31:0][7:0] w;
  logic [7:0] ea, ew;
  logic [15:0] out;
  int checks = 0, failures = 0, cycles = 0;

  masq_bmpe dut (.*);

  always @(posedge clk) cycles++;

  logic [15:0] exp_q[$];
  int          exp_t[$];
  int          last_slice_cycle;

  always @(negedge clk) if (out_valid) begin
    logic [15:0] e; int t;
    e = exp_q.pop_front();
    t = exp_t.pop_front();
    checks += 2;
    if (out !== e) begin
      failures++;
      if (failures < 10) $display("FAIL out %h exp %h", out, e);
    end
    if (cycles - t != 2) begin
      failures++;
      if (failures < 10) $display("FAIL latency %0d", cycles - t);
    end
  end

  initial begin
    in_valid = 0; first_k = 0; last_k = 0; cfg = 2'b11; typ = MXINT8; a = '0; w = '0; ea = 0; ew = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 300; t++) begin
      int kb; real facc; logic [31:0] f32;
      kb = 1 + $urandom % 4;
      typ = prec_e'($urandom % 3);
      facc = 0.0;
      for (int k = 0; k < kb; k++) begin
        logic [31:0][7:0] x, ww; int dot, ns, eb; logic [7:0] e_a, e_w;
        ns = num_slices(typ); eb = 2 * ns;
        dot = 0;
        for (int i = 0; i < 32; i++) begin
          int xv;
          xv = int'($urandom % (1 << eb)) - (1 << (eb - 1));
          x[i] = 8'(xv);
          ww[i] = 8'($urandom);
          dot += xv * int'($signed(ww[i]));
        end
        e_a = 8'(110 + $urandom % 30); e_w = 8'(110 + $urandom % 30);
        facc = f32_to_real(real_to_f32(facc + bf16_to_real(real_to_bf16(real'(dot) * pow2(int'(e_a) + int'(e_w) - 254)))));
        for (int s = ns - 1; s >= 0; s--) begin
          in_valid = 1; first_k = (k == 0); last_k = (k == kb - 1);
          cfg = 2'(s + 4 - ns); ea = e_a; ew = e_w; w = ww;
          for (int i = 0; i < 32; i++) a[i] = x[i][2*s +: 2];
          @(negedge clk);
          if (k == kb - 1 && s == 0) last_slice_cycle = cycles;
        end
      end
      f32 = real_to_f32(facc);
      exp_q.push_back(fp32_to_bf16(f32));
      exp_t.push_back(last_slice_cycle);
      in_valid = 0;
      if ($urandom % 3 == 0) @(negedge clk);
    end
    in_valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
