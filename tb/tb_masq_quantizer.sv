// tb_masq_quantizer - random BF16 vectors (wide dynamic range, zeros, signs)
// quantized to MXINT8/4/2. The expected block is computed in real arithmetic:
// e = floor(log2 max|v|) + 127 - (n - 2), x = v / 2^(e-127) rounded half away
// from zero and clamped to the n-bit range. Also checks the one-cycle latency
// and, for MXINT8, that the reconstruction error is within half a step.
module tb_masq_quantizer;
  import masq_pkg::*;
  import masq_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  prec_e typ;
  logic [31:0][15:0] in;
  mx_block_t out;
  int checks = 0, failures = 0;

  masq_quantizer dut (.*);

  initial begin
    in_valid = 0; typ = MXINT8; in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      real v [32]; real mx, sc; int e, nb, lim_p, lim_n;
      typ = prec_e'(t % 3);
      nb = int'(elem_bits(typ));
      mx = 0.0;
      for (int i = 0; i < 32; i++) begin
        in[i] = {1'($urandom), 8'(120 + $urandom % 12), 7'($urandom)};
        if ($urandom % 8 == 0) in[i] = 16'h0000;
        v[i] = bf16_to_real(in[i]);
        if ((v[i] < 0 ? -v[i] : v[i]) > mx) mx = (v[i] < 0 ? -v[i] : v[i]);
      end
      e = 0;
      if (mx > 0.0) begin
        real m2; m2 = mx; e = 127;
        while (m2 >= 2.0) begin m2 = m2 / 2.0; e++; end
        while (m2 < 1.0)  begin m2 = m2 * 2.0; e--; end
        e = e - (nb - 2);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks += 3;
      if (!out_valid) begin failures++; $display("FAIL no out_valid"); end
      if (int'(out.exp) != e) begin failures++; if (failures < 10) $display("FAIL exp %0d exp %0d", out.exp, e); end
      if (out.typ != typ) begin failures++; $display("FAIL typ"); end
      sc = pow2(e - 127);
      lim_p = (1 << (nb - 1)) - 1; lim_n = -(1 << (nb - 1));
      for (int i = 0; i < 32; i++) begin
        real q; int x;
        q = v[i] / sc;
        x = (q >= 0.0) ? int'($floor(q + 0.5)) : -int'($floor(-q + 0.5));
        if (x > lim_p) x = lim_p;
        if (x < lim_n) x = lim_n;
        checks++;
        if (int'($signed(out.x[i])) != x) begin
          failures++;
          if (failures < 10) $display("FAIL t%0d i%0d v=%f got %0d exp %0d", t, i, v[i], $signed(out.x[i]), x);
        end
      end
      @(negedge clk);
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
