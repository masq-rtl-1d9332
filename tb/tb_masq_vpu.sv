// tb_masq_vpu - exercises every VPU operation against real-arithmetic models.
// ADD, MUL and FMA must match bit for bit (FP32 rounding, then BF16). SiLU and
// GELU must be within 1% (+1e-3 absolute). A group normalization over 6 token
// vectors with random stages must use only stage-2/3 tokens for the mean and
// variance and normalize all tokens (2% tolerance). A softmax over 64 keys with
// random key stages must give stage-0 keys exactly 0 and the others
// exp(s - max) / sum over non-stage-0 keys (2% tolerance). Also checks the
// one-cycle result latency and the LANES + 1 cycle reduction.
module tb_masq_vpu;
  import masq_pkg::*;
  import masq_tb_pkg::*;
  localparam int L = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, busy, out_valid;
  logic [3:0] op;
  logic [L-1:0][15:0] a, b, c, y;
  stage_t [L-1:0] stage;
  logic [31:0] stat_mean, stat_rstd, stat_max, stat_inv_sum;
  int checks = 0, failures = 0;

  masq_vpu #(.LANES(L)) dut (.*);

  task automatic issue(logic [3:0] o);
    op = o; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (o != 4'd11 && !out_valid) begin failures++; $display("FAIL op %0d: no out_valid after one cycle", o); end
  endtask

  task automatic reduce();
    int cyc;
    issue(4'd11);
    cyc = 1;
    while (busy && cyc < 100) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != L + 2) begin failures++; $display("FAIL reduce took %0d cycles", cyc); end
  endtask

  task automatic near(real got, real expv, real rel, string what);
    real d;
    d = got - expv; if (d < 0) d = -d;
    checks++;
    if (d > rel * (expv < 0 ? -expv : expv) + 1e-3) begin
      failures++;
      if (failures < 15) $display("FAIL %s got %f exp %f", what, got, expv);
    end
  endtask

  function automatic logic [15:0] rnd_bf16(int lo, int span);
    return {1'($urandom), 8'(lo + $urandom % span), 7'($urandom)};
  endfunction

  real x [6][L];
  int  st [6][L];
  real probs [2][L];

  initial begin
    in_valid = 0; op = 0; a = '0; b = '0; c = '0; stage = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // element-wise, exact
    for (int t = 0; t < 40; t++) begin
      for (int l = 0; l < L; l++) begin a[l] = rnd_bf16(120, 12); b[l] = rnd_bf16(120, 12); c[l] = rnd_bf16(120, 12); end
      for (int o = 0; o < 3; o++) begin
        issue(4'(o));
        for (int l = 0; l < L; l++) begin
          real ra, rb, rc, r; logic [15:0] e;
          ra = bf16_to_real(a[l]); rb = bf16_to_real(b[l]); rc = bf16_to_real(c[l]);
          if (o == 0) r = f32_to_real(real_to_f32(ra + rb));
          else if (o == 1) r = f32_to_real(real_to_f32(ra * rb));
          else r = f32_to_real(real_to_f32(f32_to_real(real_to_f32(ra * rb)) + rc));
          e = fp32_to_bf16(real_to_f32(r));
          checks++;
          if (y[l] !== e) begin failures++; if (failures < 15) $display("FAIL op%0d lane%0d got %h exp %h", o, l, y[l], e); end
        end
      end
    end
    // SiLU, GELU
    for (int t = 0; t < 20; t++) begin
      for (int l = 0; l < L; l++) a[l] = rnd_bf16(122, 9);
      issue(4'd3);
      for (int l = 0; l < L; l++) begin
        real v; v = bf16_to_real(a[l]);
        near(bf16_to_real(y[l]), v / (1.0 + $exp(-v)), 0.01, "silu");
      end
      issue(4'd4);
      for (int l = 0; l < L; l++) begin
        real v; v = bf16_to_real(a[l]);
        near(bf16_to_real(y[l]), v / (1.0 + $exp(-1.702 * v)), 0.01, "gelu");
      end
    end
    // group normalization with stage-aware statistics
    begin
      real s, q, n, mean, var_, rstd;
      s = 0; q = 0; n = 0;
      b = '0; c = '0;
      issue(4'd5);
      for (int v = 0; v < 6; v++) begin
        for (int l = 0; l < L; l++) begin
          a[l] = rnd_bf16(124, 5);
          if (v == 2) a[l] = {1'b0, 8'd134, 7'($urandom)};   // outliers, meant to sit in stage 0/1 tokens
          st[v][l] = (v == 2) ? $urandom % 2 : $urandom % 4;
          stage[l] = 2'(st[v][l]);
          x[v][l] = bf16_to_real(a[l]);
          if (st[v][l] >= 2) begin s += x[v][l]; q += x[v][l] * x[v][l]; n += 1; end
        end
        issue(4'd6);
      end
      reduce();
      mean = s / n; var_ = q / n - mean * mean; rstd = 1.0 / $sqrt(var_ + 1e-5);
      near(f32_to_real(stat_mean), mean, 0.005, "gn mean");
      near(f32_to_real(stat_rstd), rstd, 0.005, "gn rstd");
      for (int l = 0; l < L; l++) begin b[l] = 16'h3F80; c[l] = 16'h0000; end
      for (int v = 0; v < 6; v++) begin
        for (int l = 0; l < L; l++) begin a[l] = real_to_bf16(x[v][l]); stage[l] = 2'(st[v][l]); end
        issue(4'd7);
        for (int l = 0; l < L; l++) near(bf16_to_real(y[l]), (x[v][l] - mean) * rstd, 0.02, "gn norm");
      end
    end
    // softmax over 64 keys, stage-0 keys excluded
    begin
      real m, sum;
      issue(4'd5);
      m = -1e30; sum = 0;
      for (int v = 0; v < 2; v++) begin
        for (int l = 0; l < L; l++) begin
          a[l] = rnd_bf16(125, 4);
          st[v][l] = $urandom % 4;
          if (v == 0 && l == 3) begin a[l] = 16'h4200; st[v][l] = 0; end   // large score on a stage-0 key
          x[v][l] = bf16_to_real(a[l]);
          if (st[v][l] != 0 && x[v][l] > m) m = x[v][l];
        end
      end
      for (int v = 0; v < 2; v++) for (int l = 0; l < L; l++) if (st[v][l] != 0) sum += $exp(x[v][l] - m);
      for (int v = 0; v < 2; v++) begin
        for (int l = 0; l < L; l++) begin a[l] = real_to_bf16(x[v][l]); stage[l] = 2'(st[v][l]); end
        issue(4'd8);
      end
      reduce();
      near(f32_to_real(stat_max), m, 0.0, "sm max");
      for (int v = 0; v < 2; v++) begin
        for (int l = 0; l < L; l++) begin a[l] = real_to_bf16(x[v][l]); stage[l] = 2'(st[v][l]); end
        issue(4'd9);
        for (int l = 0; l < L; l++) probs[v][l] = bf16_to_real(y[l]);
      end
      reduce();
      for (int v = 0; v < 2; v++) begin
        for (int l = 0; l < L; l++) begin a[l] = real_to_bf16(probs[v][l]); stage[l] = 2'(st[v][l]); end
        issue(4'd10);
        for (int l = 0; l < L; l++) begin
          if (st[v][l] == 0) begin
            checks++;
            if (y[l] !== 16'h0000) begin failures++; $display("FAIL stage-0 key %0d prob %h", l, y[l]); end
          end else near(bf16_to_real(y[l]), $exp(x[v][l] - m) / sum, 0.02, "softmax");
        end
      end
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
