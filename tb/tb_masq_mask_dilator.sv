// tb_masq_mask_dilator - loads random main masks (a few random rectangles or
// scattered points) at tile sizes 64/32/16/8 with random stage distances, and
// compares every output stage code with a reference computed from the
// Chebyshev distance to the nearest main-mask token: 0 -> stage 3, <= d2 ->
// stage 2, <= d1 -> stage 1, otherwise stage 0. Also checks the cycle count
// size + max(d1,d2) + size from start to done.
module tb_masq_mask_dilator;
  localparam int T = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, in_valid, out_valid, busy, done;
  logic [$clog2(T):0] size;
  logic [5:0] d1, d2;
  logic [T-1:0] in_row;
  logic [T-1:0][1:0] out_row;
  int checks = 0, failures = 0;

  masq_mask_dilator #(.T(T)) dut (.*);

  bit m [T][T];
  int exp_stage [T][T];
  int out_r;

  always @(negedge clk) if (out_valid) begin
    for (int j = 0; j < T; j++) begin
      checks++;
      if (int'(out_row[j]) != exp_stage[out_r][j]) begin
        failures++;
        if (failures < 10) $display("FAIL r%0d c%0d got %0d exp %0d", out_r, j, out_row[j], exp_stage[out_r][j]);
      end
    end
    out_r++;
  end

  initial begin
    start = 0; in_valid = 0; in_row = '0; size = 0; d1 = 0; d2 = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 24; t++) begin
      int sz, dd1, dd2, cyc;
      sz = T >> (t % 4);
      dd2 = 1 + $urandom % 3; dd1 = (t % 5 == 0) ? dd2 : 2 * dd2;
      for (int r = 0; r < T; r++) for (int c = 0; c < T; c++) m[r][c] = 0;
      if (t % 3 == 2) begin
        for (int k = 0; k < 4; k++) m[$urandom % sz][$urandom % sz] = 1;
      end else begin
        for (int k = 0; k < 1 + t % 3; k++) begin
          int r0, c0, h, w;
          r0 = $urandom % sz; c0 = $urandom % sz; h = 1 + $urandom % (sz / 4 + 1); w = 1 + $urandom % (sz / 4 + 1);
          for (int r = r0; r < r0 + h && r < sz; r++) for (int c = c0; c < c0 + w && c < sz; c++) m[r][c] = 1;
        end
      end
      for (int r = 0; r < T; r++) for (int c = 0; c < T; c++) begin
        int best;
        best = 1000;
        if (r < sz && c < sz)
          for (int rr = 0; rr < sz; rr++) for (int cc = 0; cc < sz; cc++) if (m[rr][cc]) begin
            int dr, dc, d;
            dr = (rr > r) ? rr - r : r - rr; dc = (cc > c) ? cc - c : c - cc;
            d = (dr > dc) ? dr : dc;
            if (d < best) best = d;
          end
        exp_stage[r][c] = (best == 0) ? 3 : (best <= dd2) ? 2 : (best <= dd1) ? 1 : 0;
      end
      out_r = 0;
      size = ($clog2(T)+1)'(sz); d1 = 6'(dd1); d2 = 6'(dd2); start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      for (int r = 0; r < sz; r++) begin
        in_valid = 1;
        for (int c = 0; c < T; c++) in_row[c] = m[r][c];
        @(negedge clk); cyc++;
      end
      in_valid = 0;
      while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
      @(negedge clk);
      checks += 2;
      if (out_r != sz) begin failures++; $display("FAIL %0d rows out, expected %0d", out_r, sz); end
      if (cyc != 1 + sz + ((dd1 > dd2) ? dd1 : dd2) + sz) begin
        failures++;
        $display("FAIL took %0d cycles, expected %0d", cyc, 1 + sz + ((dd1 > dd2) ? dd1 : dd2) + sz);
      end
    end
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
