// tb_masq_mask_manager - the mask manager on a mask memory. A random 64x64 main
// mask (rectangles) is placed in memory; the test runs a dilation (d2 = 2,
// d1 = 4), a semantic update with a random refinement mask and a downsampling
// of the main mask, and compares every row written back with references
// computed independently (Chebyshev distance, stage-0 promotion, 2x2 majority).
// Also checks the promotion count and that every command ends with done.
module tb_masq_mask_manager;
  localparam int T = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, m_en, m_we;
  logic [1:0] op;
  logic [12:0] src, dst, aux, m_addr;
  logic [$clog2(T):0] size;
  logic [5:0] d1, d2;
  logic [15:0] promoted;
  logic [2*T-1:0] m_wdata, m_rdata;
  int checks = 0, failures = 0;

  masq_mask_manager #(.T(T), .AW(13)) dut (.*);
  masq_buffer #(.WIDTH(2 * T), .DEPTH(1024)) u_mem (
    .clk, .a_en(1'b0), .a_we(1'b0), .a_addr('0), .a_word('0), .a_wdata('0), .a_rdata(),
    .b_en(m_en), .b_we(m_we), .b_addr(m_addr[9:0]), .b_wdata(m_wdata), .b_rdata(m_rdata));

  bit m [T][T];
  bit rf [T][T];
  int stg [T][T];

  task automatic cmd(logic [1:0] o, int s, int d, int x, int sz);
    int cyc;
    op = o; src = 13'(s); dst = 13'(d); aux = 13'(x); size = ($clog2(T)+1)'(sz); start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done && cyc < 5000) begin @(negedge clk); cyc++; end
    checks++;
    if (!done) begin failures++; $display("FAIL command %0d did not finish", o); end
    @(negedge clk);
  endtask

  initial begin
    int np;
    start = 0; op = 0; src = 0; dst = 0; aux = 0; size = 0; d1 = 6'd4; d2 = 6'd2;
    for (int r = 0; r < T; r++) for (int c = 0; c < T; c++) begin m[r][c] = 0; rf[r][c] = ($urandom % 5 == 0); end
    for (int k = 0; k < 3; k++) begin
      int r0, c0, h, w;
      r0 = $urandom % T; c0 = $urandom % T; h = 1 + $urandom % 12; w = 1 + $urandom % 12;
      for (int r = r0; r < r0 + h && r < T; r++) for (int c = c0; c < c0 + w && c < T; c++) m[r][c] = 1;
    end
    for (int r = 0; r < T; r++) begin
      logic [2*T-1:0] row, rrow;
      row = '0; rrow = '0;
      for (int c = 0; c < T; c++) begin row[c] = m[r][c]; rrow[c] = rf[r][c]; end
      u_mem.mem[r] = row;           // main mask at 0
      u_mem.mem[300 + r] = rrow;    // refinement mask at 300
    end
    for (int r = 0; r < T; r++) for (int c = 0; c < T; c++) begin
      int best;
      best = 1000;
      for (int rr = 0; rr < T; rr++) for (int cc = 0; cc < T; cc++) if (m[rr][cc]) begin
        int dr, dc, dd;
        dr = (rr > r) ? rr - r : r - rr; dc = (cc > c) ? cc - c : c - cc;
        dd = (dr > dc) ? dr : dc;
        if (dd < best) best = dd;
      end
      stg[r][c] = (best == 0) ? 3 : (best <= 2) ? 2 : (best <= 4) ? 1 : 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    cmd(2'd0, 0, 100, 0, T);                      // dilate: main mask -> stage mask at 100
    for (int r = 0; r < T; r++) for (int c = 0; c < T; c++) begin
      checks++;
      if (int'(u_mem.mem[100 + r][2*c +: 2]) != stg[r][c]) begin
        failures++;
        if (failures < 10) $display("FAIL dil r%0d c%0d got %0d exp %0d", r, c, u_mem.mem[100 + r][2*c +: 2], stg[r][c]);
      end
    end
    cmd(2'd1, 100, 200, 300, T);                  // update -> 200
    np = 0;
    for (int r = 0; r < T; r++) for (int c = 0; c < T; c++) begin
      int e;
      e = (stg[r][c] == 0 && rf[r][c]) ? 1 : stg[r][c];
      if (stg[r][c] == 0 && rf[r][c]) np++;
      checks++;
      if (int'(u_mem.mem[200 + r][2*c +: 2]) != e) begin
        failures++;
        if (failures < 10) $display("FAIL upd r%0d c%0d got %0d exp %0d", r, c, u_mem.mem[200 + r][2*c +: 2], e);
      end
    end
    checks++;
    if (int'(promoted) != np) begin failures++; $display("FAIL promoted %0d exp %0d", promoted, np); end
    cmd(2'd2, 0, 400, 0, T);                      // downsample main mask -> 400
    for (int r = 0; r < T / 2; r++) for (int c = 0; c < T / 2; c++) begin
      int e;
      e = (int'(m[2*r][2*c]) + int'(m[2*r][2*c+1]) + int'(m[2*r+1][2*c]) + int'(m[2*r+1][2*c+1])) >= 2;
      checks++;
      if (int'(u_mem.mem[400 + r][c]) != e) begin
        failures++;
        if (failures < 10) $display("FAIL ds r%0d c%0d got %0d exp %0d", r, c, u_mem.mem[400 + r][c], e);
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
