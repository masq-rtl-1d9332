// tb_masq_buffer - random traffic on both ports of a small buffer whose entry
// is 2.5 words wide, against a reference array: word writes and reads on port A
// (the last, partial word included; its unused bits must read as zero), whole-entry writes and reads on port B,
// one-cycle read latency, and port B winning when both write one entry.
module tb_masq_buffer;
  localparam int WIDTH = 640, DEPTH = 64, WW = 256;
  localparam int NW = (WIDTH + WW - 1) / WW, AW = $clog2(DEPTH), WIW = $clog2(NW);
  logic clk = 0;
  always #5 clk = ~clk;

  logic a_en, a_we, b_en, b_we;
  logic [AW-1:0] a_addr, b_addr;
  logic [WIW-1:0] a_word;
  logic [WW-1:0] a_wdata, a_rdata;
  logic [WIDTH-1:0] b_wdata, b_rdata;
  logic [NW*WW-1:0] ref_mem [DEPTH];   // padded like the storage
  int checks = 0, failures = 0;

  masq_buffer #(.WIDTH(WIDTH), .DEPTH(DEPTH), .WW(WW)) dut (.*);

  function automatic logic [WIDTH-1:0] rnd_entry();
    logic [WIDTH-1:0] v;
    for (int i = 0; i < WIDTH; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  function automatic logic [WW-1:0] word_of(logic [NW*WW-1:0] e, int w);
    return e[w*WW +: WW];
  endfunction

  initial begin
    logic [WW-1:0]    exp_a;
    logic [WIDTH-1:0] exp_b;
    bit chk_a, chk_b;
    a_en = 0; a_we = 0; b_en = 0; b_we = 0; a_addr = 0; b_addr = 0; a_word = 0; a_wdata = 0; b_wdata = 0;
    // fill through port B
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      ref_mem[i] = '0;
      ref_mem[i][WIDTH-1:0] = rnd_entry();
      b_en = 1; b_we = 1; b_addr = AW'(i); b_wdata = ref_mem[i][WIDTH-1:0];
    end
    @(negedge clk); b_en = 0; b_we = 0;
    chk_a = 0; chk_b = 0;
    repeat (4000) begin
      @(negedge clk);
      if (chk_a) begin checks++; if (a_rdata !== exp_a) begin failures++; if (failures < 10) $display("FAIL A %h %h", a_rdata, exp_a); end end
      if (chk_b) begin checks++; if (b_rdata !== exp_b) begin failures++; if (failures < 10) $display("FAIL B"); end end
      chk_a = 0; chk_b = 0;
      a_en = $urandom_range(0, 1); a_we = $urandom_range(0, 1); a_addr = AW'($urandom_range(0, DEPTH-1));
      a_word = WIW'($urandom_range(0, NW-1)); a_wdata = {8{$urandom}};
      b_en = $urandom_range(0, 1); b_we = $urandom_range(0, 1); b_addr = AW'($urandom_range(0, DEPTH-1));
      if ($urandom_range(0, 3) == 0) b_addr = a_addr;
      b_wdata = rnd_entry();
      // reads see the contents before this edge's writes
      if (a_en && !a_we) begin chk_a = 1; exp_a = word_of(ref_mem[a_addr], a_word); end
      if (b_en && !b_we) begin chk_b = 1; exp_b = ref_mem[b_addr][WIDTH-1:0]; end
      if (a_en && a_we) begin ref_mem[a_addr][a_word*WW +: WW] = a_wdata; ref_mem[a_addr] &= {WIDTH{1'b1}}; end
      if (b_en && b_we) ref_mem[b_addr][WIDTH-1:0] = b_wdata;
    end
    @(negedge clk); a_en = 0; b_en = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); b_en = 1; b_we = 0; b_addr = AW'(i);
      @(negedge clk); b_en = 0; checks++;
      if (b_rdata !== ref_mem[i][WIDTH-1:0]) begin failures++; if (failures < 10) $display("FAIL final %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin #2ms; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
