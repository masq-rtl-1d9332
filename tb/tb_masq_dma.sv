// tb_masq_dma - DMA with a behavioural external memory (random stalls) and a
// 3-word-per-entry buffer. Loads random words from external memory into the
// buffer, stores them back to another external region, and compares both the
// buffer contents and the copied region word by word, and that the memory's
// back-pressure was exercised.
module tb_masq_dma;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int WPE = 3;
  logic start, store, busy, done;
  logic [15:0] buf_addr;
  logic [31:0] ext_addr;
  logic [19:0] nwords;
  logic [10:0] wpe;
  logic m_en, m_we;
  logic [15:0] m_addr;
  logic [10:0] m_word;
  logic [255:0] m_wdata, m_rdata;
  logic req_valid, req_ready, req_we, rsp_valid;
  logic [31:0] req_addr;
  logic [255:0] req_wdata, rsp_data;
  logic [255:0] bdata;
  int checks = 0, failures = 0;

  masq_dma #(.AW(16), .WIW(11)) dut (.*);
  masq_ext_mem #(.WORDS(1024)) u_mem (.*);
  masq_buffer #(.WIDTH(3 * 256), .DEPTH(64)) u_buf (
    .clk, .a_en(m_en), .a_we(m_we), .a_addr(m_addr[5:0]), .a_word(m_word[1:0]), .a_wdata(m_wdata),
    .a_rdata(m_rdata), .b_en(1'b0), .b_we(1'b0), .b_addr(6'd0), .b_wdata('0), .b_rdata());

  task automatic run(logic st, int ba, int ea, int n);
    int cyc;
    store = st; buf_addr = 16'(ba); ext_addr = 32'(ea); nwords = 20'(n); wpe = 11'(WPE); start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done && cyc < 5000) begin @(negedge clk); cyc++; end
    checks++;
    if (!done) begin failures++; $display("FAIL transfer did not finish"); end
    @(negedge clk);
  endtask

  initial begin
    start = 0; store = 0; buf_addr = 0; ext_addr = 0; nwords = 0; wpe = 0;
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, 5, 100, 60);                  // 20 entries from ext word 100 into entries 5..24
    for (int e = 0; e < 20; e++)
      for (int w = 0; w < WPE; w++) begin
        checks++;
        if (u_buf.mem[5 + e][w*256 +: 256] !== u_mem.mem[100 + e * WPE + w]) begin
          failures++;
          if (failures < 10) $display("FAIL load entry %0d word %0d", e, w);
        end
      end
    run(1, 5, 500, 60);                  // store them to ext word 500
    for (int i = 0; i < 60; i++) begin
      checks++;
      if (u_mem.mem[500 + i] !== u_mem.mem[100 + i]) begin
        failures++;
        if (failures < 10) $display("FAIL store word %0d", i);
      end
    end
    checks++;
    if (u_mem.stalls == 0) begin failures++; $display("FAIL memory never stalled"); end
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
