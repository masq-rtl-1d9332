// tb_masq_top_ctrl - issues random command streams to the controller while
// models of the five engines answer each start pulse with a done pulse after a
// random delay. Checks: exactly one start pulse to the right engine per
// command, none while another command runs, the command held in cur, busy and
// cmd_ready, cmd_done once per command, SETT updating the timestep, downgrade
// points and mask width in one cycle, the reset values (9, 18, 64-token rows)
// and the command counter.
module tb_masq_top_ctrl;
  import masq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, busy, cmd_done;
  masq_cmd_t cmd, cur;
  logic dma_start, dma_done, mask_start, mask_done, gemm_start, gemm_done;
  logic quant_start, quant_done, vpu_start, vpu_done;
  logic [7:0] timestep, dg1, dg2;
  logic [2:0] mask_wlog;
  logic [31:0] n_cmds;
  int checks = 0, failures = 0;

  masq_top_ctrl dut (.*);

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s @%0t", msg, $time); end
  endtask

  // engine models: done after a random delay; count starts
  int n_start [5];
  logic [4:0] st;
  assign st = {vpu_start, quant_start, gemm_start, mask_start, dma_start};
  logic [4:0] done_v;
  assign {vpu_done, quant_done, gemm_done, mask_done, dma_done} = done_v;
  int delay [5];
  bit pend [5];
  always @(negedge clk) begin
    done_v = '0;
    for (int e = 0; e < 5; e++) begin
      if (pend[e]) begin
        if (delay[e] == 0) begin done_v[e] = 1; pend[e] = 0; end
        else delay[e]--;
      end
      if (st[e]) begin n_start[e]++; pend[e] = 1; delay[e] = $urandom_range(0, 20); end
    end
  end

  initial begin
    int expect_cmds = 0;
    cmd_valid = 0; cmd = '0;
    for (int e = 0; e < 5; e++) begin n_start[e] = 0; pend[e] = 0; end
    repeat (3) @(negedge clk);
    check(dg1 == 9 && dg2 == 18 && mask_wlog == 6 && timestep == 0, "reset values");
    rst_n = 1;
    repeat (600) begin
      masq_cmd_t c;
      int ops [5], prev_n [5], cyc;
      c = '0;
      c.opcode = cmd_op_e'($urandom_range(0, 6));
      c.a0 = 16'($urandom); c.ext = $urandom; c.n0 = 16'($urandom);
      for (int e = 0; e < 5; e++) prev_n[e] = n_start[e];
      @(negedge clk);
      check(cmd_ready && !busy, "ready when idle");
      cmd_valid = 1; cmd = c;
      @(negedge clk);
      cmd_valid = 0; cmd = '0;
      expect_cmds++;
      if (c.opcode == CMD_SETT || c.opcode == CMD_NOP) begin
        check(cmd_done && !busy, "immediate done");
        if (c.opcode == CMD_SETT)
          check(timestep == c.ext[7:0] && dg1 == c.ext[15:8] && dg2 == c.ext[23:16] && mask_wlog == c.a0[2:0], "SETT");
      end else begin
        check(busy && !cmd_ready && cur == c, "busy and cur");
        cyc = 0;
        while (!cmd_done && cyc < 100) begin
          @(negedge clk); cyc++;
          if (!cmd_done) check(busy, "busy while running");
        end
        check(cmd_done, "done arrives");
      end
      check(n_cmds == 32'(expect_cmds), "command counter");
      for (int e = 0; e < 5; e++) begin
        int want;
        want = (c.opcode == CMD_DMA && e == 0) || (c.opcode == CMD_MASK && e == 1) ||
                   (c.opcode == CMD_GEMM && e == 2) || (c.opcode == CMD_QUANT && e == 3) ||
                   (c.opcode == CMD_VPU && e == 4);
        check(n_start[e] - prev_n[e] == want, $sformatf("start count engine %0d op %0d: %0d", e, c.opcode, n_start[e] - prev_n[e]));
      end
      @(negedge clk);
      check(!cmd_done, "done is a pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin #2ms; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
