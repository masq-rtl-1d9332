// tb_masq_top_full - one complete layer step on the accelerator at its default
// size (32 MP-MPUs of 32 BMPEs, full buffers). A one-token main mask is
// dilated (d2 = 1, d1 = 2) so that tokens 0..3 of the first mask row get
// stages 3, 2, 1 and 0; four tokens of BF16 activations (one 32-channel block
// each) are quantized at their stage's precision, multiplied by a full
// 32-channel x 1024-output weight block on all MP-MPUs, and output bank 31 is
// stored back to external memory. Checks the stage codes, the block formats
// (MXINT8, MXINT8, MXINT4, MXINT2 before the first downgrade), all 4096
// results against a real-valued reference, the MP-MPU cycle count (4+4+2+1)
// and the stored words.
module tb_masq_top_full;
  import masq_pkg::*;
  import masq_tb_pkg::*;
  localparam int NUM_MPU = 32, NB = 32, NTOK = 4;
  localparam int WGT_WORDS = (NUM_MPU * NB * 264 + 255) / 256;   // 1056
  localparam int E_MASK = 0, E_VEC = 8, E_WGT = 16, E_OUT = 1100;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, busy, cmd_done;
  masq_cmd_t cmd;
  logic req_valid, req_ready, req_we, rsp_valid;
  logic [31:0] req_addr;
  logic [255:0] req_wdata, rsp_data;
  logic [2:0][31:0] blocks_by_prec;
  logic [31:0] mpu_busy_cycles, n_cmds, vpu_mean, vpu_rstd, vpu_max, vpu_inv_sum;
  logic [2:0] quant_prec_seen;
  logic [15:0] mask_promoted;

  masq_top dut (.*);
  masq_ext_mem #(.WORDS(1200), .LAT(3), .STALL_PCT(20)) u_ext (.*);

  int checks = 0, failures = 0;
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s @%0t", msg, $time); end
  endtask

  logic [15:0] vin [NTOK][32];
  logic [7:0]  wq  [NUM_MPU][NB][32];
  logic [7:0]  we  [NUM_MPU][NB];

  task automatic do_cmd(cmd_op_e op, logic [3:0] sub, logic [2:0] bsel, logic [4:0] bank,
                        int a0, int a1, int a2, int n0, int n1, logic [31:0] ext, output int cycles);
    masq_cmd_t c;
    c = '0;
    c.opcode = op; c.sub = sub; c.bufsel = bsel; c.bank = bank;
    c.a0 = 16'(a0); c.a1 = 16'(a1); c.a2 = 16'(a2); c.n0 = 16'(n0); c.n1 = 16'(n1); c.ext = ext;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd = c;
    @(negedge clk);
    cmd_valid = 0; cmd = '0;
    cycles = 1;
    while (!cmd_done && cycles < 100000) begin @(negedge clk); cycles++; end
    check(cmd_done, $sformatf("command %0d finishes", op));
  endtask

  function automatic int sext(logic [7:0] v, int bits);
    int x = int'(v) & ((1 << bits) - 1);
    if (x >= (1 << (bits - 1))) x -= (1 << bits);
    return x;
  endfunction

  function automatic logic [511:0] ob_entry(int m, int e);
    logic [511:0] r;
    r = '0;
    case (m)
      0: r = dut.g_ob[0].u_out.mem[e];   1: r = dut.g_ob[1].u_out.mem[e];   2: r = dut.g_ob[2].u_out.mem[e];
      3: r = dut.g_ob[3].u_out.mem[e];   4: r = dut.g_ob[4].u_out.mem[e];   5: r = dut.g_ob[5].u_out.mem[e];
      6: r = dut.g_ob[6].u_out.mem[e];   7: r = dut.g_ob[7].u_out.mem[e];   8: r = dut.g_ob[8].u_out.mem[e];
      9: r = dut.g_ob[9].u_out.mem[e];   10: r = dut.g_ob[10].u_out.mem[e]; 11: r = dut.g_ob[11].u_out.mem[e];
      12: r = dut.g_ob[12].u_out.mem[e]; 13: r = dut.g_ob[13].u_out.mem[e]; 14: r = dut.g_ob[14].u_out.mem[e];
      15: r = dut.g_ob[15].u_out.mem[e]; 16: r = dut.g_ob[16].u_out.mem[e]; 17: r = dut.g_ob[17].u_out.mem[e];
      18: r = dut.g_ob[18].u_out.mem[e]; 19: r = dut.g_ob[19].u_out.mem[e]; 20: r = dut.g_ob[20].u_out.mem[e];
      21: r = dut.g_ob[21].u_out.mem[e]; 22: r = dut.g_ob[22].u_out.mem[e]; 23: r = dut.g_ob[23].u_out.mem[e];
      24: r = dut.g_ob[24].u_out.mem[e]; 25: r = dut.g_ob[25].u_out.mem[e]; 26: r = dut.g_ob[26].u_out.mem[e];
      27: r = dut.g_ob[27].u_out.mem[e]; 28: r = dut.g_ob[28].u_out.mem[e]; 29: r = dut.g_ob[29].u_out.mem[e];
      30: r = dut.g_ob[30].u_out.mem[e]; default: r = dut.g_ob[31].u_out.mem[e];
    endcase
    return r;
  endfunction

  task automatic run_all();
    int cyc, busy0;
    int exp_stage [NTOK] = '{3, 2, 1, 0};
    int exp_bits  [NTOK] = '{8, 8, 4, 2};
    cmd_valid = 0; cmd = '0;
    for (int t = 0; t < NTOK; t++) for (int i = 0; i < 32; i++)
      vin[t][i] = real_to_bf16((real'($urandom_range(0, 2000)) - 1000.0) / 250.0);
    for (int m = 0; m < NUM_MPU; m++) for (int n = 0; n < NB; n++) begin
      we[m][n] = 8'($urandom_range(120, 127));
      for (int i = 0; i < 32; i++) wq[m][n][i] = 8'($urandom);
    end
    for (int w = 0; w < 1200; w++) u_ext.mem[w] = '0;
    u_ext.mem[E_MASK][0] = 1'b1;                       // main mask: token (0,0)
    for (int t = 0; t < NTOK; t++) for (int i = 0; i < 32; i++)
      u_ext.mem[E_VEC + 2 * t + i / 16][16 * (i % 16) +: 16] = vin[t][i];
    for (int m = 0; m < NUM_MPU; m++) for (int n = 0; n < NB; n++) begin
      int s = (m * NB + n) * 264;
      for (int i = 0; i < 32; i++) u_ext.mem[E_WGT + (s + 8 * i) / 256][(s + 8 * i) % 256 +: 8] = wq[m][n][i];
      u_ext.mem[E_WGT + (s + 256) / 256][(s + 256) % 256 +: 8] = we[m][n];
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    do_cmd(CMD_DMA, 0, 3'(BUF_MASK), 0, 0, 0, 0, 4, 0, E_MASK, cyc);
    do_cmd(CMD_DMA, 0, 3'(BUF_VEC), 0, 0, 0, 0, 2 * NTOK, 0, E_VEC, cyc);
    do_cmd(CMD_DMA, 0, 3'(BUF_WGT), 0, 0, 0, 0, WGT_WORDS, 0, E_WGT, cyc);
    do_cmd(CMD_MASK, 0, 0, 0, 0, 8, 0, 4, 1 | (2 << 6), 0, cyc);               // dilate rows 0..3 -> 8..11
    for (int t = 0; t < NTOK; t++)
      check(int'(dut.u_mask.mem[8][2 * t +: 2]) == exp_stage[t], $sformatf("stage of token %0d", t));
    do_cmd(CMD_SETT, 0, 0, 0, 6, 0, 0, 0, 0, {8'd0, 8'd18, 8'd9, 8'd0}, cyc);
    do_cmd(CMD_QUANT, 0, 3'd1, 0, 0, 0, 8, NTOK, 1, 0, cyc);
    for (int t = 0; t < NTOK; t++) begin
      mx_block_t blk;
      blk = mx_block_t'(dut.u_act.mem[t][$bits(mx_block_t)-1:0]);
      check(blk.typ == ((exp_bits[t] == 8) ? MXINT8 : (exp_bits[t] == 4) ? MXINT4 : MXINT2), $sformatf("format of token %0d", t));
    end
    busy0 = int'(mpu_busy_cycles);
    begin
      masq_cmd_t c;
      c = '0; c.opcode = CMD_GEMM; c.a0 = 0; c.a1 = 0; c.a2 = 8; c.a3 = 0; c.n0 = NTOK; c.n1 = 1;
      @(negedge clk); while (!cmd_ready) @(negedge clk);
      cmd_valid = 1; cmd = c; @(negedge clk); cmd_valid = 0; cmd = '0;
      cyc = 1;
      while (!cmd_done && cyc < 10000) begin @(negedge clk); cyc++; end
      check(cmd_done, "GEMM finishes");
    end
    check(int'(mpu_busy_cycles) - busy0 == 4 + 4 + 2 + 1, $sformatf("MP-MPU cycles %0d", int'(mpu_busy_cycles) - busy0));
    for (int t = 0; t < NTOK; t++) begin
      mx_block_t blk;
      blk = mx_block_t'(dut.u_act.mem[t][$bits(mx_block_t)-1:0]);
      for (int m = 0; m < NUM_MPU; m++) begin
        logic [511:0] ent = ob_entry(m, t);
        for (int n = 0; n < NB; n++) begin
          real acc = 0.0, mag = 0.0, got, d;
          for (int i = 0; i < 32; i++) begin
            real p = real'(sext(blk.x[i], exp_bits[t])) * real'($signed(wq[m][n][i]));
            acc += p; mag += (p < 0) ? -p : p;
          end
          acc = acc * pow2(int'(blk.exp) - 127) * pow2(int'(we[m][n]) - 127);
          mag = mag * pow2(int'(blk.exp) - 127) * pow2(int'(we[m][n]) - 127);
          got = bf16_to_real(ent[16 * n +: 16]);
          d = got - acc; if (d < 0) d = -d;
          check(d <= mag / 64.0 + 1e-30, $sformatf("result t%0d m%0d n%0d got %f exp %f", t, m, n, got, acc));
        end
      end
    end
    do_cmd(CMD_DMA, 1, 3'(BUF_OUT), 5'd31, 0, 0, 0, 2 * NTOK, 0, E_OUT, cyc);
    for (int e = 0; e < NTOK; e++) for (int w = 0; w < 2; w++)
      check(u_ext.mem[E_OUT + 2 * e + w] == dut.g_ob[31].u_out.mem[e][256 * w +: 256], "stored word");
    check(blocks_by_prec[0] == 1 && blocks_by_prec[1] == 1 && blocks_by_prec[2] == 2, "blocks per format");
  endtask

  initial begin
    run_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
