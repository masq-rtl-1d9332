// tb_masq_top - end-to-end run of the accelerator on a reduced configuration
// (2 MP-MPUs of 4 BMPEs, small buffers; mask rows, blocks and all datapaths at
// full width) against a behavioural external memory that randomly withholds
// request acceptance. Only commands and the external memory drive the chip.
//
// Flow: DMA loads of an 8x8-token binary mask, a refinement mask, 64 tokens x 2
// blocks of BF16 activations and the weights; mask dilation (d2 = 1, d1 = 2),
// semantic update and 2x2 downsampling; then at timesteps 0, 10 and 20 (on
// both sides of the downgrade points 9 and 18) quantization of the activations
// by stage and a GEMM; then group-norm statistics, a softmax maximum and SiLU
// on the VPU, and a DMA store of an output bank.
// Checks: every stage and downsampled mask entry against a distance reference,
// the precision of every quantized block against the stage/timestep table,
// every GEMM output against a real-valued dot product of the stored blocks
// (BF16 tolerance), the MP-MPU cycle count (4/2/1 cycles per block), the
// stage-restricted mean and maximum, SiLU values and the stored words.
// It also counts each mechanism - DMA load, store, memory back-pressure,
// dilation, promotion, downsampling, MXINT8/4/2 blocks, the two precision
// downgrades, group-norm exclusion and softmax key exclusion - and counts a
// failure for any that never occurred.
module tb_masq_top;
  import masq_pkg::*;
  import masq_tb_pkg::*;
  localparam int NUM_MPU = 2, NB = 4, T = 64, S = 8, NTOK = S * S, NKB = 2;
  localparam int WGT_WORDS = (NUM_MPU * NB * 264 + 255) / 256;
  localparam int E_MASK = 0, E_REF = 8, E_VEC = 16, E_WGT = 272, E_OUT = 1024;
  localparam int B_MBIN = 0, B_MREF = 16, B_MSTG = 32, B_MUPD = 48, B_MDS = 56;

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

  masq_top #(.NUM_MPU(NUM_MPU), .NB(NB), .T(T), .ACT_DEPTH(128), .WGT_DEPTH(2), .OUT_DEPTH(256),
             .VEC_DEPTH(256), .MASK_DEPTH(64)) dut (.*);
  masq_ext_mem #(.WORDS(2048), .LAT(3), .STALL_PCT(20)) u_ext (.*);

  int checks = 0, failures = 0;
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s @%0t", msg, $time); end
  endtask

  // ---------------- test data ----------------
  bit          mbin [S][S];
  bit          mref [S][S];
  int          stg  [S][T];          // expected stage after the update, full row width
  int          stg0 [S][S];          // after dilation only
  logic [15:0] vin  [NTOK][NKB][32]; // BF16 activations
  logic [7:0]  wq   [NKB][NUM_MPU][NB][32];
  logic [7:0]  we   [NKB][NUM_MPU][NB];
  int          r0, c0;

  function automatic int exp_prec_bits(int s, int ts);
    int ph = (ts >= 18) ? 2 : (ts >= 9) ? 1 : 0;
    case (s)
      3: return 8;
      2: return (ph == 0) ? 8 : 4;
      1: return (ph == 2) ? 2 : 4;
      default: return 2;
    endcase
  endfunction

  function automatic prec_e bits2prec(int b);
    return (b == 8) ? MXINT8 : (b == 4) ? MXINT4 : MXINT2;
  endfunction

  task automatic send(masq_cmd_t c, output int cycles);
    int cyc;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd = c;
    @(negedge clk);
    cmd_valid = 0; cmd = '0;
    cyc = 1;
    while (!cmd_done && cyc < 200000) begin @(negedge clk); cyc++; end
    check(cmd_done, $sformatf("command %0d finishes", c.opcode));
    cycles = cyc;
  endtask

  task automatic do_cmd(cmd_op_e op, logic [3:0] sub, logic [2:0] bsel, logic [4:0] bank,
                        int a0, int a1, int a2, int a3, int n0, int n1, logic [31:0] ext);
    masq_cmd_t c;
    int cyc;
    c = '0;
    c.opcode = op; c.sub = sub; c.bufsel = bsel; c.bank = bank;
    c.a0 = 16'(a0); c.a1 = 16'(a1); c.a2 = 16'(a2); c.a3 = 16'(a3); c.n0 = 16'(n0); c.n1 = 16'(n1); c.ext = ext;
    send(c, cyc);
  endtask

  function automatic int sext(logic [7:0] v, int bits);
    int x = int'(v) & ((1 << bits) - 1);
    if (x >= (1 << (bits - 1))) x -= (1 << bits);
    return x;
  endfunction

  function automatic logic [511:0] ob_entry(int m, int e);
    return (m == 0) ? dut.g_ob[0].u_out.mem[e] : dut.g_ob[1].u_out.mem[e];
  endfunction

  // mechanisms
  int m_prom, m_dil, m_ds, m_down1, m_down2, m_gn_excl, m_sm_excl, m_load, m_store;

  // all checks live in one automatic task so that declarations with
  // initialisers inside loops are re-evaluated on every iteration
  task automatic run_all();
    int n_mstage [4];
    int cyc, gemm_cyc, exp_slices;
    logic [31:0] busy0;
    logic [2:0][31:0] bp0;
    int prec_at [3][NTOK];
    cmd_valid = 0; cmd = '0;
    m_prom = 0; m_dil = 0; m_ds = 0; m_down1 = 0; m_down2 = 0; m_gn_excl = 0; m_sm_excl = 0; m_load = 0; m_store = 0;

    // ---- build the inputs ----
    r0 = $urandom_range(2, 4); c0 = $urandom_range(2, 4);
    for (int r = 0; r < S; r++) for (int c = 0; c < S; c++) begin
      mbin[r][c] = (r >= r0 && r < r0 + 2 && c >= c0 && c < c0 + 2);
      mref[r][c] = ($urandom_range(0, 2) == 0);
    end
    for (int r = 0; r < S; r++) for (int c = 0; c < T; c++) begin
      int best = 1000;
      if (c < S) for (int rr = 0; rr < S; rr++) for (int cc = 0; cc < S; cc++) if (mbin[rr][cc]) begin
        int dr = (rr > r) ? rr - r : r - rr, dc = (cc > c) ? cc - c : c - cc;
        if ((dr > dc ? dr : dc) < best) best = (dr > dc ? dr : dc);
      end
      stg[r][c] = (best == 0) ? 3 : (best <= 1) ? 2 : (best <= 2) ? 1 : 0;
      if (c < S) stg0[r][c] = stg[r][c];
      if (c < S && stg[r][c] == 0 && mref[r][c]) stg[r][c] = 1;
    end
    for (int i = 0; i < 4; i++) n_mstage[i] = 0;
    for (int t = 0; t < NTOK; t++) n_mstage[stg[t / S][t % S]]++;
    for (int t = 0; t < NTOK; t++) for (int k = 0; k < NKB; k++) for (int i = 0; i < 32; i++)
      vin[t][k][i] = real_to_bf16((real'($urandom_range(0, 2000)) - 1000.0) / 250.0);
    // a large value on a stage-0 key of the softmax row (lane 40 of row r0 is never masked)
    vin[0][1][8] = real_to_bf16(100.0);
    for (int k = 0; k < NKB; k++) for (int m = 0; m < NUM_MPU; m++) for (int n = 0; n < NB; n++) begin
      we[k][m][n] = 8'($urandom_range(120, 127));
      for (int i = 0; i < 32; i++) wq[k][m][n][i] = 8'($urandom);
    end
    // ---- external memory image ----
    for (int w = 0; w < 2048; w++) u_ext.mem[w] = '0;
    for (int r = 0; r < S; r++) for (int c = 0; c < S; c++) begin
      u_ext.mem[E_MASK + r][c] = mbin[r][c];
      u_ext.mem[E_REF + r][c]  = mref[r][c];
    end
    for (int t = 0; t < NTOK; t++) for (int k = 0; k < NKB; k++) for (int i = 0; i < 32; i++) begin
      int e = t * NKB + k;
      u_ext.mem[E_VEC + 2 * e + i / 16][16 * (i % 16) +: 16] = vin[t][k][i];
    end
    for (int k = 0; k < NKB; k++) begin
      logic [WGT_WORDS*256-1:0] ent = '0;
      for (int m = 0; m < NUM_MPU; m++) for (int n = 0; n < NB; n++) begin
        for (int i = 0; i < 32; i++) ent[(m * NB + n) * 264 + 8 * i +: 8] = wq[k][m][n][i];
        ent[(m * NB + n) * 264 + 256 +: 8] = we[k][m][n];
      end
      for (int w = 0; w < WGT_WORDS; w++) u_ext.mem[E_WGT + k * WGT_WORDS + w] = ent[256 * w +: 256];
    end

    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- loads ----
    do_cmd(CMD_DMA, 0, 3'(BUF_MASK), 0, B_MBIN, 0, 0, 0, S, 0, E_MASK);
    do_cmd(CMD_DMA, 0, 3'(BUF_MASK), 0, B_MREF, 0, 0, 0, S, 0, E_REF);
    do_cmd(CMD_DMA, 0, 3'(BUF_VEC),  0, 0, 0, 0, 0, 2 * NTOK * NKB, 0, E_VEC);
    do_cmd(CMD_DMA, 0, 3'(BUF_WGT),  0, 0, 0, 0, 0, NKB * WGT_WORDS, 0, E_WGT);
    for (int e = 0; e < NTOK * NKB; e++) for (int i = 0; i < 32; i++)
      check(dut.u_vec.mem[e][16 * i +: 16] == vin[e / NKB][e % NKB][i], $sformatf("vector load e%0d i%0d got %h exp %h", e, i, dut.u_vec.mem[e][16 * i +: 16], vin[e / NKB][e % NKB][i]));
    for (int r = 0; r < S; r++) check(dut.u_mask.mem[B_MREF + r][S-1:0] == u_ext.mem[E_REF + r][S-1:0], "mask load");
    m_load = 1;

    // ---- masks ----
    do_cmd(CMD_MASK, 0, 0, 0, B_MBIN, B_MSTG, 0, 0, S, 1 | (2 << 6), 0);        // dilate
    do_cmd(CMD_MASK, 1, 0, 0, B_MSTG, B_MUPD, B_MREF, 0, S, 0, 0);             // update
    do_cmd(CMD_MASK, 2, 0, 0, B_MBIN, B_MDS, 0, 0, S, 0, 0);                   // downsample
    for (int r = 0; r < S; r++) for (int c = 0; c < T; c++) begin
      int got1 = int'(dut.u_mask.mem[B_MUPD + r][2 * c +: 2]);
      check(got1 == stg[r][c], $sformatf("stage mask r%0d c%0d got %0d exp %0d", r, c, got1, stg[r][c]));
      if (c < S) begin
        check(int'(dut.u_mask.mem[B_MSTG + r][2 * c +: 2]) == stg0[r][c], "dilated mask");
        if (stg0[r][c] == 0 && stg[r][c] == 1) m_prom++;
      end
    end
    check(int'(mask_promoted) == m_prom, "promotion count");
    for (int r = 0; r < S / 2; r++) for (int c = 0; c < S / 2; c++) begin
      int e = (int'(mbin[2*r][2*c]) + int'(mbin[2*r][2*c+1]) + int'(mbin[2*r+1][2*c]) + int'(mbin[2*r+1][2*c+1])) >= 2;
      check(int'(dut.u_mask.mem[B_MDS + r][c]) == e, "downsampled mask");
      m_ds += e;
    end
    m_dil = n_mstage[2] > 0 && n_mstage[1] > 0 && n_mstage[3] > 0 && n_mstage[0] > 0;

    // ---- quantize + GEMM at three timesteps ----
    for (int p = 0; p < 3; p++) begin
      int ts = (p == 0) ? 0 : (p == 1) ? 10 : 20;
      do_cmd(CMD_SETT, 0, 0, 0, 3, 0, 0, 0, 0, 0, {8'd0, 8'd18, 8'd9, 8'(ts)});
      check(dut.timestep == 8'(ts), "SETT timestep");
      do_cmd(CMD_QUANT, 0, 3'd1, 0, 0, 0, B_MUPD, 0, NTOK, NKB, 0);
      exp_slices = 0;
      for (int t = 0; t < NTOK; t++) begin
        int pb = exp_prec_bits(stg[t / S][t % S], ts);
        prec_at[p][t] = pb;
        exp_slices += NKB * pb / 2;
        for (int k = 0; k < NKB; k++) begin
          mx_block_t blk;
          blk = mx_block_t'(dut.u_act.mem[t * NKB + k][$bits(mx_block_t)-1:0]);
          check(blk.typ == bits2prec(pb), $sformatf("quantized precision t%0d p%0d", t, p));
          // every element within one step of its source value
          for (int i = 0; i < 32; i++) begin
            real q = real'(sext(blk.x[i], pb)) * pow2(int'(blk.exp) - 127);
            real v = bf16_to_real(vin[t][k][i]);
            real d = q - v;
            if (d < 0) d = -d;
            check(d <= pow2(int'(blk.exp) - 127) * 1.01 || (pb == 2 && d <= 2.0 * pow2(int'(blk.exp) - 127) * 1.01),
                  $sformatf("quantized value t%0d k%0d i%0d", t, k, i));
          end
        end
      end
      busy0 = mpu_busy_cycles; bp0 = blocks_by_prec;
      @(negedge clk);
      while (!cmd_ready) @(negedge clk);
      cmd_valid = 1;
      cmd = '0; cmd.opcode = CMD_GEMM; cmd.a0 = 0; cmd.a1 = 16'(64 * p); cmd.a2 = B_MUPD; cmd.a3 = 0;
      cmd.n0 = NTOK; cmd.n1 = NKB;
      @(negedge clk); cmd_valid = 0; cmd = '0;
      gemm_cyc = 1;
      while (!cmd_done && gemm_cyc < 100000) begin @(negedge clk); gemm_cyc++; end
      check(cmd_done, "GEMM finishes");
      // one cycle per 2-bit slice: MXINT8 4, MXINT4 2, MXINT2 1 per block, no bubbles
      check(int'(mpu_busy_cycles - busy0) == exp_slices,
            $sformatf("MP-MPU cycles %0d exp %0d", mpu_busy_cycles - busy0, exp_slices));
      check(gemm_cyc <= exp_slices + 16, $sformatf("GEMM command cycles %0d for %0d slices", gemm_cyc, exp_slices));
      begin
        int nblk [3];
        nblk[0] = 0; nblk[1] = 0; nblk[2] = 0;
        for (int t = 0; t < NTOK; t++) nblk[(prec_at[p][t] == 8) ? 2 : (prec_at[p][t] == 4) ? 1 : 0] += NKB;
        for (int q = 0; q < 3; q++) check(int'(blocks_by_prec[q] - bp0[q]) == nblk[q], "blocks per precision");
      end
      // outputs against real-valued dot products of the stored blocks
      for (int t = 0; t < NTOK; t++) for (int m = 0; m < NUM_MPU; m++) for (int n = 0; n < NB; n++) begin
        real acc = 0.0, mag = 0.0, got, d;
        for (int k = 0; k < NKB; k++) begin
          mx_block_t blk;
          real bs = 0.0;
          blk = mx_block_t'(dut.u_act.mem[t * NKB + k][$bits(mx_block_t)-1:0]);
          for (int i = 0; i < 32; i++) bs += real'(sext(blk.x[i], prec_at[p][t])) * real'($signed(wq[k][m][n][i]));
          bs = bs * pow2(int'(blk.exp) - 127) * pow2(int'(we[k][m][n]) - 127);
          acc += bs; mag += (bs < 0) ? -bs : bs;
        end
        got = bf16_to_real(ob_entry(m, 64 * p + t)[16 * n +: 16]);
        d = got - acc; if (d < 0) d = -d;
        check(d <= mag / 64.0 + 1e-30, $sformatf("GEMM p%0d t%0d m%0d n%0d got %f exp %f", p, t, m, n, got, acc));
      end
    end
    // downgrades observed: a stage-2 token went 8 -> 4 bits, a stage-1 token 4 -> 2 bits
    for (int t = 0; t < NTOK; t++) begin
      if (prec_at[0][t] == 8 && prec_at[1][t] == 4) m_down1++;
      if (prec_at[1][t] == 4 && prec_at[2][t] == 2) m_down2++;
    end
    check(quant_prec_seen == 3'b111, "quantizer produced all three formats");

    // ---- VPU: group-norm statistics over stage 2-3 tokens of bank 0 (timestep-0 GEMM) ----
    begin
      real sum = 0.0, sq = 0.0, mean, var_, rstd;
      int cnt = 0;
      do_cmd(CMD_VPU, 4'd5, 0, 0, 0, 0, 0, 0, 1, 0, 0);                          // CLR
      do_cmd(CMD_VPU, 4'd6, 3'b000, 0, 0, 0, B_MUPD, 0, NTOK, 0, 0);              // GN_ACC, a from bank 0
      do_cmd(CMD_VPU, 4'd11, 0, 0, 0, 0, 0, 0, 1, 0, 0);                          // REDUCE
      for (int t = 0; t < NTOK; t++) begin
        if (stg[t / S][t % S] >= 2) begin
          for (int l = 0; l < 32; l++) begin
            real v = bf16_to_real(dut.g_ob[0].u_out.mem[t][16 * l +: 16]);
            sum += v; sq += v * v; cnt++;
          end
        end else m_gn_excl++;
      end
      mean = sum / cnt; var_ = sq / cnt - mean * mean; rstd = 1.0 / $sqrt(var_ + 1e-5);
      check(f32_to_real(vpu_mean) - mean < 1e-2 * (rstd > 0 ? 1.0 / rstd : 1.0) + 1e-3 &&
            mean - f32_to_real(vpu_mean) < 1e-2 * (rstd > 0 ? 1.0 / rstd : 1.0) + 1e-3,
            $sformatf("GN mean %f exp %f", f32_to_real(vpu_mean), mean));
      check(f32_to_real(vpu_rstd) / rstd < 1.02 && f32_to_real(vpu_rstd) / rstd > 0.98,
            $sformatf("GN rstd %f exp %f", f32_to_real(vpu_rstd), rstd));
    end

    // ---- VPU: softmax maximum over the keys of mask row r0, stage-0 keys excluded ----
    do_cmd(CMD_SETT, 0, 0, 0, 6, 0, 0, 0, 0, 0, {8'd0, 8'd18, 8'd9, 8'd20});
    begin
      real mx = -1e30, mx_all = -1e30;
      do_cmd(CMD_VPU, 4'd5, 0, 0, 0, 0, 0, 0, 1, 0, 0);                          // CLR
      do_cmd(CMD_VPU, 4'd8, 3'b101, 0, 0, 0, B_MUPD, 0, 2, 64 * r0, 0);      // SM_MAX, keys, a from vec 0..1
      do_cmd(CMD_VPU, 4'd11, 0, 0, 0, 0, 0, 0, 1, 0, 0);                          // REDUCE
      for (int key = 0; key < 64; key++) begin
        real v = bf16_to_real(dut.u_vec.mem[key / 32][16 * (key % 32) +: 16]);
        if (v > mx_all) mx_all = v;
        if (stg[r0][key] != 0) begin if (v > mx) mx = v; end
        else m_sm_excl++;
      end
      check(f32_to_real(vpu_max) == mx, $sformatf("softmax max %f exp %f", f32_to_real(vpu_max), mx));
      if (mx_all == mx) m_sm_excl = 0;   // exclusion made no visible difference
    end

    // ---- VPU: SiLU on four vectors, vector buffer -> vector buffer ----
    do_cmd(CMD_VPU, 4'd3, 3'b001, 0, 0, 200, 0, 0, 4, 0, 0);
    for (int e = 0; e < 4; e++) for (int l = 0; l < 32; l++) begin
      real x = bf16_to_real(dut.u_vec.mem[e][16 * l +: 16]);
      real r = x / (1.0 + $exp(-x));
      real g = bf16_to_real(dut.u_vec.mem[200 + e][16 * l +: 16]);
      real d = g - r; if (d < 0) d = -d;
      check(d <= 0.02 * ((r < 0) ? -r : r) + 1e-3, $sformatf("SiLU %f got %f exp %f", x, g, r));
    end

    // ---- store output bank 1 ----
    do_cmd(CMD_DMA, 1, 3'(BUF_OUT), 5'd1, 0, 0, 0, 0, 2 * NTOK, 0, E_OUT);
    for (int e = 0; e < NTOK; e++) for (int w = 0; w < 2; w++)
      check(u_ext.mem[E_OUT + 2 * e + w] == dut.g_ob[1].u_out.mem[e][256 * w +: 256], "stored word");
    m_store = 1;
    check(int'(n_cmds) == 25, $sformatf("command count %0d", n_cmds));

    // ---- mechanisms ----
    $display("mechanisms: load=%0d store=%0d stalls=%0d dilation=%0d promotions=%0d downsampled=%0d", m_load, m_store,
             u_ext.stalls, m_dil, m_prom, m_ds);
    $display("            blocks int2=%0d int4=%0d int8=%0d downgrade1=%0d downgrade2=%0d gn_excluded=%0d sm_excluded=%0d",
             blocks_by_prec[0], blocks_by_prec[1], blocks_by_prec[2], m_down1, m_down2, m_gn_excl, m_sm_excl);
    check(m_load > 0, "mechanism: DMA load");
    check(m_store > 0, "mechanism: DMA store");
    check(u_ext.stalls > 0, "mechanism: memory back-pressure");
    check(m_dil > 0, "mechanism: dilation into four stages");
    check(m_prom > 0, "mechanism: semantic promotion");
    check(m_ds > 0, "mechanism: downsampling");
    check(blocks_by_prec[0] > 0, "mechanism: MXINT2 blocks");
    check(blocks_by_prec[1] > 0, "mechanism: MXINT4 blocks");
    check(blocks_by_prec[2] > 0, "mechanism: MXINT8 blocks");
    check(m_down1 > 0, "mechanism: first precision downgrade");
    check(m_down2 > 0, "mechanism: second precision downgrade");
    check(m_gn_excl > 0, "mechanism: group-norm token exclusion");
    check(m_sm_excl > 0, "mechanism: softmax key exclusion");
  endtask

  initial begin
    run_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
