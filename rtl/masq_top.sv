// masq_top - MASQ masked-diffusion accelerator.
//
// The chip computes U-Net layers of a masked diffusion model with activations in
// block formats MXINT8/4/2 chosen per token from a 4-stage mask. Its parts:
//   * NUM_MPU mask-aware multi-precision matrix units (MP-MPUs), each of NB
//     block-wise multi-precision PEs. All MP-MPUs take the same activation block
//     (one token, 32 input channels) and each its own weights, so one pass
//     yields NUM_MPU*NB output channels of one token; a block costs 4/2/1 cycles
//     at MXINT8/4/2.
//   * the mask manager (dilator, updater, downsampler) that builds the stage
//     masks from the user's mask and refines them;
//   * the quantizer, which turns BF16 results into MX blocks for the next layer;
//   * the vector unit (VPU) for element-wise ops, group normalization, softmax,
//     SiLU and GELU, with statistics restricted by stage;
//   * five on-chip buffers (activation, weight, output, vector, mask), a DMA to
//     external memory and the top controller that executes host commands.
// Commands (masq_pkg::masq_cmd_t) enter over cmd_valid/cmd_ready and run one at
// a time; cmd_done pulses at the end of each. The external memory port carries
// 256-bit words with a valid/ready request and in-order read responses.
//
// From the paper: the unit structure and counts (32 MP-MPUs of 32 BMPEs,
// 32-element blocks, 2-bit slices), the stage encoding and precision table, the
// mask operations, the quantizer and VPU functions and the 2 MiB of on-chip
// memory. This design's own: the split of that memory among the buffers and
// their entry layouts, the command set, the way MP-MPUs share work (same token,
// different output channels), the DMA and all handshakes.
//
// Buffer layouts (entries): activation = one mx_block_t (266 bits, 2 words);
// weight = for MP-MPU m and BMPE n, at bit (m*NB+n)*264, 32 weight bytes then
// the 8-bit exponent; output bank m = the NB BF16 results of MP-MPU m for one
// token (32 lanes; lanes NB..31 zero when NB < 32); vector = 32 BF16 values; mask = one row of T tokens (binary: T bits,
// stage: T 2-bit codes).
module masq_top
  import masq_pkg::*;
#(
  parameter int unsigned NUM_MPU    = 32,
  parameter int unsigned NB         = 32,
  parameter int unsigned T          = 64,
  parameter int unsigned ACT_DEPTH  = 8192,   // 512 KiB at 64 B per entry
  parameter int unsigned WGT_DEPTH  = 31,     // ~1 MiB at 33 KiB per entry
  parameter int unsigned OUT_DEPTH  = 128,    // 256 KiB over 32 banks of 64 B entries
  parameter int unsigned VEC_DEPTH  = 2048,   // 128 KiB
  parameter int unsigned MASK_DEPTH = 4096    // 128 KiB: rows of 64 stage codes, one 32 B word each
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host commands
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  masq_cmd_t            cmd,
  output logic                 busy,
  output logic                 cmd_done,
  // external memory
  output logic                 req_valid,
  input  logic                 req_ready,
  output logic                 req_we,
  output logic [31:0]          req_addr,
  output logic [255:0]         req_wdata,
  input  logic                 rsp_valid,
  input  logic [255:0]         rsp_data,
  // activity counters
  output logic [2:0][31:0]     blocks_by_prec,   // MP-MPU blocks run at MXINT2/4/8
  output logic [31:0]          mpu_busy_cycles,
  output logic [2:0]           quant_prec_seen,
  output logic [15:0]          mask_promoted,
  output logic [31:0]          n_cmds,
  output logic [31:0]          vpu_mean,
  output logic [31:0]          vpu_rstd,
  output logic [31:0]          vpu_max,
  output logic [31:0]          vpu_inv_sum
);
  localparam int unsigned WW      = 256;
  localparam int unsigned ACT_W   = $bits(mx_block_t);
  localparam int unsigned WSLOT   = BLK * 8 + 8;
  localparam int unsigned WGT_W   = NUM_MPU * NB * WSLOT;
  localparam int unsigned VEC_W   = BLK * 16;
  localparam int unsigned OUT_W   = BLK * 16;   // NB <= BLK results, zero-padded
  localparam int unsigned MASK_W  = 2 * T;
  localparam int unsigned A_AW    = $clog2(ACT_DEPTH);
  localparam int unsigned W_AW    = (WGT_DEPTH > 1) ? $clog2(WGT_DEPTH) : 1;
  localparam int unsigned O_AW    = $clog2(OUT_DEPTH);
  localparam int unsigned V_AW    = $clog2(VEC_DEPTH);
  localparam int unsigned M_AW    = $clog2(MASK_DEPTH);
  localparam int unsigned WIW     = 11;

  // ---------------- top controller ----------------
  masq_cmd_t  cur;
  logic       dma_start, dma_done, mask_start, mask_done, gemm_start, gemm_done;
  logic       quant_start, quant_done, vpu_start, vpu_done;
  logic [7:0] timestep, dg1, dg2;
  logic [2:0] mask_wlog;

  masq_top_ctrl u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .cur, .busy, .cmd_done,
    .dma_start, .dma_done, .mask_start, .mask_done, .gemm_start, .gemm_done,
    .quant_start, .quant_done, .vpu_start, .vpu_done,
    .timestep, .dg1, .dg2, .mask_wlog, .n_cmds
  );

  // ---------------- DMA ----------------
  logic            d_en, d_we;
  logic [15:0]     d_addr;
  logic [WIW-1:0]  d_word;
  logic [WW-1:0]   d_wdata, d_rdata;
  logic [WIW-1:0]  wpe;
  buf_e            dsel;

  assign dsel = buf_e'(cur.bufsel);
  always_comb begin
    unique case (dsel)
      BUF_ACT:  wpe = WIW'((ACT_W + WW - 1) / WW);
      BUF_WGT:  wpe = WIW'((WGT_W + WW - 1) / WW);
      BUF_OUT:  wpe = WIW'((OUT_W + WW - 1) / WW);
      BUF_VEC:  wpe = WIW'((VEC_W + WW - 1) / WW);
      default:  wpe = WIW'((MASK_W + WW - 1) / WW);
    endcase
  end

  masq_dma #(.WW(WW), .AW(16), .WIW(WIW)) u_dma (
    .clk, .rst_n, .start(dma_start), .store(cur.sub[0]), .buf_addr(cur.a0),
    .ext_addr(cur.ext), .nwords({4'd0, cur.n0}), .wpe, .busy(), .done(dma_done),
    .m_en(d_en), .m_we(d_we), .m_addr(d_addr), .m_word(d_word), .m_wdata(d_wdata), .m_rdata(d_rdata),
    .req_valid, .req_ready, .req_we, .req_addr, .req_wdata, .rsp_valid, .rsp_data
  );

  // ---------------- buffers ----------------
  // activation
  logic                 act_en_b, act_we_b;
  logic [15:0]          act_addr_b;
  mx_block_t            act_wdata_b, act_rdata;
  logic [WW-1:0]        act_ra;
  // weights
  logic                 wgt_en_b;
  logic [15:0]          wgt_addr_b;
  logic [WGT_W-1:0]     wgt_rdata;
  logic [WW-1:0]        wgt_ra;
  // output banks
  logic [NUM_MPU-1:0]   ob_en_b;
  logic                 ob_we_b;
  logic [15:0]          ob_addr_b;
  logic [NUM_MPU-1:0][OUT_W-1:0] ob_wdata_b, ob_rdata;
  logic [NUM_MPU-1:0][WW-1:0]    ob_ra;
  // vector
  logic                 vec_en_b, vec_we_b;
  logic [15:0]          vec_addr_b;
  logic [VEC_W-1:0]     vec_wdata_b, vec_rdata;
  logic [WW-1:0]        vec_ra;
  // mask
  logic                 mask_en_b, mask_we_b;
  logic [15:0]          mask_addr_b;
  logic [MASK_W-1:0]    mask_wdata_b, mask_rdata;
  logic [WW-1:0]        mask_ra;

  logic dma_act, dma_wgt, dma_vec, dma_mask;
  logic [NUM_MPU-1:0] dma_ob;
  always_comb begin
    dma_act  = d_en && dsel == BUF_ACT;
    dma_wgt  = d_en && dsel == BUF_WGT;
    dma_vec  = d_en && dsel == BUF_VEC;
    dma_mask = d_en && dsel == BUF_MASK;
    dma_ob   = '0;
    if (d_en && dsel == BUF_OUT) dma_ob[cur.bank[$clog2(NUM_MPU)-1:0]] = 1'b1;
    unique case (dsel)
      BUF_ACT:  d_rdata = act_ra;
      BUF_WGT:  d_rdata = wgt_ra;
      BUF_OUT:  d_rdata = ob_ra[cur.bank[$clog2(NUM_MPU)-1:0]];
      BUF_VEC:  d_rdata = vec_ra;
      default:  d_rdata = mask_ra;
    endcase
  end

  masq_buffer #(.WIDTH(ACT_W), .DEPTH(ACT_DEPTH), .WW(WW)) u_act (
    .clk, .a_en(dma_act), .a_we(d_we), .a_addr(d_addr[A_AW-1:0]), .a_word(d_word[0:0]),
    .a_wdata(d_wdata), .a_rdata(act_ra),
    .b_en(act_en_b), .b_we(act_we_b), .b_addr(act_addr_b[A_AW-1:0]), .b_wdata(act_wdata_b), .b_rdata(act_rdata)
  );

  masq_buffer #(.WIDTH(WGT_W), .DEPTH(WGT_DEPTH), .WW(WW)) u_wgt (
    .clk, .a_en(dma_wgt), .a_we(d_we), .a_addr(d_addr[W_AW-1:0]), .a_word(d_word[$clog2((WGT_W + WW - 1) / WW)-1:0]),
    .a_wdata(d_wdata), .a_rdata(wgt_ra),
    .b_en(wgt_en_b), .b_we(1'b0), .b_addr(wgt_addr_b[W_AW-1:0]), .b_wdata(wgt_rdata), .b_rdata(wgt_rdata)
  );

  for (genvar m = 0; m < NUM_MPU; m++) begin : g_ob
    masq_buffer #(.WIDTH(OUT_W), .DEPTH(OUT_DEPTH), .WW(WW)) u_out (
      .clk, .a_en(dma_ob[m]), .a_we(d_we), .a_addr(d_addr[O_AW-1:0]), .a_word(d_word[0:0]),
      .a_wdata(d_wdata), .a_rdata(ob_ra[m]),
      .b_en(ob_en_b[m]), .b_we(ob_we_b), .b_addr(ob_addr_b[O_AW-1:0]), .b_wdata(ob_wdata_b[m]), .b_rdata(ob_rdata[m])
    );
  end

  masq_buffer #(.WIDTH(VEC_W), .DEPTH(VEC_DEPTH), .WW(WW)) u_vec (
    .clk, .a_en(dma_vec), .a_we(d_we), .a_addr(d_addr[V_AW-1:0]), .a_word(d_word[0:0]),
    .a_wdata(d_wdata), .a_rdata(vec_ra),
    .b_en(vec_en_b), .b_we(vec_we_b), .b_addr(vec_addr_b[V_AW-1:0]), .b_wdata(vec_wdata_b), .b_rdata(vec_rdata)
  );

  masq_buffer #(.WIDTH(MASK_W), .DEPTH(MASK_DEPTH), .WW(WW)) u_mask (
    .clk, .a_en(dma_mask), .a_we(d_we), .a_addr(d_addr[M_AW-1:0]), .a_word(1'b0),
    .a_wdata(d_wdata), .a_rdata(mask_ra),
    .b_en(mask_en_b), .b_we(mask_we_b), .b_addr(mask_addr_b[M_AW-1:0]), .b_wdata(mask_wdata_b), .b_rdata(mask_rdata)
  );

  // ---------------- mask manager ----------------
  logic               mm_en, mm_we;
  logic [15:0]        mm_addr;
  logic [MASK_W-1:0]  mm_wdata;

  masq_mask_manager #(.T(T), .AW(16)) u_mm (
    .clk, .rst_n, .start(mask_start), .op(cur.sub[1:0]), .src(cur.a0), .dst(cur.a1), .aux(cur.a2),
    .size(($clog2(T)+1)'(cur.n0)), .d2(cur.n1[5:0]), .d1(cur.n1[11:6]),
    .busy(), .done(mask_done), .promoted(mask_promoted),
    .m_en(mm_en), .m_we(mm_we), .m_addr(mm_addr), .m_wdata(mm_wdata), .m_rdata(mask_rdata)
  );

  // ---------------- GEMM: sequencer + MP-MPU array ----------------
  logic        g_act_en, g_wgt_en, g_mask_en, g_blk_valid, g_first, g_last, g_out_we;
  logic [15:0] g_act_addr, g_wgt_addr, g_mask_addr, g_out_addr;
  stage_t      g_stage;
  logic [NUM_MPU-1:0] mpu_ready, mpu_ov;
  prec_e       [NUM_MPU-1:0] mpu_typ;
  logic [NUM_MPU-1:0][NB-1:0][15:0] mpu_out;

  masq_gemm_seq #(.T(T)) u_gemm (
    .clk, .rst_n, .start(gemm_start), .act_base(cur.a0), .out_base(cur.a1), .mask_base(cur.a2),
    .wgt_base(cur.a3), .ntok(cur.n0), .nkb(cur.n1), .mask_wlog, .done(gemm_done),
    .act_en(g_act_en), .act_addr(g_act_addr), .wgt_en(g_wgt_en), .wgt_addr(g_wgt_addr),
    .mask_en(g_mask_en), .mask_addr(g_mask_addr), .mask_rdata,
    .blk_valid(g_blk_valid), .stage(g_stage), .first_k(g_first), .last_k(g_last),
    .blk_ready(mpu_ready[0]), .res_valid(mpu_ov[0]), .out_we(g_out_we), .out_addr(g_out_addr)
  );

  for (genvar m = 0; m < NUM_MPU; m++) begin : g_mpu
    logic [NB-1:0][BLK-1:0][7:0] w;
    logic [NB-1:0][7:0]          we;
    for (genvar n = 0; n < NB; n++) begin : g_w
      assign w[n]  = wgt_rdata[(m*NB + n)*WSLOT +: BLK*8];
      assign we[n] = wgt_rdata[(m*NB + n)*WSLOT + BLK*8 +: 8];
    end
    masq_mpmpu #(.NB(NB), .N(BLK)) u_mpu (
      .clk, .rst_n, .timestep, .dg1, .dg2,
      .blk_valid(g_blk_valid), .blk_ready(mpu_ready[m]), .stage(g_stage),
      .first_k(g_first), .last_k(g_last), .act_x(act_rdata.x), .act_e(act_rdata.exp),
      .wgt(w), .wgt_e(we), .cur_typ(mpu_typ[m]), .out_valid(mpu_ov[m]), .out(mpu_out[m])
    );
  end

  // ---------------- quantizer path ----------------
  logic [NUM_MPU-1:0] q_ob_en;
  logic [15:0]        q_ob_addr, q_vec_addr, q_mask_addr, q_act_addr;
  logic               q_vec_en, q_mask_en, q_act_we;
  mx_block_t          q_act_wdata;

  masq_quant_seq #(.T(T), .NBANK(NUM_MPU)) u_qseq (
    .clk, .rst_n, .start(quant_start), .src_vec(cur.bufsel[0]), .src_base(cur.a0), .act_base(cur.a1),
    .mask_base(cur.a2), .ntok(cur.n0), .nkb(cur.n1), .mask_wlog, .timestep, .dg1, .dg2,
    .done(quant_done), .ob_en(q_ob_en), .ob_addr(q_ob_addr), .ob_rdata(ob_rdata),
    .vec_en(q_vec_en), .vec_addr(q_vec_addr), .vec_rdata,
    .mask_en(q_mask_en), .mask_addr(q_mask_addr), .mask_rdata,
    .act_we(q_act_we), .act_addr(q_act_addr), .act_wdata(q_act_wdata), .typ_seen(quant_prec_seen)
  );

  // ---------------- VPU path ----------------
  logic               v_vec_en, v_vec_we, v_ob_we, v_mask_en;
  logic [15:0]        v_vec_addr, v_ob_addr, v_mask_addr;
  logic [VEC_W-1:0]   v_vec_wdata, v_ob_wdata;
  logic [NUM_MPU-1:0] v_ob_en;

  masq_vpu_seq #(.T(T), .NBANK(NUM_MPU), .LANES(BLK)) u_vseq (
    .clk, .rst_n, .start(vpu_start), .op(cur.sub), .a_from_vec(cur.bufsel[0]), .y_to_out(cur.bufsel[1]),
    .key_stage(cur.bufsel[2]), .bank(cur.bank), .a_base(cur.a0), .y_base(cur.a1), .mask_base(cur.a2),
    .b_addr(cur.a3), .c_addr(cur.ext[15:0]), .b_inc(cur.ext[16]), .nvec(cur.n0), .tok_base(cur.n1),
    .mask_wlog, .done(vpu_done),
    .vec_en(v_vec_en), .vec_we(v_vec_we), .vec_addr(v_vec_addr), .vec_wdata(v_vec_wdata), .vec_rdata,
    .ob_en(v_ob_en), .ob_we(v_ob_we), .ob_addr(v_ob_addr), .ob_wdata(v_ob_wdata), .ob_rdata,
    .mask_en(v_mask_en), .mask_addr(v_mask_addr), .mask_rdata,
    .stat_mean(vpu_mean), .stat_rstd(vpu_rstd), .stat_max(vpu_max), .stat_inv_sum(vpu_inv_sum)
  );

  // ---------------- buffer port B arbitration (one command at a time) ----------------
  always_comb begin
    act_en_b = 1'b0; act_we_b = 1'b0; act_addr_b = g_act_addr; act_wdata_b = q_act_wdata;
    wgt_en_b = g_wgt_en; wgt_addr_b = g_wgt_addr;
    ob_en_b = '0; ob_we_b = 1'b0; ob_addr_b = g_out_addr;
    for (int m = 0; m < NUM_MPU; m++) ob_wdata_b[m] = OUT_W'(mpu_out[m]);
    vec_en_b = 1'b0; vec_we_b = 1'b0; vec_addr_b = v_vec_addr; vec_wdata_b = v_vec_wdata;
    mask_en_b = 1'b0; mask_we_b = 1'b0; mask_addr_b = mm_addr; mask_wdata_b = mm_wdata;
    unique case (cur.opcode)
      CMD_MASK: begin mask_en_b = mm_en; mask_we_b = mm_we; end
      CMD_GEMM: begin
        act_en_b = g_act_en;
        ob_en_b = {NUM_MPU{g_out_we}}; ob_we_b = g_out_we; ob_addr_b = g_out_addr;
        mask_en_b = g_mask_en; mask_addr_b = g_mask_addr;
      end
      CMD_QUANT: begin
        act_en_b = q_act_we; act_we_b = q_act_we; act_addr_b = q_act_addr;
        ob_en_b = q_ob_en; ob_addr_b = q_ob_addr;
        vec_en_b = q_vec_en; vec_addr_b = q_vec_addr;
        mask_en_b = q_mask_en; mask_addr_b = q_mask_addr;
      end
      CMD_VPU: begin
        ob_en_b = v_ob_en; ob_we_b = v_ob_we; ob_addr_b = v_ob_addr;
        for (int m = 0; m < NUM_MPU; m++) ob_wdata_b[m] = v_ob_wdata;
        vec_en_b = v_vec_en; vec_we_b = v_vec_we;
        mask_en_b = v_mask_en; mask_addr_b = v_mask_addr;
      end
      default: ;
    endcase
  end

  // ---------------- activity counters ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      blocks_by_prec  <= '0;
      mpu_busy_cycles <= '0;
    end else begin
      if (g_blk_valid) mpu_busy_cycles <= mpu_busy_cycles + 1'b1;
      if (g_blk_valid && mpu_ready[0]) blocks_by_prec[mpu_typ[0]] <= blocks_by_prec[mpu_typ[0]] + 1'b1;
    end
  end

  if (NB > BLK) $error("masq_top: NB may not exceed the block size");

  // an activation block must have been quantized at the precision the MP-MPU uses
  a_act_prec: assert property (@(posedge clk) disable iff (!rst_n)
                               g_blk_valid |-> act_rdata.typ == mpu_typ[0]);

endmodule
