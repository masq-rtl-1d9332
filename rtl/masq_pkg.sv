// masq_pkg - types, constants and small functions shared by the MASQ accelerator.
//
// MASQ runs masked-diffusion U-Nets with activations held in MX block formats:
// a block is 32 two's-complement integers that share one 8-bit biased exponent e,
// element value = 2^(e-127) * x_i. Besides MXINT8 the design uses two narrower
// variants, MXINT4 and MXINT2. Every token carries a 2-bit stage (3 = main mask,
// 2 = conv receptive field around it, 1 = next-resolution field or semantically
// promoted, 0 = rest) and the stage plus the denoising phase select the precision.
//
// Encodings that follow the paper: precision type 00/01/10 = MXINT2/4/8; stage
// code 11/10/01/00 = stage 3/2/1/0; stage->precision per phase 8/8/4/2, 8/4/4/2,
// 8/4/2/2 (stage 3..0); cfg = bit-slice index, 11 for the MSB slice, counting
// down. The phase numbering 0/1/2 and the helper functions are this design's own.
package masq_pkg;

  localparam int unsigned BLK      = 32;  // elements per MX block

  typedef enum logic [1:0] {
    MXINT2 = 2'b00,
    MXINT4 = 2'b01,
    MXINT8 = 2'b10
  } prec_e;

  typedef logic [1:0] stage_t;            // 11 = stage 3 ... 00 = stage 0
  typedef logic [1:0] phase_t;            // 0: before 1st downgrade, 1: between, 2: after 2nd

  // One MX activation block as kept in the activation buffer.
  typedef struct packed {
    prec_e                 typ;
    logic [7:0]            exp;
    logic [BLK-1:0][7:0]   x;             // element i in x[i], sign-extended to 8 bits
  } mx_block_t;

  // Timestep-aware precision allocation (stage 3 always MXINT8).
  function automatic prec_e stage_prec(stage_t s, phase_t ph);
    prec_e p;
    unique case (s)
      2'b11:   p = MXINT8;
      2'b10:   p = (ph == 2'd0) ? MXINT8 : MXINT4;
      2'b01:   p = (ph == 2'd2) ? MXINT2 : MXINT4;
      default: p = MXINT2;
    endcase
    return p;
  endfunction

  // Denoising phase from the timestep and the two downgrade timesteps.
  function automatic phase_t ts_phase(logic [7:0] ts, logic [7:0] dg1, logic [7:0] dg2);
    if (ts >= dg2) return 2'd2;
    if (ts >= dg1) return 2'd1;
    return 2'd0;
  endfunction

  // cfg value of the least significant (last processed) slice of a format.
  function automatic logic [1:0] last_cfg(prec_e p);
    unique case (p)
      MXINT8:  return 2'b00;
      MXINT4:  return 2'b10;
      default: return 2'b11;
    endcase
  endfunction

  // Number of 2-bit slices (= cycles) per block in a format.
  function automatic int unsigned num_slices(prec_e p);
    unique case (p)
      MXINT8:  return 4;
      MXINT4:  return 2;
      default: return 1;
    endcase
  endfunction

  // Element width in bits.
  function automatic int unsigned elem_bits(prec_e p);
    return 2 * num_slices(p);
  endfunction

  // Round an FP32 word to BF16, nearest-even; NaN kept quiet, no denormal handling.
  function automatic logic [15:0] fp32_to_bf16(logic [31:0] f);
    if (f[30:23] == 8'hFF) return {f[31:16] | {9'b0, |f[22:0], 6'b0}};
    return f[31:16] + {15'b0, f[15] & (f[16] | (|f[14:0]))};
  endfunction

  // ---------------------------------------------------------------------
  // Host command format (this design's own; the paper does not give one).
  typedef enum logic [3:0] {
    CMD_NOP   = 4'd0,
    CMD_DMA   = 4'd1,   // sub[0]: 1 = store; bufsel: buffer; bank: output bank;
                        // a0: entry; ext: external word address; n0: words
    CMD_SETT  = 4'd2,   // ext[7:0] timestep, ext[15:8] dg1, ext[23:16] dg2;
                        // a0[2:0]: log2 of the mask width in tokens
    CMD_MASK  = 4'd3,   // sub[1:0]: 0 dilate / 1 update / 2 downsample; a0 src,
                        // a1 dst, a2 aux; n0 size; n1[5:0] d2, n1[11:6] d1
    CMD_GEMM  = 4'd4,   // a0 act base, a1 out entry base, a2 stage-mask base,
                        // a3 weight base; n0 tokens; n1 K blocks
    CMD_QUANT = 4'd5,   // bufsel[0]: 0 = output banks, 1 = vector buffer; a0 src
                        // base, a1 act base, a2 stage-mask base; n0 tokens;
                        // n1 blocks per token
    CMD_VPU   = 4'd6    // sub: VPU op; bufsel[0]: a from vector buffer (else
                        // output bank `bank`); bufsel[1]: y to output bank (else
                        // vector buffer); bufsel[2]: per-key stages (else per
                        // token); a0 a base, a1 y base, a2 stage-mask base,
                        // a3 b entry, ext[15:0] c entry, ext[16] b advances;
                        // n0 vectors; n1 first token of the stage lookup
  } cmd_op_e;

  typedef enum logic [2:0] {
    BUF_ACT  = 3'd0,
    BUF_WGT  = 3'd1,
    BUF_OUT  = 3'd2,
    BUF_VEC  = 3'd3,
    BUF_MASK = 3'd4
  } buf_e;

  typedef struct packed {
    cmd_op_e     opcode;
    logic [3:0]  sub;
    logic [2:0]  bufsel;
    logic [4:0]  bank;
    logic [15:0] a0;
    logic [15:0] a1;
    logic [15:0] a2;
    logic [15:0] a3;
    logic [15:0] n0;
    logic [15:0] n1;
    logic [31:0] ext;
  } masq_cmd_t;

endpackage
