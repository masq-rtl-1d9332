// masq_vpu - vector processing unit for the non-matrix operations.
//
// LANES lanes take BF16 operands a, b, c and a 2-bit stage per lane, compute in
// FP32 and return BF16 results one cycle later. Besides element-wise ADD, MUL
// and FMA (a*b + c) and the activations SiLU (a * sigmoid(a)) and GELU
// (a * sigmoid(1.702 a)), it runs the two precision-aware reductions of MASQ:
//
//  Group normalization - GN_ACC adds a and a^2 into per-lane sums, but only in
//   lanes whose token is stage 2 or 3 (the high-precision tokens), and counts
//   them. REDUCE then folds the lanes (LANES cycles) and derives mean and
//   rstd = 1/sqrt(var + eps). GN_NORM applies (a - mean) * rstd * b + c to all
//   tokens, whatever their stage.
//  Softmax - SM_MAX keeps a per-lane running maximum over lanes whose key token
//   is not stage 0; REDUCE folds it; SM_EXP outputs exp(a - max) and adds it to
//   the per-lane sums, giving stage-0 lanes probability 0 and leaving them out
//   of the sum; REDUCE folds the sum; SM_NORM multiplies by its reciprocal.
//  CLR clears the per-lane accumulators.
//
// The operation list (element-wise, normalization, softmax, SiLU, GELU) and the
// two stage rules are the paper's. The lane count, the op encoding, the
// multi-pass sequencing, the sigmoid-based GELU and the arithmetic methods
// (see masq_fp_pkg) are this design's, since the paper does not give the VPU's
// insides. Timing: out_valid/y one cycle after in_valid for every op except
// REDUCE, which keeps busy high for LANES + 1 cycles and produces no y; no op
// may be issued while busy. The reduction of the stage statistics spans all
// vectors issued since the last CLR.
module masq_vpu
  import masq_pkg::*;
  import masq_fp_pkg::*;
#(
  parameter int unsigned LANES = 32,
  parameter logic [31:0] GN_EPS = 32'h3727_C5AC   // 1e-5
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [3:0]             op,
  input  logic [LANES-1:0][15:0] a,
  input  logic [LANES-1:0][15:0] b,
  input  logic [LANES-1:0][15:0] c,
  input  stage_t [LANES-1:0]     stage,
  output logic                   busy,
  output logic                   out_valid,
  output logic [LANES-1:0][15:0] y,
  output logic [31:0]            stat_mean,      // group-norm mean
  output logic [31:0]            stat_rstd,      // group-norm 1/sqrt(var+eps)
  output logic [31:0]            stat_max,       // softmax maximum
  output logic [31:0]            stat_inv_sum    // 1 / softmax denominator
);
  localparam logic [3:0] OP_ADD = 4'd0, OP_MUL = 4'd1, OP_FMA = 4'd2, OP_SILU = 4'd3,
                         OP_GELU = 4'd4, OP_CLR = 4'd5, OP_GN_ACC = 4'd6, OP_GN_NORM = 4'd7,
                         OP_SM_MAX = 4'd8, OP_SM_EXP = 4'd9, OP_SM_NORM = 4'd10,
                         OP_REDUCE = 4'd11;
  localparam logic [31:0] F_GELU_K = 32'h3FD9_DB23;   // 1.702

  // per-lane accumulators
  logic [31:0] acc_sum [LANES];
  logic [31:0] acc_sq  [LANES];
  logic [31:0] acc_max [LANES];
  logic [15:0] acc_cnt [LANES];
  // reduction state
  logic                       red_busy, red_fin;
  logic [$clog2(LANES):0]     red_idx;
  logic [31:0]                r_sum, r_sq, r_max;
  logic [31:0]                r_cnt;

  logic [31:0] nsum [LANES];
  logic [31:0] nsq  [LANES];
  logic [31:0] nmax [LANES];
  logic [15:0] ncnt [LANES];
  logic [LANES-1:0][15:0] ny;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic [31:0] fa, fb, fc, r, sg;
      logic        hi, keep;
      fa = bf16_to_fp32(a[l]);
      fb = bf16_to_fp32(b[l]);
      fc = bf16_to_fp32(c[l]);
      hi   = stage[l][1];              // stage 2 or 3
      keep = (stage[l] != 2'b00);      // not stage 0
      nsum[l] = acc_sum[l];
      nsq[l]  = acc_sq[l];
      nmax[l] = acc_max[l];
      ncnt[l] = acc_cnt[l];
      r  = F_ZERO;
      sg = F_ZERO;
      unique case (op)
        OP_ADD:  r = fp32_add(fa, fb);
        OP_MUL:  r = fp32_mul(fa, fb);
        OP_FMA:  r = fp32_add(fp32_mul(fa, fb), fc);
        OP_SILU: begin
          sg = fp32_recip(fp32_add(F_ONE, fp32_exp(fp32_neg(fa))));
          r  = fp32_mul(fa, sg);
        end
        OP_GELU: begin
          sg = fp32_recip(fp32_add(F_ONE, fp32_exp(fp32_neg(fp32_mul(F_GELU_K, fa)))));
          r  = fp32_mul(fa, sg);
        end
        OP_CLR: begin
          nsum[l] = F_ZERO; nsq[l] = F_ZERO; nmax[l] = F_NINF; ncnt[l] = '0;
        end
        OP_GN_ACC: if (hi) begin
          nsum[l] = fp32_add(acc_sum[l], fa);
          nsq[l]  = fp32_add(acc_sq[l], fp32_mul(fa, fa));
          ncnt[l] = acc_cnt[l] + 16'd1;
        end
        OP_GN_NORM: r = fp32_add(fp32_mul(fp32_mul(fp32_add(fa, fp32_neg(stat_mean)), stat_rstd), fb), fc);
        OP_SM_MAX: if (keep && fp32_gt(fa, acc_max[l])) nmax[l] = fa;
        OP_SM_EXP: if (keep) begin
          r = fp32_exp(fp32_add(fa, fp32_neg(stat_max)));
          nsum[l] = fp32_add(acc_sum[l], r);
        end
        OP_SM_NORM: r = keep ? fp32_mul(fa, stat_inv_sum) : F_ZERO;
        default: r = F_ZERO;
      endcase
      ny[l] = fp32_to_bf16(r);
    end
  end

  assign busy = red_busy || red_fin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
      red_busy  <= 1'b0;
      red_fin   <= 1'b0;
      red_idx   <= '0;
      r_sum <= '0; r_sq <= '0; r_max <= F_NINF; r_cnt <= '0;
      stat_mean <= '0; stat_rstd <= F_ONE; stat_max <= '0; stat_inv_sum <= F_ONE;
      for (int l = 0; l < LANES; l++) begin
        acc_sum[l] <= '0; acc_sq[l] <= '0; acc_max[l] <= F_NINF; acc_cnt[l] <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      red_fin   <= 1'b0;
      if (in_valid && !busy) begin
        if (op == OP_REDUCE) begin
          red_busy <= 1'b1;
          red_idx  <= '0;
          r_sum <= F_ZERO; r_sq <= F_ZERO; r_max <= F_NINF; r_cnt <= '0;
        end else begin
          out_valid <= 1'b1;
          y         <= ny;
          for (int l = 0; l < LANES; l++) begin
            acc_sum[l] <= nsum[l]; acc_sq[l] <= nsq[l]; acc_max[l] <= nmax[l]; acc_cnt[l] <= ncnt[l];
          end
        end
      end
      if (red_busy) begin
        r_sum <= fp32_add(r_sum, acc_sum[red_idx[$clog2(LANES)-1:0]]);
        r_sq  <= fp32_add(r_sq, acc_sq[red_idx[$clog2(LANES)-1:0]]);
        if (fp32_gt(acc_max[red_idx[$clog2(LANES)-1:0]], r_max)) r_max <= acc_max[red_idx[$clog2(LANES)-1:0]];
        r_cnt <= r_cnt + 32'(acc_cnt[red_idx[$clog2(LANES)-1:0]]);
        red_idx <= red_idx + 1'b1;
        if (red_idx == ($clog2(LANES)+1)'(LANES - 1)) begin
          red_busy <= 1'b0;
          red_fin  <= 1'b1;
        end
      end
      if (red_fin) begin
        logic [31:0] inv_n, mean, var_;
        inv_n = fp32_recip(fp32_from_uint(r_cnt));
        mean  = fp32_mul(r_sum, inv_n);
        var_  = fp32_add(fp32_mul(r_sq, inv_n), fp32_neg(fp32_mul(mean, mean)));
        if (var_[31]) var_ = F_ZERO;
        stat_mean    <= mean;
        stat_rstd    <= fp32_rsqrt(fp32_add(var_, GN_EPS));
        stat_max     <= r_max;
        stat_inv_sum <= fp32_recip(r_sum);
      end
    end
  end

  a_no_issue_when_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !in_valid);

endmodule
