// masq_gemm_seq - streams a matrix multiplication through the MP-MPU array.
//
// For tokens t = 0..ntok-1 and K blocks k = 0..nkb-1 it reads activation block
// act_base + t*nkb + k (activations are stored token-major, one MX block per
// entry), weight entry wgt_base + k (the weights of all MP-MPUs for that K
// block) and the stage-mask row holding token t, and offers the block to the
// MP-MPUs with the token's 2-bit stage. The next block's reads are issued in
// the cycle the current block is accepted, so blocks follow each other without
// bubbles: an MXINT2 token costs nkb cycles, MXINT4 2*nkb, MXINT8 4*nkb. Each
// MP-MPU result (one BF16 value per BMPE) is written to entry out_base + t of
// every output bank, bank m holding the channels of MP-MPU m. done pulses once
// the last result is written. The loop order and memory layout are this
// design's choices; the paper fixes only that the MP-MPU works one activation
// block at a time, broadcast to its BMPEs, at the precision of the token.
module masq_gemm_seq
  import masq_pkg::*;
#(
  parameter int unsigned T = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [15:0]     act_base,
  input  logic [15:0]     out_base,
  input  logic [15:0]     mask_base,
  input  logic [15:0]     wgt_base,
  input  logic [15:0]     ntok,
  input  logic [15:0]     nkb,
  input  logic [2:0]      mask_wlog,
  output logic            done,
  // buffer reads
  output logic            act_en,
  output logic [15:0]     act_addr,
  output logic            wgt_en,
  output logic [15:0]     wgt_addr,
  output logic            mask_en,
  output logic [15:0]     mask_addr,
  input  logic [2*T-1:0]  mask_rdata,
  // MP-MPU array
  output logic            blk_valid,
  output stage_t          stage,
  output logic            first_k,
  output logic            last_k,
  input  logic            blk_ready,
  input  logic            res_valid,
  // output banks
  output logic            out_we,
  output logic [15:0]     out_addr
);
  typedef enum logic [1:0] {G_IDLE, G_EXEC, G_DRAIN} state_e;
  state_e state;

  logic [15:0] t_rd, k_rd;        // block whose reads are issued
  logic [15:0] t_cur, k_cur;      // block being presented
  logic [15:0] a_ptr;
  logic [15:0] t_out;
  logic [15:0] nkb_r, ntok_r, out_r, mask_r, wgt_r;
  logic        issue;
  logic        last_blk;

  assign last_blk = (t_cur + 1'b1 == ntok_r) && (k_cur + 1'b1 == nkb_r);

  always_comb begin
    issue     = (state == G_IDLE && start) || (state == G_EXEC && blk_ready && !last_blk);
    act_en    = issue;
    wgt_en    = issue;
    mask_en   = issue;
    if (state == G_IDLE) begin
      act_addr  = act_base;
      wgt_addr  = wgt_base;
      mask_addr = mask_base;
    end else begin
      act_addr  = a_ptr;
      wgt_addr  = wgt_r + k_rd;
      mask_addr = mask_r + (t_rd >> mask_wlog);
    end
    blk_valid = (state == G_EXEC);
    stage     = mask_rdata[2 * (t_cur & ((16'd1 << mask_wlog) - 1'b1)) +: 2];
    first_k   = (k_cur == 0);
    last_k    = (k_cur + 1'b1 == nkb_r);
    out_we    = res_valid;
    out_addr  = out_r + t_out;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= G_IDLE;
      t_rd <= '0; k_rd <= '0; t_cur <= '0; k_cur <= '0; a_ptr <= '0; t_out <= '0;
      nkb_r <= '0; ntok_r <= '0; out_r <= '0; mask_r <= '0; wgt_r <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (res_valid) t_out <= t_out + 1'b1;
      unique case (state)
        G_IDLE: if (start) begin
          nkb_r <= nkb; ntok_r <= ntok; out_r <= out_base;
          mask_r <= mask_base; wgt_r <= wgt_base;
          t_cur <= '0; k_cur <= '0; t_out <= '0;
          a_ptr <= act_base + 1'b1;
          if (nkb == 1) begin t_rd <= 16'd1; k_rd <= '0; end
          else          begin t_rd <= '0;    k_rd <= 16'd1; end
          state <= (ntok == 0 || nkb == 0) ? G_DRAIN : G_EXEC;
        end
        G_EXEC: if (blk_ready) begin
          if (last_blk) state <= G_DRAIN;
          else begin
            t_cur <= t_rd; k_cur <= k_rd;
            a_ptr <= a_ptr + 1'b1;
            if (k_rd + 1'b1 == nkb_r) begin k_rd <= '0; t_rd <= t_rd + 1'b1; end
            else k_rd <= k_rd + 1'b1;
          end
        end
        G_DRAIN: if (t_out == ntok_r || (res_valid && t_out + 1'b1 == ntok_r)) begin
          state <= G_IDLE;
          done  <= 1'b1;
        end
        default: state <= G_IDLE;
      endcase
    end
  end
endmodule
