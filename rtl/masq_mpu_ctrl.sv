// masq_mpu_ctrl - MP-MPU controller: precision selection and slice sequencing.
//
// For every activation block offered to the MP-MPU it combines the token's
// 2-bit stage with the current denoising timestep to pick the precision type
// (timestep-aware allocation: before the first downgrade point stages 3..0 run
// MXINT8/8/4/2, between the points 8/4/4/2, after the second 8/4/2/2), then
// steps cfg from 11 down to the format's last slice, one slice per cycle, so a
// block takes 4, 2 or 1 cycles. blk_ready is high in the last slice cycle, when
// the offered block is consumed (valid/ready handshake, this design's choice).
// The downgrade points are run-time inputs; the paper's evaluation uses
// timesteps 9 and 18 of a 50-step schedule. A timestep counts denoising steps
// from 0 at the start of generation (this design's convention).
module masq_mpu_ctrl
  import masq_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] timestep,
  input  logic [7:0] dg1,         // first downgrade timestep
  input  logic [7:0] dg2,         // second downgrade timestep
  input  logic       blk_valid,
  input  stage_t     stage,
  output logic       blk_ready,
  output logic       pe_valid,    // a slice is issued to the BMPEs this cycle
  output prec_e      typ,
  output logic [1:0] cfg
);
  phase_t     phase;
  logic [1:0] cfg_r;

  always_comb begin
    phase     = ts_phase(timestep, dg1, dg2);
    typ       = stage_prec(stage, phase);
    cfg       = cfg_r;
    pe_valid  = blk_valid;
    blk_ready = blk_valid && (cfg_r == last_cfg(typ));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         cfg_r <= 2'b11;
    else if (blk_ready) cfg_r <= 2'b11;
    else if (blk_valid) cfg_r <= cfg_r - 2'd1;
  end

  // the stage may not change while a block is being sliced
  logic   busy_q;
  stage_t stage_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin busy_q <= 1'b0; stage_q <= '0; end
    else begin busy_q <= blk_valid && !blk_ready; stage_q <= stage; end
  end
  a_stage_stable: assert property (@(posedge clk) disable iff (!rst_n) busy_q |-> (blk_valid && stage == stage_q));
endmodule
