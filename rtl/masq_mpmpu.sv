// masq_mpmpu - mask-aware multi-precision matrix processing unit (MP-MPU).
//
// NB block-wise multi-precision PEs share one activation block: each cycle the
// slicer cuts the current 2-bit slice out of all 32 activation elements and
// broadcasts these 32x2 bits to every BMPE, while each BMPE gets its own 32
// MXINT8 weights (32x8 bits) and weight exponent. All BMPEs therefore run the
// same precision and cfg in lock-step, as the paper describes; BMPE n produces
// output channel n of the unit. The controller picks the precision from the
// token's stage and the timestep and sequences the slices.
//
// Interface: blk_valid/blk_ready offer one K block (activation block, weights,
// exponents, first_k/last_k, stage); the block and its weights must stay stable
// until blk_ready. Outputs are NB BF16 values with out_valid, two cycles after
// the last slice of the last K block. The slicer's element layout (elements
// sign-extended to 8 bits, slice cfg - (4 - slices) counted from bit 0) is this
// design's choice.
module masq_mpmpu
  import masq_pkg::*;
#(
  parameter int unsigned NB = 32,      // BMPEs per MP-MPU
  parameter int unsigned N  = BLK      // elements per block
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [7:0]                timestep,
  input  logic [7:0]                dg1,
  input  logic [7:0]                dg2,
  input  logic                      blk_valid,
  output logic                      blk_ready,
  input  stage_t                    stage,
  input  logic                      first_k,
  input  logic                      last_k,
  input  logic [N-1:0][7:0]         act_x,
  input  logic [7:0]                act_e,
  input  logic [NB-1:0][N-1:0][7:0] wgt,
  input  logic [NB-1:0][7:0]        wgt_e,
  output prec_e                     cur_typ,   // precision in use (for statistics)
  output logic                      out_valid,
  output logic [NB-1:0][15:0]       out
);
  logic             pe_valid;
  prec_e            typ;
  logic [1:0]       cfg;
  logic [N-1:0][1:0] a_slice;
  logic [NB-1:0]    ov;

  masq_mpu_ctrl u_ctrl (
    .clk, .rst_n, .timestep, .dg1, .dg2,
    .blk_valid, .stage, .blk_ready, .pe_valid, .typ, .cfg
  );

  assign cur_typ = typ;

  // slicer: element bits [2*idx+1 : 2*idx], idx = cfg - (4 - slices)
  always_comb begin
    logic [1:0] idx;
    idx = cfg - 2'(4 - num_slices(typ));
    for (int i = 0; i < N; i++) a_slice[i] = act_x[i][2*idx +: 2];
  end

  for (genvar b = 0; b < NB; b++) begin : g_pe
    masq_bmpe #(.N(N)) u_pe (
      .clk, .rst_n,
      .in_valid (pe_valid),
      .typ, .cfg, .first_k, .last_k,
      .a        (a_slice),
      .w        (wgt[b]),
      .ea       (act_e),
      .ew       (wgt_e[b]),
      .out_valid(ov[b]),
      .out      (out[b])
    );
  end

  assign out_valid = ov[0];

endmodule
