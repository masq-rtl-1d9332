// masq_bmpe - block-wise multi-precision processing element (BMPE).
//
// Computes the dot product of one 32-element MX activation block with one
// 32-element MXINT8 weight block per pass, bit-serially over the activation:
// each cycle the 32 lanes receive one 2-bit slice of every activation element
// (the same slice index cfg for all lanes), 32 sign-aware multipliers form the
// slice products, an adder tree sums them and the fixed-point accumulator keeps
// acc = (acc << 2) + partial, starting at the MSB slice (cfg = 11). An MXINT8
// block therefore takes 4 cycles, MXINT4 2 and MXINT2 1. After the last slice
// of the format the integer result is converted to BF16 with the two shared
// exponents and added into an FP32 accumulator that spans the K blocks of one
// output; after the last K block the FP32 sum is rounded to BF16 and output.
// This structure (SAM, adder tree, shift-accumulate, Fxd-to-BF16, FP32 accum,
// BF16 out) follows the paper's BMPE drawing and text.
//
// Interface: in_valid qualifies a, w, cfg, typ; first_k marks the first K block
// of an output and last_k the last one; ea/ew are sampled with the last slice
// of a block. Timing (this design's choice): the clock edge that samples the
// last slice of a block registers its fixed-point result, the next edge updates
// the FP32 accumulator and the edge after that raises out_valid with the BF16
// output, i.e. out_valid is seen 2 cycles after the last slice of the last K
// block. The pipeline accepts a new slice every cycle.
module masq_bmpe
  import masq_pkg::*;
#(
  parameter int unsigned N   = BLK,    // lanes (elements per block)
  parameter int unsigned FXW = 24      // fixed-point accumulator width
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  prec_e              typ,
  input  logic [1:0]         cfg,
  input  logic               first_k,
  input  logic               last_k,
  input  logic [N-1:0][1:0]  a,
  input  logic [N-1:0][7:0]  w,
  input  logic [7:0]         ea,
  input  logic [7:0]         ew,
  output logic               out_valid,
  output logic [15:0]        out
);
  localparam int unsigned PW = 10;
  localparam int unsigned SW = PW + $clog2(N);

  logic signed [N-1:0][PW-1:0] prod;
  logic signed [SW-1:0]        psum;
  logic signed [FXW-1:0]       acc, acc_next;
  logic                        last_slice;

  for (genvar i = 0; i < N; i++) begin : g_sam
    masq_sam u_sam (.a(a[i]), .w(w[i]), .cfg(cfg), .p(prod[i]));
  end

  masq_adder_tree #(.N(N), .IW(PW), .OW(SW)) u_tree (.in(prod), .sum(psum));

  assign last_slice = (cfg == last_cfg(typ));

  // shift-accumulate; the MSB slice (cfg 11) restarts the accumulation
  always_comb begin
    if (cfg == 2'b11) acc_next = FXW'(psum);
    else              acc_next = (acc <<< 2) + FXW'(psum);
  end

  // stage 1: fixed-point accumulator and the block result register
  logic                  blk_valid, blk_first, blk_last;
  logic signed [FXW-1:0] blk_val;
  logic [7:0]            blk_ea, blk_ew;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      blk_valid <= 1'b0;
      blk_first <= 1'b0;
      blk_last  <= 1'b0;
      blk_val   <= '0;
      blk_ea    <= '0;
      blk_ew    <= '0;
    end else begin
      blk_valid <= in_valid && last_slice;
      if (in_valid) begin
        acc <= acc_next;
        if (last_slice) begin
          blk_val   <= acc_next;
          blk_first <= first_k;
          blk_last  <= last_k;
          blk_ea    <= ea;
          blk_ew    <= ew;
        end
      end
    end
  end

  // stage 2: Fxd -> BF16 and FP32 accumulation over K blocks
  logic [15:0] blk_bf;
  logic [31:0] facc, fsum;
  logic        fin_valid;

  masq_fxd2bf16 #(.W(FXW)) u_cvt (.v(blk_val), .ea(blk_ea), .ew(blk_ew), .bf(blk_bf));
  masq_fp32_add u_fadd (.a(blk_first ? 32'd0 : facc), .b({blk_bf, 16'd0}), .y(fsum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      facc      <= '0;
      fin_valid <= 1'b0;
    end else begin
      fin_valid <= blk_valid && blk_last;
      if (blk_valid) facc <= fsum;
    end
  end

  // stage 3: FP32 -> BF16 output register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= fin_valid;
      if (fin_valid) out <= fp32_to_bf16(facc);
    end
  end

endmodule
