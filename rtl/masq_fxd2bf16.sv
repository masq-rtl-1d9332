// masq_fxd2bf16 - fixed-point block result to BF16 ("Fxd to BF16" in the BMPE).
//
// The BMPE's fixed-point accumulator holds sum_i(x_a,i * x_w,i) of one 32-element
// block pair as a signed integer. Its real value is that integer times
// 2^(ea-127) * 2^(ew-127), ea and ew being the shared exponents of the activation
// and weight blocks. This unit finds the leading one, keeps 8 significant bits
// (7 fraction bits), rounds to nearest-even and forms the BF16 exponent
// lead + ea + ew - 127. The paper states only that the result is converted to
// BF16 "reflecting the scaling factors"; the rounding mode, flush of results
// below the normal range to zero and saturation to infinity above it are this
// design's choices. Purely combinational.
module masq_fxd2bf16 #(
  parameter int unsigned W = 24          // width of the signed fixed-point input
) (
  input  logic signed [W-1:0] v,
  input  logic [7:0]          ea,
  input  logic [7:0]          ew,
  output logic [15:0]         bf
);
  logic [W-1:0]   mag;
  logic [W+7:0]   ext;          // magnitude with 8 guard zeros below
  logic [W+7:0]   norm;
  int             lead;
  logic [7:0]     man;          // 1.fffffff
  logic           rnd;
  logic [8:0]     man_r;
  int             e;

  always_comb begin
    mag  = v[W-1] ? (W'(0) - v) : v;
    lead = 0;
    for (int i = 0; i < W; i++) if (mag[i]) lead = i;
    ext  = {mag, 8'b0};
    norm = ext << (W - 1 - lead);              // leading one at bit W+7
    man  = norm[W+7 -: 8];
    rnd  = norm[W-1] & (norm[W] | (|norm[W-2:0]));
    man_r = {1'b0, man} + {8'b0, rnd};
    e    = lead + int'(ea) + int'(ew) - 127;
    if (man_r[8]) begin
      e = e + 1;
      man_r = man_r >> 1;
    end
    if (mag == '0 || e <= 0) bf = {v[W-1] & (mag != '0), 15'b0};
    else if (e >= 255)       bf = {v[W-1], 8'hFF, 7'b0};
    else                     bf = {v[W-1], 8'(e), man_r[6:0]};
  end
endmodule
