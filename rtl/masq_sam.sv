// masq_sam - sign-aware multiplier (SAM) of one BMPE lane.
//
// Multiplies one 2-bit slice of an activation by a full 8-bit two's-complement
// weight. Only the most significant slice of an activation holds its sign bit;
// that slice has cfg = 11, so the reduction AND of cfg selects whether a[1] is
// taken as a sign or the slice is read as an unsigned 0..3. Both operands are
// turned into magnitudes, multiplied, and the product sign (activation sign XOR
// w[7]) is applied at the end. The mux on &cfg, the two abs units, the multiplier
// and the final sign stage follow the SAM drawing of the paper; the XOR that
// combines the two signs is the arithmetic rule of a signed product.
// Purely combinational.
module masq_sam (
  input  logic [1:0]        a,     // activation slice
  input  logic [7:0]        w,     // weight, two's complement
  input  logic [1:0]        cfg,   // slice index, 11 = MSB slice (carries the sign)
  output logic signed [9:0] p      // signed product, range -256 .. +256
);
  logic       a_sign;
  logic [1:0] a_abs;
  logic [7:0] w_abs;               // |w| up to 128
  logic [9:0] mag;

  always_comb begin
    a_sign = (&cfg) ? a[1] : 1'b0;
    a_abs  = a_sign ? (2'b00 - a) : a;          // 10 -> 2, 11 -> 1
    w_abs  = w[7] ? (8'h00 - w) : w;            // 8'h80 -> 128
    mag    = {8'b0, a_abs} * {2'b0, w_abs};
    p      = (a_sign ^ w[7]) ? -$signed(mag) : $signed(mag);
  end
endmodule
