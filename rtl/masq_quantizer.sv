// masq_quantizer - BF16 vector to one MX block (MXINT8, MXINT4 or MXINT2).
//
// Converts 32 BF16 activations into the block format the MP-MPU consumes: one
// shared 8-bit biased exponent e and 32 two's-complement integers x_i such that
// value_i ~= 2^(e-127) * x_i. The precision comes from the token's stage and
// the timestep (same table as the MP-MPU controller) and arrives as typ.
// The shared exponent is taken from the largest element exponent Emax as
// e = Emax - (n - 2) for n-bit elements, so the largest magnitude lands in
// [2^(n-2), 2^(n-1)); each element is shifted to that scale, rounded to nearest
// with ties away from zero and clamped to [-2^(n-1), 2^(n-1)-1]. The block
// format (32 elements, shared 8-bit exponent, INT8/4/2 two's complement) is the
// paper's; the exponent rule, rounding and clamping are this design's choices,
// since the paper gives only the quantizer's function. Elements are stored
// sign-extended to 8 bits. Denormal BF16 inputs count as zero.
// Timing: out_valid/out follow in_valid by one cycle; one block per cycle.
module masq_quantizer
  import masq_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  prec_e                typ,
  input  logic [BLK-1:0][15:0] in,
  output logic                 out_valid,
  output mx_block_t            out
);
  mx_block_t q;

  always_comb begin
    logic [7:0] emax;
    int         nb, e, sh;
    logic [8:0] man;
    logic [17:0] scaled;      // man with 9 extra low bits for the rounding bit
    int         mag, lim_p, lim_n;
    emax = '0;
    for (int i = 0; i < BLK; i++) if (in[i][14:7] > emax) emax = in[i][14:7];
    nb = int'(elem_bits(typ));
    e  = int'(emax) - (nb - 2);
    if (e < 0) e = 0;
    lim_p = (1 << (nb - 1)) - 1;
    lim_n = (1 << (nb - 1));
    q.typ = typ;
    q.exp = 8'(e);
    for (int i = 0; i < BLK; i++) begin
      // value = (man/128) * 2^(Ei-127); x = value * 2^(127-e) = man * 2^(Ei-e-7)
      man = (in[i][14:7] == 0) ? 9'd0 : {1'b1, in[i][6:0], 1'b0};   // man * 2 (one extra bit)
      sh  = e + 7 - int'(in[i][14:7]);                           // right shift of man*2 to x*2
      if (sh > 17) scaled = '0;
      else         scaled = {9'd0, man} >> sh;                    // x*2, LSB is the half bit
      mag = (int'(scaled) + 1) >> 1;                              // ties away from zero
      if (in[i][15]) begin
        if (mag > lim_n) mag = lim_n;
        q.x[i] = 8'(-mag);
      end else begin
        if (mag > lim_p) mag = lim_p;
        q.x[i] = 8'(mag);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out <= q;
    end
  end
endmodule
