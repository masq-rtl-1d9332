// masq_fp32_add - IEEE-754 single-precision adder.
//
// Used for the BMPE's FP32 accumulator (and, as the same function from
// masq_fp_pkg, inside the vector unit). The smaller operand is aligned into a
// field with three guard bits and a sticky bit, magnitudes are added or
// subtracted, the result is renormalised and rounded to nearest-even.
// Denormal inputs and results are flushed to zero; infinities and NaN
// propagate (inf - inf gives a quiet NaN). FP32 accumulation is the paper's;
// rounding and denormal policy are this design's choices. Combinational.
module masq_fp32_add
  import masq_fp_pkg::*;
(
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  assign y = fp32_add(a, b);
endmodule
