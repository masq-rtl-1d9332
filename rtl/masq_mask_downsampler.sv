// masq_mask_downsampler - halves the resolution of a binary mask.
//
// Takes the mask row by row; every pair of rows (2r, 2r+1) yields one output row
// of T/2 bits in which bit j is set when two or more of the four bits
// row2r[2j], row2r[2j+1], row2r+1[2j], row2r+1[2j+1] are set (2x2 window,
// stride 2, majority rule with ties counted as one), as the paper specifies.
// The row-serial interface is this design's choice: clear restarts the row
// pairing; out_valid pulses one cycle after every second in_valid row.
module masq_mask_downsampler #(
  parameter int unsigned T = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              in_valid,
  input  logic [T-1:0]      in_row,
  output logic              out_valid,
  output logic [T/2-1:0]    out_row
);
  logic         odd;
  logic [T-1:0] prev;
  logic [T/2-1:0] maj;

  always_comb begin
    for (int j = 0; j < T / 2; j++) begin
      logic [2:0] c;
      c = 3'(prev[2*j]) + 3'(prev[2*j+1]) + 3'(in_row[2*j]) + 3'(in_row[2*j+1]);
      maj[j] = (c >= 3'd2);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      odd       <= 1'b0;
      prev      <= '0;
      out_valid <= 1'b0;
      out_row   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (clear) odd <= 1'b0;
      else if (in_valid) begin
        odd <= ~odd;
        if (!odd) prev <= in_row;
        else begin
          out_valid <= 1'b1;
          out_row   <= maj;
        end
      end
    end
  end
endmodule
