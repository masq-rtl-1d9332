// masq_mask_updater - semantic refinement of a 4-stage mask row.
//
// Receives one row of the stage mask and the matching row of the binary
// refinement mask (tokens whose attention probability to the masked tokens,
// averaged and compared with a threshold, marks them as semantically important).
// A flagged stage-0 token (00) is promoted to stage 1 (01) by ORing the flag
// into the low stage bit; the OR is gated by the high stage bit so that stages
// 1, 2 and 3 stay as they are (an ungated OR would turn stage 2 into stage 3).
// The bitwise-OR promotion of stage 0 to stage 1 follows the paper; the gating
// by stage[1] and the one-cycle registered row interface are this design's.
// Timing: out_valid/out_row follow in_valid by one cycle; a row per cycle.
module masq_mask_updater #(
  parameter int unsigned T = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [T-1:0][1:0] stage_row,
  input  logic [T-1:0]      refine_row,
  output logic              out_valid,
  output logic [T-1:0][1:0] out_row,
  output logic [15:0]       promoted     // tokens promoted in this row
);
  logic [T-1:0][1:0] upd;
  logic [15:0]       cnt;

  always_comb begin
    cnt = '0;
    for (int j = 0; j < T; j++) begin
      upd[j] = stage_row[j] | {1'b0, refine_row[j] & ~stage_row[j][1]};
      cnt    = cnt + 16'(refine_row[j] && stage_row[j] == 2'b00);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_row   <= '0;
      promoted  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_row  <= upd;
        promoted <= cnt;
      end
    end
  end
endmodule
