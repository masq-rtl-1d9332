// masq_adder_tree - balanced binary adder tree summing N signed inputs.
//
// Used in the BMPE to reduce the 32 SAM products of one 2-bit slice to a single
// partial sum. Each level adds neighbouring pairs; N need not be a power of two
// (an odd element is passed up unchanged). Output width OW must hold the full sum
// (IW + ceil(log2 N) bits). Purely combinational.
module masq_adder_tree #(
  parameter int unsigned N  = 32,
  parameter int unsigned IW = 10,
  parameter int unsigned OW = 15
) (
  input  logic signed [N-1:0][IW-1:0] in,
  output logic signed [OW-1:0]        sum
);
  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 1;

  logic signed [OW-1:0] lvl [LEVELS+1][N];

  always_comb begin
    int unsigned cnt;
    for (int l = 0; l <= LEVELS; l++)
      for (int i = 0; i < N; i++) lvl[l][i] = '0;
    for (int i = 0; i < N; i++) lvl[0][i] = OW'($signed(in[i]));
    cnt = N;
    for (int l = 0; l < LEVELS; l++) begin
      for (int i = 0; i < N / 2 + 1; i++) begin
        if (2 * i + 1 < cnt)      lvl[l+1][i] = lvl[l][2*i] + lvl[l][2*i+1];
        else if (2 * i < cnt)     lvl[l+1][i] = lvl[l][2*i];
      end
      cnt = (cnt + 1) / 2;
    end
    sum = lvl[LEVELS][0];
  end
endmodule
