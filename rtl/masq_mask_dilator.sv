// masq_mask_dilator - builds the 4-stage mask of one tile by staged dilation.
//
// The binary main mask of a T x T token tile is loaded row by row. Each dilation
// step first ORs every row with itself shifted one token left and right
// (horizontal dilation), then ORs every row with the rows above and below
// (vertical dilation), so one step grows the region by one token in all eight
// directions, like one 3x3 convolution. Tokens of the main mask become stage 3
// (code 11); tokens reached within d2 steps stage 2 (10); tokens reached within
// d1 steps stage 1 (01); the rest stay stage 0 (00). The host sets d2 to the
// number of 3x3 convolutions at this resolution and d1 to the doubled distance
// of the next lower resolution, both found by profiling the U-Net beforehand.
// Only the top-left size x size corner of the tile is used, so the same
// hardware serves smaller resolutions; tokens outside it never become set.
// Row-wise shift-and-OR dilation, the stage encoding and the 64 x 64 tile follow
// the paper; doing one whole horizontal+vertical step per cycle over the full
// tile and the row-serial load/store interface are this design's choices.
//
// Timing: start (with size, d1, d2) -> size cycles of in_valid rows (row 0
// first) -> max(d1, d2) dilation cycles -> size cycles of out_valid stage rows
// (row 0 first) -> done pulse. busy is high from start until done.
module masq_mask_dilator #(
  parameter int unsigned T = 64          // tile edge in tokens
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [$clog2(T):0]    size,    // active rows/columns, 1..T
  input  logic [5:0]            d2,      // dilation steps of stage 2
  input  logic [5:0]            d1,      // dilation steps of stage 1 (>= d2 normally)
  input  logic                  in_valid,
  input  logic [T-1:0]          in_row,
  output logic                  out_valid,
  output logic [T-1:0][1:0]     out_row,
  output logic                  busy,
  output logic                  done
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_DIL, S_STORE} state_e;
  state_e state;

  logic [T-1:0]        cur   [T];
  logic [T-1:0][1:0]   stg   [T];
  logic [T-1:0]        nxt   [T];
  logic [T-1:0]        hor   [T];
  logic [T-1:0]        valid_cols;
  logic [$clog2(T):0]  row_cnt;
  logic [5:0]          step, steps;

  always_comb begin
    for (int j = 0; j < T; j++) valid_cols[j] = (j < int'(size));
    for (int r = 0; r < T; r++) hor[r] = cur[r] | (cur[r] >> 1) | (cur[r] << 1);
    for (int r = 0; r < T; r++) begin
      nxt[r] = hor[r];
      if (r > 0)     nxt[r] = nxt[r] | hor[r-1];
      if (r < T - 1) nxt[r] = nxt[r] | hor[r+1];
      nxt[r] = (r < int'(size)) ? (nxt[r] & valid_cols) : '0;
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      row_cnt   <= '0;
      step      <= '0;
      steps     <= '0;
      out_valid <= 1'b0;
      out_row   <= '0;
      done      <= 1'b0;
      for (int r = 0; r < T; r++) begin cur[r] <= '0; stg[r] <= '0; end
    end else begin
      done      <= 1'b0;
      out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_LOAD;
          row_cnt <= '0;
          step    <= '0;
          steps   <= (d1 > d2) ? d1 : d2;
          for (int r = 0; r < T; r++) begin cur[r] <= '0; stg[r] <= '0; end
        end
        S_LOAD: if (in_valid) begin
          cur[row_cnt[$clog2(T)-1:0]] <= in_row & valid_cols;
          for (int j = 0; j < T; j++)
            stg[row_cnt[$clog2(T)-1:0]][j] <= (in_row[j] && valid_cols[j]) ? 2'b11 : 2'b00;
          row_cnt <= row_cnt + 1'b1;
          if (row_cnt + 1'b1 == size) begin
            row_cnt <= '0;
            state   <= (steps == 0) ? S_STORE : S_DIL;
          end
        end
        S_DIL: begin
          for (int r = 0; r < T; r++) begin
            cur[r] <= nxt[r];
            for (int j = 0; j < T; j++)
              if (nxt[r][j] && stg[r][j] == 2'b00)
                stg[r][j] <= (step < d2) ? 2'b10 : 2'b01;
          end
          step <= step + 1'b1;
          if (step + 1'b1 == steps) state <= S_STORE;
        end
        S_STORE: begin
          out_valid <= 1'b1;
          out_row   <= stg[row_cnt[$clog2(T)-1:0]];
          row_cnt   <= row_cnt + 1'b1;
          if (row_cnt + 1'b1 == size) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
