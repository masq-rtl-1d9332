// masq_vpu_seq - runs a VPU operation over a series of 32-lane vectors.
//
// First loads the b and c operand vectors from the vector buffer (entries
// b_addr and c_addr; b may instead advance with the vector index), then for
// each vector i = 0..nvec-1 reads a (output bank `bank` or vector buffer,
// entry a_base + i) and the stage-mask row, issues the op to the VPU and, for
// ops that produce a result, writes y to entry y_base + i of the vector buffer
// or of output bank `bank`. The stage of lane l is either the stage of token
// tok_base + i (all lanes, for per-token ops such as group normalization, where
// lanes are channels) or of token tok_base + 32*i + l (per-key, for softmax,
// where lanes are keys; needs a mask row of at least 32 tokens). A REDUCE op
// is issued once and waited for. Each vector takes four cycles (read a, read b
// or latch, execute, write back); throughput was not a goal of this sequencer.
// The VPU's operations are the paper's; this sequencing is this design's.
module masq_vpu_seq
  import masq_pkg::*;
#(
  parameter int unsigned T     = 64,
  parameter int unsigned NBANK = 32,
  parameter int unsigned LANES = 32
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  input  logic [3:0]                      op,
  input  logic                            a_from_vec,
  input  logic                            y_to_out,
  input  logic                            key_stage,
  input  logic [4:0]                      bank,
  input  logic [15:0]                     a_base,
  input  logic [15:0]                     y_base,
  input  logic [15:0]                     mask_base,
  input  logic [15:0]                     b_addr,
  input  logic [15:0]                     c_addr,
  input  logic                            b_inc,
  input  logic [15:0]                     nvec,
  input  logic [15:0]                     tok_base,
  input  logic [2:0]                      mask_wlog,
  output logic                            done,
  // vector buffer
  output logic                            vec_en,
  output logic                            vec_we,
  output logic [15:0]                     vec_addr,
  output logic [LANES*16-1:0]             vec_wdata,
  input  logic [LANES*16-1:0]             vec_rdata,
  // output banks
  output logic [NBANK-1:0]                ob_en,
  output logic                            ob_we,
  output logic [15:0]                     ob_addr,
  output logic [LANES*16-1:0]             ob_wdata,
  input  logic [NBANK-1:0][LANES*16-1:0]  ob_rdata,
  // stage mask
  output logic                            mask_en,
  output logic [15:0]                     mask_addr,
  input  logic [2*T-1:0]                  mask_rdata,
  // VPU statistics
  output logic [31:0]                     stat_mean,
  output logic [31:0]                     stat_rstd,
  output logic [31:0]                     stat_max,
  output logic [31:0]                     stat_inv_sum
);
  localparam logic [3:0] OP_CLR = 4'd5, OP_GN_ACC = 4'd6, OP_SM_MAX = 4'd8, OP_REDUCE = 4'd11;
  typedef enum logic [2:0] {V_IDLE, V_LDB, V_LDC, V_RA, V_RB, V_EX, V_WB, V_RED} state_e;
  state_e state;

  logic [3:0]  op_r;
  logic        afv, yto, keys, binc;
  logic [4:0]  bank_r;
  logic [15:0] a_r, y_r, m_r, b_r, c_r, n_r, tb_r, i;
  logic [LANES*16-1:0] a_q, b_q, c_q;
  logic [2*T-1:0]      row_q;
  logic                vin, vbusy, vout;
  stage_t [LANES-1:0]  stg;
  logic [LANES-1:0][15:0] va, vb, vc, vy;
  logic [15:0]         tk;
  logic                has_y;

  assign has_y = !(op_r == OP_CLR || op_r == OP_GN_ACC || op_r == OP_SM_MAX || op_r == OP_REDUCE);

  always_comb begin
    tk = keys ? (tb_r + (i << $clog2(LANES))) : (tb_r + i);
    vec_en = 1'b0; vec_we = 1'b0; vec_addr = a_r + i; vec_wdata = vy;
    ob_en = '0; ob_we = 1'b0; ob_addr = a_r + i; ob_wdata = vy;
    mask_en = 1'b0; mask_addr = m_r + (tk >> mask_wlog);
    unique case (state)
      V_LDB: begin vec_en = 1'b1; vec_addr = b_r; end
      V_LDC: begin vec_en = 1'b1; vec_addr = c_r; end
      V_RA: begin
        mask_en = 1'b1;
        if (afv) vec_en = 1'b1;
        else     ob_en[bank_r] = 1'b1;
      end
      V_RB: if (binc) begin vec_en = 1'b1; vec_addr = b_r + i; end
      V_WB: if (has_y) begin
        if (yto) begin ob_en[bank_r] = 1'b1; ob_we = 1'b1; ob_addr = y_r + i; end
        else     begin vec_en = 1'b1; vec_we = 1'b1; vec_addr = y_r + i; end
      end
      default: ;
    endcase
    for (int l = 0; l < LANES; l++) begin
      logic [15:0] col;
      col = keys ? ((tk & ((16'd1 << mask_wlog) - 1'b1)) + 16'(l)) : (tk & ((16'd1 << mask_wlog) - 1'b1));
      stg[l] = row_q[2 * col +: 2];
    end
    va  = a_q;
    vb  = binc ? vec_rdata : b_q;
    vc  = c_q;
    vin = (state == V_EX) || (state == V_RED && op_r == OP_REDUCE && i == 0);
  end

  masq_vpu #(.LANES(LANES)) u_vpu (
    .clk, .rst_n, .in_valid(vin && !vbusy), .op(op_r), .a(va), .b(vb), .c(vc), .stage(stg),
    .busy(vbusy), .out_valid(vout), .y(vy),
    .stat_mean, .stat_rstd, .stat_max, .stat_inv_sum
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= V_IDLE;
      op_r <= '0; afv <= 1'b0; yto <= 1'b0; keys <= 1'b0; binc <= 1'b0; bank_r <= '0;
      a_r <= '0; y_r <= '0; m_r <= '0; b_r <= '0; c_r <= '0; n_r <= '0; tb_r <= '0; i <= '0;
      a_q <= '0; b_q <= '0; c_q <= '0; row_q <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        V_IDLE: if (start) begin
          op_r <= op; afv <= a_from_vec; yto <= y_to_out; keys <= key_stage; binc <= b_inc;
          bank_r <= bank; a_r <= a_base; y_r <= y_base; m_r <= mask_base; b_r <= b_addr;
          c_r <= c_addr; n_r <= nvec; tb_r <= tok_base; i <= '0;
          state <= (op == OP_REDUCE) ? V_RED : V_LDB;
        end
        V_LDB: state <= V_LDC;
        V_LDC: begin b_q <= vec_rdata; state <= (n_r == 0) ? V_IDLE : V_RA; done <= (n_r == 0); end
        V_RA: begin
          if (i == 0) c_q <= vec_rdata;
          state <= V_RB;
        end
        V_RB: begin
          a_q   <= afv ? vec_rdata : ob_rdata[bank_r];
          row_q <= mask_rdata;
          state <= V_EX;
        end
        V_EX: state <= V_WB;
        V_WB: begin
          i <= i + 1'b1;
          if (i + 1'b1 == n_r) begin state <= V_IDLE; done <= 1'b1; end
          else state <= V_RA;
        end
        V_RED: begin
          // i counts: 0 = issue, 1 = waiting for the reduction to finish
          if (i == 0) i <= 16'd1;
          else if (!vbusy) begin state <= V_IDLE; done <= 1'b1; end
        end
        default: state <= V_IDLE;
      endcase
    end
  end
endmodule
