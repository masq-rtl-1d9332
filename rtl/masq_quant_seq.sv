// masq_quant_seq - quantizes BF16 results into MX activation blocks.
//
// For tokens t = 0..ntok-1 and blocks k = 0..nkb-1 it reads 32 BF16 values
// (from output bank k, entry src_base + t, or from vector-buffer entry
// src_base + t*nkb + k), looks up the token's stage in the stage mask, picks
// the precision with the same stage/timestep table as the MP-MPU and writes
// the quantized block to activation entry act_base + t*nkb + k, ready to be
// the next layer's input. One block per cycle: read, quantize, write, pipelined
// (ntok*nkb + 3 cycles). The quantizer function is the paper's; the sequencing
// and layout are this design's.
module masq_quant_seq
  import masq_pkg::*;
#(
  parameter int unsigned T      = 64,
  parameter int unsigned NBANK  = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic                         src_vec,
  input  logic [15:0]                  src_base,
  input  logic [15:0]                  act_base,
  input  logic [15:0]                  mask_base,
  input  logic [15:0]                  ntok,
  input  logic [15:0]                  nkb,
  input  logic [2:0]                   mask_wlog,
  input  logic [7:0]                   timestep,
  input  logic [7:0]                   dg1,
  input  logic [7:0]                   dg2,
  output logic                         done,
  // sources
  output logic [NBANK-1:0]             ob_en,
  output logic [15:0]                  ob_addr,
  input  logic [NBANK-1:0][BLK*16-1:0] ob_rdata,
  output logic                         vec_en,
  output logic [15:0]                  vec_addr,
  input  logic [BLK*16-1:0]            vec_rdata,
  output logic                         mask_en,
  output logic [15:0]                  mask_addr,
  input  logic [2*T-1:0]               mask_rdata,
  // activation buffer write
  output logic                         act_we,
  output logic [15:0]                  act_addr,
  output mx_block_t                    act_wdata,
  // statistics
  output logic [2:0]                   typ_seen   // bit p set once precision p was produced
);
  typedef enum logic [1:0] {Q_IDLE, Q_RUN, Q_DRAIN} state_e;
  state_e state;

  logic [15:0] t_rd, k_rd, ntok_r, nkb_r, src_r, mask_r, lin;
  logic        v1;                 // data arriving this cycle
  logic [15:0] k1, t1, d1, d2q;
  logic        src_vec_r;
  logic        q_valid;
  mx_block_t   q_out;
  prec_e       typ;
  stage_t      st;
  logic [BLK-1:0][15:0] q_in;

  always_comb begin
    logic rd;
    rd        = (state == Q_RUN);
    ob_en     = '0;
    ob_addr   = src_r + t_rd;
    vec_en    = rd && src_vec_r;
    vec_addr  = src_r + lin;
    mask_en   = rd;
    mask_addr = mask_r + (t_rd >> mask_wlog);
    if (rd && !src_vec_r) ob_en[k_rd[$clog2(NBANK)-1:0]] = 1'b1;
    st   = mask_rdata[2 * (t1 & ((16'd1 << mask_wlog) - 1'b1)) +: 2];
    typ  = stage_prec(st, ts_phase(timestep, dg1, dg2));
    q_in = src_vec_r ? vec_rdata : ob_rdata[k1[$clog2(NBANK)-1:0]];
    act_we    = q_valid;
    act_addr  = d2q;
    act_wdata = q_out;
  end

  masq_quantizer u_q (
    .clk, .rst_n, .in_valid(v1), .typ, .in(q_in), .out_valid(q_valid), .out(q_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= Q_IDLE;
      t_rd <= '0; k_rd <= '0; ntok_r <= '0; nkb_r <= '0; src_r <= '0; mask_r <= '0; lin <= '0;
      v1 <= 1'b0; k1 <= '0; t1 <= '0; d1 <= '0; d2q <= '0; src_vec_r <= 1'b0;
      done <= 1'b0; typ_seen <= '0;
    end else begin
      done <= 1'b0;
      v1   <= (state == Q_RUN);
      k1   <= k_rd;
      t1   <= t_rd;
      d1   <= act_base + lin;
      d2q  <= d1;
      if (v1) typ_seen[typ] <= 1'b1;
      unique case (state)
        Q_IDLE: if (start) begin
          t_rd <= '0; k_rd <= '0; lin <= '0;
          ntok_r <= ntok; nkb_r <= nkb; src_r <= src_base; mask_r <= mask_base;
          src_vec_r <= src_vec;
          state <= (ntok == 0 || nkb == 0) ? Q_DRAIN : Q_RUN;
        end
        Q_RUN: begin
          lin <= lin + 1'b1;
          if (k_rd + 1'b1 == nkb_r) begin
            k_rd <= '0;
            t_rd <= t_rd + 1'b1;
            if (t_rd + 1'b1 == ntok_r) state <= Q_DRAIN;
          end else k_rd <= k_rd + 1'b1;
        end
        Q_DRAIN: if (!v1 && !q_valid) begin
          state <= Q_IDLE;
          done  <= 1'b1;
        end
        default: state <= Q_IDLE;
      endcase
    end
  end
endmodule
