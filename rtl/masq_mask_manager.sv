// masq_mask_manager - generates and maintains MASQ's multi-stage masks.
//
// Holds the three mask submodules and runs one of them per command over the
// mask memory, whose entries are rows of T tokens (binary masks in the low T
// bits, stage masks as T 2-bit codes):
//   MM_DIL  read `size` binary rows from src, build the 4-stage mask with the
//           dilator (distances d2 and d1), write `size` stage rows to dst;
//   MM_UPD  for every row, read the refinement row at aux and the stage row at
//           src, promote flagged stage-0 tokens to stage 1, write to dst;
//   MM_DS   read `size` binary rows from src, write `size`/2 rows of the
//           2x2-majority downsampled mask to dst.
// The three submodules and what they do are the paper's; the command set, the
// row-per-entry memory layout and the sequencing are this design's choices.
// Interface: start with the command fields; busy until a done pulse. The mask
// memory is read with one cycle of latency. promoted counts the tokens the last
// MM_UPD command moved from stage 0 to stage 1.
module masq_mask_manager #(
  parameter int unsigned T  = 64,
  parameter int unsigned AW = 13
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [1:0]         op,       // 0: dilate, 1: update, 2: downsample
  input  logic [AW-1:0]      src,
  input  logic [AW-1:0]      dst,
  input  logic [AW-1:0]      aux,
  input  logic [$clog2(T):0] size,
  input  logic [5:0]         d2,
  input  logic [5:0]         d1,
  output logic               busy,
  output logic               done,
  output logic [15:0]        promoted,
  // mask memory (whole entries of 2T bits)
  output logic               m_en,
  output logic               m_we,
  output logic [AW-1:0]      m_addr,
  output logic [2*T-1:0]     m_wdata,
  input  logic [2*T-1:0]     m_rdata
);
  localparam logic [1:0] MM_DIL = 2'd0, MM_UPD = 2'd1, MM_DS = 2'd2;
  typedef enum logic [3:0] {M_IDLE, M_DIL_RD, M_DIL_WAIT, M_UPD_R1, M_UPD_R2, M_UPD_EX, M_UPD_WR,
                            M_DS_RD, M_DONE} state_e;
  state_e state;

  logic [AW-1:0]      src_r, dst_r, aux_r;
  logic [$clog2(T):0] size_r, rd_cnt, wr_cnt;
  logic               rd_pending;       // a read issued last cycle delivers data now

  // dilator
  logic               dil_start, dil_out_valid, dil_busy, dil_done;
  logic [T-1:0][1:0]  dil_out;
  // updater
  logic               upd_in_valid, upd_out_valid;
  logic [T-1:0]       refine_r;
  logic [T-1:0][1:0]  upd_out;
  logic [15:0]        upd_cnt;
  // downsampler
  logic               ds_clear, ds_out_valid;
  logic [T/2-1:0]     ds_out;

  masq_mask_dilator #(.T(T)) u_dil (
    .clk, .rst_n, .start(dil_start), .size, .d2, .d1,
    .in_valid(rd_pending && state == M_DIL_RD || rd_pending && state == M_DIL_WAIT),
    .in_row(m_rdata[T-1:0]),
    .out_valid(dil_out_valid), .out_row(dil_out), .busy(dil_busy), .done(dil_done)
  );

  masq_mask_updater #(.T(T)) u_upd (
    .clk, .rst_n, .in_valid(upd_in_valid), .stage_row(m_rdata), .refine_row(refine_r),
    .out_valid(upd_out_valid), .out_row(upd_out), .promoted(upd_cnt)
  );

  masq_mask_downsampler #(.T(T)) u_ds (
    .clk, .rst_n, .clear(ds_clear), .in_valid(rd_pending && state == M_DS_RD),
    .in_row(m_rdata[T-1:0]), .out_valid(ds_out_valid), .out_row(ds_out)
  );

  assign busy         = (state != M_IDLE);
  assign dil_start    = start && state == M_IDLE && op == MM_DIL;
  assign ds_clear     = start && state == M_IDLE;
  assign upd_in_valid = (state == M_UPD_EX);

  // memory port: writes from the submodules have priority over reads
  always_comb begin
    m_en    = 1'b0;
    m_we    = 1'b0;
    m_addr  = src_r + AW'(rd_cnt);
    m_wdata = '0;
    if (dil_out_valid) begin
      m_en = 1'b1; m_we = 1'b1; m_addr = dst_r + AW'(wr_cnt); m_wdata = dil_out;
    end else if (ds_out_valid) begin
      m_en = 1'b1; m_we = 1'b1; m_addr = dst_r + AW'(wr_cnt); m_wdata = {{(2*T - T/2){1'b0}}, ds_out};
    end else if (state == M_UPD_WR) begin
      m_en = 1'b1; m_we = 1'b1; m_addr = dst_r + AW'(wr_cnt); m_wdata = upd_out;
    end else begin
      unique case (state)
        M_DIL_RD, M_DS_RD: m_en = (rd_cnt != size_r);
        M_UPD_R1: begin m_en = 1'b1; m_addr = aux_r + AW'(rd_cnt); end
        M_UPD_R2: begin m_en = 1'b1; m_addr = src_r + AW'(rd_cnt); end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= M_IDLE;
      src_r      <= '0;
      dst_r      <= '0;
      aux_r      <= '0;
      size_r     <= '0;
      rd_cnt     <= '0;
      wr_cnt     <= '0;
      rd_pending <= 1'b0;
      refine_r   <= '0;
      promoted   <= '0;
      done       <= 1'b0;
    end else begin
      done       <= 1'b0;
      rd_pending <= 1'b0;
      if (dil_out_valid || ds_out_valid || state == M_UPD_WR) wr_cnt <= wr_cnt + 1'b1;
      unique case (state)
        M_IDLE: if (start) begin
          src_r  <= src;
          dst_r  <= dst;
          aux_r  <= aux;
          size_r <= size;
          rd_cnt <= '0;
          wr_cnt <= '0;
          if (op == MM_UPD) promoted <= '0;
          unique case (op)
            MM_DIL:  state <= M_DIL_RD;
            MM_UPD:  state <= M_UPD_R1;
            default: state <= M_DS_RD;
          endcase
        end
        M_DIL_RD: if (rd_cnt != size_r) begin
          rd_cnt     <= rd_cnt + 1'b1;
          rd_pending <= 1'b1;
          if (rd_cnt + 1'b1 == size_r) state <= M_DIL_WAIT;
        end
        M_DIL_WAIT: if (dil_done) state <= M_DONE;
        M_UPD_R1: state <= M_UPD_R2;
        M_UPD_R2: begin
          refine_r <= m_rdata[T-1:0];
          state    <= M_UPD_EX;
        end
        M_UPD_EX: state <= M_UPD_WR;
        M_UPD_WR: begin
          promoted <= promoted + upd_cnt;
          rd_cnt   <= rd_cnt + 1'b1;
          state    <= (rd_cnt + 1'b1 == size_r) ? M_DONE : M_UPD_R1;
        end
        M_DS_RD: begin
          if (rd_cnt != size_r && !ds_out_valid) begin
            rd_cnt     <= rd_cnt + 1'b1;
            rd_pending <= 1'b1;
          end else if (!rd_pending && !ds_out_valid && wr_cnt == (size_r >> 1)) state <= M_DONE;
        end
        M_DONE: begin
          done  <= 1'b1;
          state <= M_IDLE;
        end
        default: state <= M_IDLE;
      endcase
    end
  end
endmodule
