// masq_top_ctrl - top controller: takes host commands and runs the engines.
//
// Commands arrive one at a time over a valid/ready port. SETT is executed here
// (it loads the timestep, the two precision-downgrade timesteps and the mask
// width); every other command is handed to its engine with a one-cycle start
// pulse (DMA, mask manager, GEMM sequencer, quantization sequencer, VPU
// sequencer) and the controller waits for that engine's done pulse before it
// accepts the next command, so engines never compete for a buffer port.
// cmd_done pulses when a command has finished; busy is high while one runs.
// The paper says only that the top controller manages module execution; the
// command set, the in-order one-at-a-time execution and the handshake are this
// design's choices.
module masq_top_ctrl
  import masq_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  masq_cmd_t  cmd,
  output masq_cmd_t  cur,          // command being executed
  output logic       busy,
  output logic       cmd_done,
  // engine starts and completions
  output logic       dma_start,
  input  logic       dma_done,
  output logic       mask_start,
  input  logic       mask_done,
  output logic       gemm_start,
  input  logic       gemm_done,
  output logic       quant_start,
  input  logic       quant_done,
  output logic       vpu_start,
  input  logic       vpu_done,
  // run-time configuration
  output logic [7:0] timestep,
  output logic [7:0] dg1,
  output logic [7:0] dg2,
  output logic [2:0] mask_wlog,
  output logic [31:0] n_cmds        // commands completed since reset
);
  typedef enum logic [1:0] {C_IDLE, C_START, C_WAIT} state_e;
  state_e state;
  logic   eng_done;

  assign cmd_ready = (state == C_IDLE);
  assign busy      = (state != C_IDLE);

  always_comb begin
    dma_start   = (state == C_START) && cur.opcode == CMD_DMA;
    mask_start  = (state == C_START) && cur.opcode == CMD_MASK;
    gemm_start  = (state == C_START) && cur.opcode == CMD_GEMM;
    quant_start = (state == C_START) && cur.opcode == CMD_QUANT;
    vpu_start   = (state == C_START) && cur.opcode == CMD_VPU;
    unique case (cur.opcode)
      CMD_DMA:   eng_done = dma_done;
      CMD_MASK:  eng_done = mask_done;
      CMD_GEMM:  eng_done = gemm_done;
      CMD_QUANT: eng_done = quant_done;
      CMD_VPU:   eng_done = vpu_done;
      default:   eng_done = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= C_IDLE;
      cur       <= '0;
      cmd_done  <= 1'b0;
      timestep  <= '0;
      dg1       <= 8'd9;     // the paper's evaluated downgrade points
      dg2       <= 8'd18;
      mask_wlog <= 3'd6;     // 64 tokens per mask row
      n_cmds    <= '0;
    end else begin
      cmd_done <= 1'b0;
      unique case (state)
        C_IDLE: if (cmd_valid) begin
          cur <= cmd;
          if (cmd.opcode == CMD_SETT) begin
            timestep  <= cmd.ext[7:0];
            dg1       <= cmd.ext[15:8];
            dg2       <= cmd.ext[23:16];
            mask_wlog <= cmd.a0[2:0];
            cmd_done  <= 1'b1;
            n_cmds    <= n_cmds + 1'b1;
          end else if (cmd.opcode == CMD_NOP) begin
            cmd_done  <= 1'b1;
            n_cmds    <= n_cmds + 1'b1;
          end else begin
            state <= C_START;
          end
        end
        C_START: state <= C_WAIT;
        C_WAIT: if (eng_done) begin
          state    <= C_IDLE;
          cmd_done <= 1'b1;
          n_cmds   <= n_cmds + 1'b1;
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
