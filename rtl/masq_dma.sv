// masq_dma - moves 256-bit words between external memory and an on-chip buffer.
//
// A transfer is started with a direction, a buffer entry address, an external
// word address, a word count and the number of words per entry of the target
// buffer (wpe); words are walked through entry by entry, word 0 first.
// Loads keep issuing read requests while the memory accepts them and write each
// in-order response into the buffer, so a memory that accepts a request per
// cycle streams one word per cycle. Stores read a word from the buffer, then
// hold a write request until it is accepted (two cycles per word or more).
// The paper states only that the DMA transfers data between on-chip and
// external memory; the request/response memory port (valid/ready request,
// in-order read responses, no back-pressure on responses) and everything else
// here are this design's choices. done pulses one cycle after the last word.
module masq_dma #(
  parameter int unsigned WW  = 256,
  parameter int unsigned AW  = 16,     // buffer entry address width
  parameter int unsigned WIW = 11      // word-in-entry index width
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            store,        // 0: external -> buffer, 1: buffer -> external
  input  logic [AW-1:0]   buf_addr,
  input  logic [31:0]     ext_addr,
  input  logic [19:0]     nwords,
  input  logic [WIW-1:0]  wpe,          // words per buffer entry
  output logic            busy,
  output logic            done,
  // buffer port (word granular)
  output logic            m_en,
  output logic            m_we,
  output logic [AW-1:0]   m_addr,
  output logic [WIW-1:0]  m_word,
  output logic [WW-1:0]   m_wdata,
  input  logic [WW-1:0]   m_rdata,
  // external memory
  output logic            req_valid,
  input  logic            req_ready,
  output logic            req_we,
  output logic [31:0]     req_addr,
  output logic [WW-1:0]   req_wdata,
  input  logic            rsp_valid,
  input  logic [WW-1:0]   rsp_data
);
  typedef enum logic [2:0] {D_IDLE, D_LOAD, D_SRD, D_SREQ, D_DONE} state_e;
  state_e state;

  logic [19:0]    issued, moved, total;
  logic [AW-1:0]  ent;
  logic [WIW-1:0] wrd, wpe_r;
  logic [31:0]    ext_base;
  logic           is_store;

  assign busy = (state != D_IDLE);

  always_comb begin
    m_en      = 1'b0;
    m_we      = 1'b0;
    m_addr    = ent;
    m_word    = wrd;
    m_wdata   = rsp_data;
    req_valid = 1'b0;
    req_we    = is_store;
    req_addr  = ext_base + 32'(is_store ? moved : issued);
    req_wdata = m_rdata;
    unique case (state)
      D_LOAD: begin
        req_valid = (issued != total);
        m_en      = rsp_valid;
        m_we      = 1'b1;
      end
      D_SRD:  m_en = 1'b1;
      D_SREQ: req_valid = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= D_IDLE;
      issued   <= '0;
      moved    <= '0;
      total    <= '0;
      ent      <= '0;
      wrd      <= '0;
      wpe_r    <= '0;
      ext_base <= '0;
      is_store <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        D_IDLE: if (start) begin
          issued   <= '0;
          moved    <= '0;
          total    <= nwords;
          ent      <= buf_addr;
          wrd      <= '0;
          wpe_r    <= wpe;
          ext_base <= ext_addr;
          is_store <= store;
          state    <= (nwords == 0) ? D_DONE : (store ? D_SRD : D_LOAD);
        end
        D_LOAD: begin
          if (req_valid && req_ready) issued <= issued + 1'b1;
          if (rsp_valid) begin
            moved <= moved + 1'b1;
            if (wrd + 1'b1 == wpe_r) begin wrd <= '0; ent <= ent + 1'b1; end
            else wrd <= wrd + 1'b1;
            if (moved + 1'b1 == total) state <= D_DONE;
          end
        end
        D_SRD: state <= D_SREQ;
        D_SREQ: if (req_ready) begin
          moved <= moved + 1'b1;
          if (wrd + 1'b1 == wpe_r) begin wrd <= '0; ent <= ent + 1'b1; end
          else wrd <= wrd + 1'b1;
          state <= (moved + 1'b1 == total) ? D_DONE : D_SRD;
        end
        D_DONE: begin
          done  <= 1'b1;
          state <= D_IDLE;
        end
        default: state <= D_IDLE;
      endcase
    end
  end
endmodule
