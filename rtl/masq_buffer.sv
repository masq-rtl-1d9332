// masq_buffer - one on-chip SRAM buffer with a DMA port and a compute port.
//
// DEPTH entries of WIDTH bits. Port A serves the DMA and moves one 256-bit word
// (word index a_word within entry a_addr; the last word of an entry may be
// partly unused). Port B serves the datapath and reads or writes whole entries.
// Both ports read with one cycle of latency into a register that holds its
// value until the port's next read. If both ports write the same entry in one
// cycle, port B's write is applied last. The unused bits of a partial last
// word always read as zero. MASQ's activation, weight, output,
// vector and mask memories are all instances of this module; the paper gives
// their names and their 2 MiB total, while the two-port organisation, entry
// widths and word interface are this design's. It is written as a plain array;
// a product build would map it onto SRAM macros.
module masq_buffer #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WW    = 256,
  localparam int unsigned NW   = (WIDTH + WW - 1) / WW,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned WIW  = (NW > 1) ? $clog2(NW) : 1
) (
  input  logic             clk,
  // port A: DMA, word granular
  input  logic             a_en,
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIW-1:0]   a_word,
  input  logic [WW-1:0]    a_wdata,
  output logic [WW-1:0]    a_rdata,
  // port B: datapath, whole entries
  input  logic             b_en,
  input  logic             b_we,
  input  logic [AW-1:0]    b_addr,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] b_rdata
);
  localparam logic [NW*WW-1:0] VALID = {WIDTH{1'b1}};

  logic [NW*WW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr][a_word*WW +: WW] <= a_wdata;
      else      a_rdata <= mem[a_addr][a_word*WW +: WW] & VALID[a_word*WW +: WW];
    end
    if (b_en) begin
      if (b_we) mem[b_addr][WIDTH-1:0] <= b_wdata;
      else      b_rdata <= mem[b_addr][WIDTH-1:0];
    end
  end
endmodule
