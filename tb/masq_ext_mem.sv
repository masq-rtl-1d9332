// masq_ext_mem - behavioural external memory for the testbenches.
//
// Word-addressed (256-bit words) memory with a valid/ready request port and
// in-order read responses after LAT cycles. req_ready is randomly withheld
// (about one cycle in STALL_PCT percent) to exercise back-pressure. Stands in
// for the LPDDR5 or HBM2E device of a real system; not synthesizable.
module masq_ext_mem #(
  parameter int unsigned WORDS     = 4096,
  parameter int unsigned LAT       = 3,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic         clk,
  input  logic         req_valid,
  output logic         req_ready,
  input  logic         req_we,
  input  logic [31:0]  req_addr,
  input  logic [255:0] req_wdata,
  output logic         rsp_valid,
  output logic [255:0] rsp_data
);
  logic [255:0] mem [WORDS];
  logic         pv [LAT];
  logic [255:0] pd [LAT];
  int           stalls = 0;

  initial begin
    for (int i = 0; i < int'(LAT); i++) begin pv[i] = 0; pd[i] = '0; end
    req_ready = 1;
  end

  always @(posedge clk) begin
    if (req_valid && req_ready) begin
      if (req_we) mem[req_addr % WORDS] <= req_wdata;
    end
    for (int i = int'(LAT) - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= req_valid && req_ready && !req_we;
    pd[0] <= mem[req_addr % WORDS];
    req_ready <= ($urandom % 100) >= STALL_PCT;
    if (!req_ready) stalls++;
  end

  assign rsp_valid = pv[LAT-1];
  assign rsp_data  = pd[LAT-1];
endmodule
