// dram_model: behavioural model of the DRAM devices behind one buffer chip, for testbenches.
// Line-granular memory (sparse), one request per cycle when ready, reads answered in order after
// a fixed latency. `ready` drops on a random fraction of cycles to model bank and refresh timing.
// Requests in the first two clock edges are ignored: the controller's registers may hold random
// power-up values until its reset has been applied on the first edge.
module dram_model #(
  parameter int DATA_W = 1024,
  parameter int LAT = 20,
  parameter int BUSY_PCT = 10
) (
  input  logic              clk,
  input  logic              req_valid,
  input  logic              req_we,
  input  logic [31:0]       req_addr,
  input  logic [DATA_W-1:0] req_wdata,
  output logic              req_ready,
  output logic              rsp_valid,
  output logic [DATA_W-1:0] rsp_data
);
  logic [DATA_W-1:0] mem [logic [31:0]];
  logic [DATA_W-1:0] pipe_d [LAT];
  logic              pipe_v [LAT];
  logic [1:0]        age = '0;
  wire               live = (age == 2'd2);
  initial begin
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 0; pipe_d[i] = '0; end
    req_ready = 1;
  end
  assign rsp_valid = pipe_v[LAT-1];
  assign rsp_data = pipe_d[LAT-1];
  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin pipe_v[i] <= pipe_v[i-1]; pipe_d[i] <= pipe_d[i-1]; end
    if (!live) age <= age + 2'd1;
    pipe_v[0] <= live && req_valid && req_ready && !req_we;
    pipe_d[0] <= mem.exists(req_addr) ? mem[req_addr] : '0;
    if (live && req_valid && req_ready && req_we) mem[req_addr] = req_wdata;
  end
  always @(negedge clk) req_ready = int'($urandom % 100) >= BUSY_PCT;
endmodule
