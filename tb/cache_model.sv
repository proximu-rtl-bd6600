// cache_model: behavioural stand-in for a cache seen from a TFU's port.
//
// Not synthesizable; testbench only.  It accepts one 64-byte access per
// cycle when ready (ready drops at random, about one cycle in STALL_PCT
// percent, to exercise back-pressure), applies stores at once and returns
// load data LAT cycles later in request order.  Contents live in an
// associative array keyed by physical line number; unwritten lines read 0.
// The bench reads and writes the contents through the `mem` member.
module cache_model
  import psx_pkg::*;
#(
  parameter int unsigned LAT       = 4,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic               clk,
  input  logic               req_valid,
  output logic               req_ready,
  input  logic               req_we,
  input  logic [PA_W-1:0]    req_addr,
  input  logic [DATA_W-1:0]  req_wdata,
  output logic               rsp_valid,
  output logic [DATA_W-1:0]  rsp_data
);
  logic [DATA_W-1:0] mem [longint];
  logic [DATA_W-1:0] pipe_d [LAT];
  logic              pipe_v [LAT];
  int                accesses = 0;

  initial begin
    req_ready = 1'b1;
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 1'b0; pipe_d[i] = '0; end
  end

  assign rsp_valid = pipe_v[LAT-1];
  assign rsp_data  = pipe_d[LAT-1];

  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin pipe_v[i] <= pipe_v[i-1]; pipe_d[i] <= pipe_d[i-1]; end
    pipe_v[0] <= 1'b0;
    if (req_valid && req_ready) begin
      longint ln;
      accesses++;
      ln = longint'(req_addr >> 6);
      if (req_we) mem[ln] = req_wdata;
      else begin
        pipe_v[0] <= 1'b1;
        pipe_d[0] <= mem.exists(ln) ? mem[ln] : '0;
      end
    end
    req_ready <= ($urandom_range(99) >= STALL_PCT);
  end
endmodule
