// tlb_model: behavioural stand-in for the core's TLB and page walker.
//
// Not synthesizable; testbench only.  It accepts a translation request
// (valid/ready, always ready) and answers LAT cycles later with the mapping
// of tfu_tb_pkg::xlate.  One request at a time.  `requests` counts them.
module tlb_model
  import psx_pkg::*;
#(
  parameter int unsigned LAT = 6
) (
  input  logic               clk,
  input  logic               req_valid,
  output logic               req_ready,
  input  logic [VPN_W-1:0]   req_vpn,
  output logic               rsp_valid,
  output logic [PPN_W-1:0]   rsp_ppn
);
  int             requests = 0;
  int             timer = -1;
  logic [VPN_W-1:0] vpn_q;

  assign req_ready = (timer < 0);
  initial begin rsp_valid = 1'b0; rsp_ppn = '0; vpn_q = '0; end

  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (req_valid && req_ready) begin
      requests++;
      vpn_q <= req_vpn;
      timer <= LAT;
    end else if (timer == 0) begin
      rsp_valid <= 1'b1;
      rsp_ppn   <= tfu_tb_pkg::xlate(vpn_q);
      timer     <= -1;
    end else if (timer > 0) begin
      timer <= timer - 1;
    end
  end
endmodule
