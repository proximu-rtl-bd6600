// xlat_arb: sends the Translation Cache misses of several TFUs to the one
// TLB / page-walker port of the core.
//
// Each TFU's TC raises a valid/ready translation request with a virtual
// page number and later expects one response.  The arbiter grants one
// requester at a time in round-robin order, forwards its request, and then
// stays locked to it until the core's response arrives, which it returns to
// that requester only.  So at most one TC miss is outstanding at the core,
// which matches the paper's view that TC misses are rare (about 10%) and put
// no real pressure on the core's TLBs.  The round-robin policy and the
// one-outstanding limit are this design's choices.
module xlat_arb
  import psx_pkg::*;
#(
  parameter int unsigned N = 3
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [N-1:0]             req_valid,
  output logic [N-1:0]             req_ready,
  input  logic [N-1:0][VPN_W-1:0]  req_vpn,
  output logic [N-1:0]             rsp_valid,
  output logic [PPN_W-1:0]         rsp_ppn,
  output logic                     tlb_req_valid,
  input  logic                     tlb_req_ready,
  output logic [VPN_W-1:0]         tlb_req_vpn,
  input  logic                     tlb_rsp_valid,
  input  logic [PPN_W-1:0]         tlb_rsp_ppn
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic          busy;
  logic [IW-1:0] cur, last, pick;
  logic          any;

  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int k = 1; k <= N; k++) begin
      int unsigned c;
      c = (32'(last) + k) % N;
      if (!any && req_valid[c]) begin any = 1'b1; pick = IW'(c); end
    end
  end

  assign tlb_req_valid = !busy && any;
  assign tlb_req_vpn   = req_vpn[pick];
  assign rsp_ppn       = tlb_rsp_ppn;

  always_comb begin
    req_ready = '0;
    if (!busy && any) req_ready[pick] = tlb_req_ready;
    rsp_valid = '0;
    if (busy) rsp_valid[cur] = tlb_rsp_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cur  <= '0;
      last <= IW'(N-1);
    end else begin
      if (!busy && any && tlb_req_ready) begin
        busy <= 1'b1;
        cur  <= pick;
        last <= pick;
      end else if (busy && tlb_rsp_valid) begin
        busy <= 1'b0;
      end
    end
  end

endmodule
