// tb_xlat_arb: bench of the arbiter between three translation caches and
// the core's TLB port.  Three requesters raise misses at random and each
// waits for its own response; the TLB model answers with the mapping of
// tfu_tb_pkg::xlate.  Every requester must get the right page back, exactly
// one response per request, with at most one request outstanding at the
// TLB, and the grants must rotate when all three ask at once.
module tb_xlat_arb;
  import psx_pkg::*;
  import tfu_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, served[3], all_three = 0;
  logic [2:0] rv, rr, rsv;
  logic [2:0][VPN_W-1:0] rvpn;
  logic [PPN_W-1:0] rppn;
  logic tv, tr, tsv;
  logic [VPN_W-1:0] tvpn;
  logic [PPN_W-1:0] tppn;
  xlat_arb #(.N(3)) dut (.clk, .rst_n, .req_valid(rv), .req_ready(rr), .req_vpn(rvpn),
                         .rsp_valid(rsv), .rsp_ppn(rppn), .tlb_req_valid(tv), .tlb_req_ready(tr),
                         .tlb_req_vpn(tvpn), .tlb_rsp_valid(tsv), .tlb_rsp_ppn(tppn));
  tlb_model #(.LAT(3)) tlb (.clk, .req_valid(tv), .req_ready(tr), .req_vpn(tvpn), .rsp_valid(tsv), .rsp_ppn(tppn));
  always @(posedge clk) if (rv == 3'b111) all_three++;

  for (genvar k = 0; k < 3; k++) begin : g_req
    initial begin
      rv[k] = 0; rvpn[k] = '0; served[k] = 0;
      wait (rst_n);
      for (int n = 0; n < 20; n++) begin
        logic [VPN_W-1:0] p;
        p = VPN_W'($urandom);
        repeat ($urandom_range(0, 3)) @(posedge clk);
        rv[k] <= 1; rvpn[k] <= p;
        @(posedge clk);
        while (!rr[k]) @(posedge clk);
        rv[k] <= 0;
        @(posedge clk);
        while (!rsv[k]) @(posedge clk);
        checks++;
        if (rppn !== xlate(p)) begin failures++; $display("FAIL: requester %0d got wrong page", k); end
        served[k]++;
      end
    end
  end
  always @(posedge clk) begin
    checks++;
    if ($countones(rsv) > 1) begin failures++; $display("FAIL: two responses at once"); end
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    wait (served[0] == 20 && served[1] == 20 && served[2] == 20);
    checks++;
    if (tlb.requests != 60) begin failures++; $display("FAIL: %0d TLB requests", tlb.requests); end
    checks++;
    if (all_three == 0) begin failures++; $display("FAIL: never three at once"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
