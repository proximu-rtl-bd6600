// tb_tfu_tc: bench of the 6-entry translation cache with a behavioural TLB.
// A client looks up pages and waits until they hit; the bench checks the
// physical page returned, counts misses against a model of a 6-entry
// fully associative cache with fill-invalid-first then round-robin
// replacement, and checks that inval_all empties it.
module tb_tfu_tc;
  import psx_pkg::*;
  import tfu_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, misses = 0;
  logic lv = 0, hit, xv, xr, xrv, inval = 0, ms;
  logic [VPN_W-1:0] vpn = '0, xvpn;
  logic [PPN_W-1:0] ppn, xppn;
  tfu_tc dut (.clk, .rst_n, .lookup_valid(lv), .lookup_vpn(vpn), .hit, .ppn,
              .xlat_req_valid(xv), .xlat_req_ready(xr), .xlat_req_vpn(xvpn),
              .xlat_rsp_valid(xrv), .xlat_rsp_ppn(xppn), .inval_all(inval), .miss_start(ms));
  tlb_model tlb (.clk, .req_valid(xv), .req_ready(xr), .req_vpn(xvpn), .rsp_valid(xrv), .rsp_ppn(xppn));
  always @(posedge clk) misses += int'(ms);

  // model
  logic [VPN_W-1:0] mv[6];
  bit mvalid[6];
  int rr = 0;
  function automatic bit mhit(logic [VPN_W-1:0] p);
    for (int i = 0; i < 6; i++) if (mvalid[i] && mv[i] == p) return 1;
    return 0;
  endfunction
  function automatic void mfill(logic [VPN_W-1:0] p);
    for (int i = 0; i < 6; i++) if (!mvalid[i]) begin mvalid[i] = 1; mv[i] = p; return; end
    mv[rr] = p; rr = (rr + 1) % 6;
  endfunction

  task automatic access(logic [VPN_W-1:0] p);
    int m0, cyc;
    bit exp_miss;
    exp_miss = !mhit(p);
    m0 = misses; cyc = 0;
    @(negedge clk); lv = 1; vpn = p; #1;
    while (!hit && cyc < 100) begin @(negedge clk); cyc++; #1; end
    checks++;
    if (!hit || ppn !== xlate(p)) begin failures++; $display("FAIL: translation of %h", p); end
    @(negedge clk); lv = 0;
    if (exp_miss) mfill(p);
    checks++;
    if ((misses - m0) != int'(exp_miss)) begin
      failures++; $display("FAIL: page %h miss=%0d expected %0d", p, misses - m0, exp_miss);
    end
  endtask

  initial begin
    for (int i = 0; i < 6; i++) mvalid[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 6; i++) access(VPN_W'(i * 7 + 1));      // 6 compulsory misses
    for (int i = 0; i < 6; i++) access(VPN_W'(i * 7 + 1));      // 6 hits
    for (int t = 0; t < 300; t++) access(VPN_W'($urandom_range(9)));
    @(negedge clk); inval = 1; @(negedge clk); inval = 0;
    for (int i = 0; i < 6; i++) mvalid[i] = 0;
    rr = rr;  // round-robin pointer is kept across an invalidation
    for (int i = 0; i < 4; i++) access(VPN_W'(i));
    checks++;
    if (tlb.requests != misses) begin failures++; $display("FAIL: TLB requests %0d misses %0d", tlb.requests, misses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
