// tb_tfu: end-to-end bench of one TFU with two MAC units.
//
// A behavioural cache and TLB sit on the TFU's ports.  The bench offloads a
// convolution-like kernel (NO=6 outputs, K=5 channel blocks, inputs all
// loaded into one register so load hoisting meets real register hazards),
// waits for DONE, and compares every output line with the instruction-level
// reference model.  Then it invalidates the translation cache and runs a
// max-pooling kernel the same way.  It checks the number of cache accesses,
// that DONE comes once per kernel, and that load hoisting, hazard stalls,
// full issue queues and TC misses all happened.
module tb_tfu;
  import psx_pkg::*;
  import tfu_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                 off_valid = 0, off_ready, off_last = 0, done, busy;
  logic [OFFLOAD_W-1:0] off_data = '0;
  logic                 mrv, mrr, mwe, rspv;
  logic [PA_W-1:0]      maddr;
  logic [DATA_W-1:0]    mwd, rspd;
  logic                 xv, xr, xrv, inval = 0;
  logic [VPN_W-1:0]     xvpn;
  logic [PPN_W-1:0]     xppn;
  logic ev_h, ev_s, ev_q, ev_t;
  logic [1:0] ev_m;
  int n_hoist = 0, n_stall = 0, n_full = 0, n_miss = 0, n_done = 0, n_comp = 0;

  tfu #(.NMAC(2)) dut (
    .clk, .rst_n, .off_valid, .off_ready, .off_data, .off_last, .done, .busy,
    .mem_req_valid(mrv), .mem_req_ready(mrr), .mem_req_we(mwe), .mem_req_addr(maddr),
    .mem_req_wdata(mwd), .mem_rsp_valid(rspv), .mem_rsp_data(rspd),
    .xlat_req_valid(xv), .xlat_req_ready(xr), .xlat_req_vpn(xvpn),
    .xlat_rsp_valid(xrv), .xlat_rsp_ppn(xppn), .inval_all(inval),
    .ev_load_hoist(ev_h), .ev_hazard_stall(ev_s), .ev_iq_full(ev_q), .ev_tc_miss(ev_t),
    .ev_mac_issued(ev_m)
  );
  cache_model cache (.clk, .req_valid(mrv), .req_ready(mrr), .req_we(mwe), .req_addr(maddr),
                     .req_wdata(mwd), .rsp_valid(rspv), .rsp_data(rspd));
  tlb_model tlb (.clk, .req_valid(xv), .req_ready(xr), .req_vpn(xvpn), .rsp_valid(xrv), .rsp_ppn(xppn));

  always @(posedge clk) begin
    n_hoist += int'(ev_h); n_stall += int'(ev_s); n_full += int'(ev_q);
    n_miss += int'(ev_t); n_done += int'(done); n_comp += int'(ev_m);
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic offload(kernel_hdr_t h, code_entry_t e[$]);
    logic [OFFLOAD_W-1:0] beats[$];
    kernel_beats(h, e, beats);
    foreach (beats[i]) begin
      off_valid <= 1; off_data <= beats[i]; off_last <= (i == beats.size() - 1);
      @(posedge clk);
      while (!off_ready) @(posedge clk);
    end
    off_valid <= 0; off_last <= 0;
  endtask

  task automatic run_and_check(kernel_hdr_t h, code_entry_t e[$], ref_tfu m,
                               longint obase, int nout, string name);
    int acc0, d0, cyc;
    acc0 = cache.accesses; d0 = n_done;
    // preload cache contents from the reference model's memory
    foreach (m.mem[vl]) cache.mem[longint'(va2pa(VA_W'(vl << 6)) >> 6)] = m.mem[vl];
    m.n_load = 0; m.n_store = 0;
    m.run(h, e);
    offload(h, e);
    cyc = 0;
    while (!done && cyc < 20000) begin @(posedge clk); cyc++; end
    @(posedge clk);
    check(cyc < 20000, {name, ": DONE seen"});
    check(n_done == d0 + 1, {name, ": one DONE"});
    check(!busy, {name, ": idle after DONE"});
    for (int n = 0; n < nout; n++) begin
      longint va, pl;
      va = obase + 64 * n;
      pl = longint'(va2pa(VA_W'(va)) >> 6);
      check(cache.mem.exists(pl) && cache.mem[pl] == m.mem[va >> 6],
            $sformatf("%s: output line %0d", name, n));
    end
    check(cache.accesses - acc0 == m.n_load + m.n_store,
          $sformatf("%s: %0d cache accesses, expected %0d", name, cache.accesses - acc0,
                    m.n_load + m.n_store));
    $display("%s: %0d cycles, %0d loads, %0d stores", name, cyc, m.n_load, m.n_store);
  endtask

  initial begin
    kernel_hdr_t h;
    code_entry_t e[$];
    ref_tfu m;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // ---- convolution-like kernel ----
    m = new();
    for (int i = 0; i < 5; i++) m.mem[(64'h10000 >> 6) + i] = rand_line();
    for (int i = 0; i < 30; i++) m.mem[(64'h22000 >> 6) + i] = rand_line();
    conv_kernel(6, 5, 64'h10000, 64'h22000, 64'h31000, h, e);
    run_and_check(h, e, m, 64'h31000, 6, "conv");

    // ---- invalidate TC, then a pooling kernel ----
    inval <= 1; @(posedge clk); inval <= 0;
    m = new();
    for (int i = 0; i < 12; i++) begin
      m.mem[(64'h40000 >> 6) + i] = rand_line();
      m.mem[(64'h50000 >> 6) + i] = rand_line();
    end
    pool_kernel(12, 64'h40000, 64'h50000, 64'h60000, h, e);
    begin int miss0; miss0 = n_miss;
      run_and_check(h, e, m, 64'h60000, 12, "pool");
      check(n_miss > miss0, "TC refilled after invalidation");
    end

    check(n_hoist > 0, "loads hoisted above older compute");
    check(n_stall > 0, "register hazard stalls");
    check(n_full > 0,  "issue queue full back-pressure");
    check(n_miss > 0,  "translation cache misses");
    check(tlb.requests == n_miss, "every TC miss reached the TLB once");
    $display("events: hoist=%0d stall=%0d iqfull=%0d tcmiss=%0d compute=%0d", n_hoist, n_stall,
             n_full, n_miss, n_comp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
