// tb_tfu_workloads: DNN-layer kernels on one near-L2 TFU (one MAC unit, the
// P256 near-L2 configuration), each checked against arithmetic done directly
// in the bench on plain integer arrays, not on cache lines.
//
//   inner product (fully connected layer, batch 1), y = ReLU(W x):
//     NG groups of 16 output neurons, K blocks of 4 input bytes.  The input
//     is laid out VNNI-style: line xb[k] holds x[4k..4k+3] repeated in all
//     16 lanes, line Wl[g][k] holds, in lane j, the 4 weights of neuron
//     16g+j for those inputs.  Six code registers: ZERO, LOAD xb[k] (outside
//     the group loop), LOAD Wl[g][k], MAC, RELU and STORE after the last k.
//     Loop 0 runs over the groups g, loop 1 over k.  The weight load
//     rotates its register with g (r20+g) so that loads run ahead of the
//     MACs instead of waiting for the previous MAC to free r20.
//   concat (as between dense blocks): two tensors copied back to back into
//     one output buffer by two LOAD/STORE kernels (registers rotate, r1+n).
//     Each store still waits at the head of the in-order load/store queue
//     for its own load's data, so a copy runs at about one line per cache
//     latency; the bench reports the cycles.
//
// Sizes are scaled down from real layers; they change only loop counts.
// The bench checks every output value, the number of cache accesses, and
// DONE once per kernel.
module tb_tfu_workloads;
  import psx_pkg::*;
  import tfu_tb_pkg::*;

  localparam int NG = 12;   // output neuron groups of 16 -> 192 neurons
  localparam int K  = 16;   // input blocks of 4 bytes    -> 64 inputs
  localparam int NA = 20;   // concat: lines of the first tensor
  localparam int NB = 13;   // concat: lines of the second tensor

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                 off_valid = 0, off_ready, off_last = 0, done, busy;
  logic [OFFLOAD_W-1:0] off_data = '0;
  logic                 mrv, mrr, mwe, rspv;
  logic [PA_W-1:0]      maddr;
  logic [DATA_W-1:0]    mwd, rspd;
  logic                 xv, xr, xrv;
  logic [VPN_W-1:0]     xvpn;
  logic [PPN_W-1:0]     xppn;
  logic ev_h, ev_s, ev_q, ev_t, ev_m;
  int n_done = 0;

  tfu dut (
    .clk, .rst_n, .off_valid, .off_ready, .off_data, .off_last, .done, .busy,
    .mem_req_valid(mrv), .mem_req_ready(mrr), .mem_req_we(mwe), .mem_req_addr(maddr),
    .mem_req_wdata(mwd), .mem_rsp_valid(rspv), .mem_rsp_data(rspd),
    .xlat_req_valid(xv), .xlat_req_ready(xr), .xlat_req_vpn(xvpn),
    .xlat_rsp_valid(xrv), .xlat_rsp_ppn(xppn), .inval_all(1'b0),
    .ev_load_hoist(ev_h), .ev_hazard_stall(ev_s), .ev_iq_full(ev_q), .ev_tc_miss(ev_t),
    .ev_mac_issued(ev_m)
  );
  cache_model #(.LAT(10)) cache (.clk, .req_valid(mrv), .req_ready(mrr), .req_we(mwe), .req_addr(maddr),
                                 .req_wdata(mwd), .rsp_valid(rspv), .rsp_data(rspd));
  tlb_model tlb (.clk, .req_valid(xv), .req_ready(xr), .req_vpn(xvpn), .rsp_valid(xrv), .rsp_ppn(xppn));

  always @(posedge clk) if (rst_n) n_done += int'(done);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint pline(longint va);
    return longint'(va2pa(VA_W'(va)) >> 6);
  endfunction

  task automatic run(kernel_hdr_t h, code_entry_t e[$], int accesses, string name);
    logic [OFFLOAD_W-1:0] beats[$];
    int acc0, d0, cyc;
    acc0 = cache.accesses; d0 = n_done;
    kernel_beats(h, e, beats);
    foreach (beats[i]) begin
      off_valid <= 1; off_data <= beats[i]; off_last <= (i == beats.size() - 1);
      @(posedge clk);
      while (!off_ready) @(posedge clk);
    end
    off_valid <= 0; off_last <= 0;
    cyc = 0;
    while (!done && cyc < 50000) begin @(posedge clk); cyc++; end
    @(posedge clk);
    check(cyc < 50000 && n_done == d0 + 1, {name, ": one DONE"});
    check(cache.accesses - acc0 == accesses,
          $sformatf("%s: %0d cache accesses, expected %0d", name, cache.accesses - acc0, accesses));
    $display("%s: %0d cycles", name, cyc);
  endtask

  initial begin
    kernel_hdr_t h;
    code_entry_t e[$], c;
    byte unsigned x [4*K];
    byte          w [16*NG][4*K];
    line_t        l;
    longint       XB, WB, YB, AB, BB, OB;

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // ================= inner product =================
    XB = 64'h100000; WB = 64'h110000; YB = 64'h130000;
    foreach (x[i]) x[i] = 8'($urandom);
    foreach (w[n, i]) w[n][i] = 8'($urandom);
    for (int k = 0; k < K; k++) begin
      for (int j = 0; j < 16; j++) for (int b = 0; b < 4; b++) l[8*(4*j+b) +: 8] = x[4*k+b];
      cache.mem[pline(XB + 64 * k)] = l;
    end
    for (int g = 0; g < NG; g++) for (int k = 0; k < K; k++) begin
      for (int j = 0; j < 16; j++) for (int b = 0; b < 4; b++) l[8*(4*j+b) +: 8] = w[16*g+j][4*k+b];
      cache.mem[pline(WB + 64 * (g * K + k))] = l;
    end
    e = {};
    h = '0; h.num_loops = 3'd2; h.iters[0] = ITER_W'(NG); h.iters[1] = ITER_W'(K);
    c = mk(OP_ZERO, 0, 0, 0, 0, 4'b0001, 0);  c.rstride[0][0] = 4'd1; e.push_back(c);
    c = mk(OP_LOAD, 40, 0, 0, 0, 4'b0010, XB); c.astride[1] = 64; e.push_back(c);
    c = mk(OP_LOAD, 20, 0, 0, 0, 4'b0011, WB); c.astride[0] = 64 * K; c.astride[1] = 64; c.rstride[0][0] = 4'd1; e.push_back(c);
    c = mk(OP_MAC, 0, 40, 20, 0, 4'b0011, 0); c.rstride[0][0] = 4'd1; c.rstride[2][0] = 4'd1; e.push_back(c);
    c = mk(OP_RELU, 0, 0, 0, 1, 4'b0001, 0);  c.rstride[0][0] = 4'd1; c.rstride[1][0] = 4'd1; e.push_back(c);
    c = mk(OP_STORE, 0, 0, 0, 1, 4'b0001, YB); c.rstride[1][0] = 4'd1; c.astride[0] = 64; e.push_back(c);
    h.num_insts = (CODE_IDX_W+1)'(e.size());
    run(h, e, K + NG * K + NG, "inner product");
    for (int n = 0; n < 16 * NG; n++) begin
      int y;
      longint pl;
      y = 0;
      for (int i = 0; i < 4 * K; i++) y += int'(x[i]) * int'(w[n][i]);
      if (y < 0) y = 0;
      pl = pline(YB + 64 * (n / 16));
      check(cache.mem.exists(pl) && int'($signed(cache.mem[pl][32*(n%16) +: 32])) == y,
            $sformatf("inner product: neuron %0d = %0d", n, y));
    end

    // ================= concat =================
    AB = 64'h200000; BB = 64'h210000; OB = 64'h220000;
    for (int i = 0; i < NA; i++) cache.mem[pline(AB + 64 * i)] = rand_line();
    for (int i = 0; i < NB; i++) cache.mem[pline(BB + 64 * i)] = rand_line();
    for (int part = 0; part < 2; part++) begin
      int n;
      longint src, dst;
      n   = part ? NB : NA;
      src = part ? BB : AB;
      dst = part ? OB + 64 * NA : OB;
      e = {};
      h = '0; h.num_loops = 3'd1; h.iters[0] = ITER_W'(n);
      c = mk(OP_LOAD, 1, 0, 0, 0, 4'b0001, src); c.astride[0] = 64; c.rstride[0][0] = 4'd1; e.push_back(c);
      c = mk(OP_STORE, 0, 1, 0, 0, 4'b0001, dst); c.astride[0] = 64; c.rstride[1][0] = 4'd1; e.push_back(c);
      h.num_insts = (CODE_IDX_W+1)'(e.size());
      run(h, e, 2 * n, part ? "concat B" : "concat A");
    end
    for (int i = 0; i < NA + NB; i++) begin
      longint s;
      s = (i < NA) ? pline(AB + 64 * i) : pline(BB + 64 * (i - NA));
      check(cache.mem.exists(pline(OB + 64 * i)) && cache.mem[pline(OB + 64 * i)] == cache.mem[s],
            $sformatf("concat: output line %0d", i));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
