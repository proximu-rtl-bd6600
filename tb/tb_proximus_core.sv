// tb_proximus_core: end-to-end bench of one core's near-cache compute, at
// the default (P256) parameters.
//
// Behavioural caches sit on the three TFU ports and a behavioural TLB on the
// translation port; small responders acknowledge snoops into the L1 and into
// the near-L3 reserved ways.  All work enters as decoded instructions, as
// the core's dispatch stage would see them:
//   thread 1 programs a convolution-like kernel for the near-L2 TFU, after
//     the L1 has been told it owns some of the kernel's input lines;
//   thread 2 programs a max-pooling kernel for the near-L3 TFU;
//   thread 0 and thread 3 both program kernels for the near-L1 TFU, so the
//     second waits for the first;
//   non-PSX instructions of busy threads arrive meanwhile and must wait for
//     the fence; those of idle threads pass to the other units;
//   thread 0 first overflows its code registers with 33 instructions;
//   the translation caches are invalidated between kernels, and the
//     near-L2 kernel is run a second time after an invalidation: pages it
//     used before must be translated again;
//   after the near-L3 kernel, core-side requests to its lines must snoop the
//     reserved ways first.
// Every output line is compared with the instruction-level reference model.
// Each mechanism is counted and must occur at least once.
module tb_proximus_core;
  import psx_pkg::*;
  import tfu_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, other_valid, other_ready = 1;
  dec_instr_t in_instr = '0, other_instr;
  logic [2:0] mrv, mrr, mwe, rspv;
  logic [2:0][PA_W-1:0] maddr;
  logic [2:0][DATA_W-1:0] mwd, rspd;
  logic tv, tr, tsv, inval = 0;
  logic [VPN_W-1:0] tvpn;
  logic [PPN_W-1:0] tppn;
  logic l1f = 0, l1e = 0, l1sv, l1sa = 0;
  logic [PA_W-1:0] l1fl = '0, l1el = '0, l1sl;
  logic l3v = 0, l3g, l3sv, l3sa = 0;
  logic [PA_W-1:0] l3l = '0, l3sl;
  logic [3:0] tbusy, ovf;
  logic [2:0] tdone, tfbusy, e_hoist, e_stall, e_full, e_miss;
  logic e_fence;
  logic [2:0][2:0] e_comp;

  proximus_core dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_instr, .other_valid, .other_ready, .other_instr,
    .mem_req_valid(mrv), .mem_req_ready(mrr), .mem_req_we(mwe), .mem_req_addr(maddr),
    .mem_req_wdata(mwd), .mem_rsp_valid(rspv), .mem_rsp_data(rspd),
    .tlb_req_valid(tv), .tlb_req_ready(tr), .tlb_req_vpn(tvpn), .tlb_rsp_valid(tsv), .tlb_rsp_ppn(tppn),
    .inval_all(inval),
    .l1_fill_valid(l1f), .l1_fill_line(l1fl), .l1_evict_valid(l1e), .l1_evict_line(l1el),
    .l1_snoop_valid(l1sv), .l1_snoop_line(l1sl), .l1_snoop_ack(l1sa),
    .l3_core_req_valid(l3v), .l3_core_req_line(l3l), .l3_core_req_grant(l3g),
    .l3_part_snoop_valid(l3sv), .l3_part_snoop_line(l3sl), .l3_part_snoop_ack(l3sa),
    .thread_busy(tbusy), .code_overflow(ovf), .tfu_done(tdone), .tfu_busy(tfbusy),
    .ev_fence_stall(e_fence), .ev_load_hoist(e_hoist), .ev_hazard_stall(e_stall),
    .ev_iq_full(e_full), .ev_tc_miss(e_miss), .ev_compute_issued(e_comp)
  );

  for (genvar v = 0; v < 3; v++) begin : g_cache
    cache_model #(.LAT(2 + 4 * v)) cache (.clk, .req_valid(mrv[v]), .req_ready(mrr[v]), .req_we(mwe[v]),
      .req_addr(maddr[v]), .req_wdata(mwd[v]), .rsp_valid(rspv[v]), .rsp_data(rspd[v]));
  end
  tlb_model tlb (.clk, .req_valid(tv), .req_ready(tr), .req_vpn(tvpn), .rsp_valid(tsv), .rsp_ppn(tppn));

  // snoop responders: acknowledge 3 cycles after a snoop appears
  int l1_snoops = 0, l3_snoops = 0, l1_wait = 0, l3_wait = 0;
  always @(posedge clk) begin
    l1sa <= 0; l3sa <= 0;
    if (l1sv && !l1sa) begin
      l1_wait++;
      if (l1_wait == 3) begin l1sa <= 1; l1_wait = 0; l1_snoops++; end
    end
    if (l3sv && !l3sa) begin
      l3_wait++;
      if (l3_wait == 3) begin l3sa <= 1; l3_wait = 0; l3_snoops++; end
    end
  end

  // mechanism counters
  int n_fence = 0, n_hoist = 0, n_stall = 0, n_full = 0, n_miss = 0, n_other = 0, n_mac_l1_dual = 0;
  int n_done[3], n_miss_v[3];
  initial begin n_done = '{0, 0, 0}; n_miss_v = '{0, 0, 0}; end
  always @(posedge clk) if (rst_n) begin
    n_fence += int'(e_fence);
    for (int v = 0; v < 3; v++) begin
      n_hoist += int'(e_hoist[v]); n_stall += int'(e_stall[v]);
      n_full += int'(e_full[v]); n_miss += int'(e_miss[v]); n_done[v] += int'(tdone[v]);
      n_miss_v[v] += int'(e_miss[v]);
    end
    n_other += int'(other_valid && other_ready);
    n_mac_l1_dual += int'(e_comp[0] == 3'd2);
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic issue(int thread, bit psx, psx_kind_e k, int creg, int loop, int opnd, longint v);
    in_instr <= '0;
    @(negedge clk);
    in_instr.psx = psx; in_instr.thread = 2'(thread); in_instr.kind = k;
    in_instr.creg = 5'(creg); in_instr.loop = 2'(loop); in_instr.opnd = 2'(opnd); in_instr.value = 64'(v);
    in_valid = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask

  task automatic program_kernel(int th, kernel_hdr_t h, code_entry_t e[$]);
    issue(th, 1, PSX_LOOP_START, 0, 0, 0, 0);
    foreach (e[i]) issue(th, 1, PSX_CODE, 0, 0, 0, {42'd0, e[i].src2, e[i].src1, e[i].dst, e[i].tail, e[i].op});
    issue(th, 1, PSX_LOOP_COUNT, 0, 0, 0, h.num_loops);
    for (int l = 0; l < 4; l++) issue(th, 1, PSX_LOOP_ITER, 0, l, 0, h.iters[l]);
    foreach (e[i]) begin
      issue(th, 1, PSX_LOOP_DISABLE, i, 0, 0, ~e[i].loop_en & 4'hf);
      issue(th, 1, PSX_BASE_ADDR, i, 0, 0, e[i].base);
      for (int l = 0; l < 4; l++) if (e[i].astride[l] != 0) issue(th, 1, PSX_STRIDE, i, l, 0, e[i].astride[l]);
      for (int o = 0; o < 3; o++) for (int l = 0; l < 4; l++)
        if (e[i].rstride[o][l] != 0) issue(th, 1, PSX_REG_STRIDE, i, l, o, e[i].rstride[o][l]);
    end
  endtask

  function automatic void preload(int v, ref_tfu m);
    foreach (m.mem[vl]) begin
      longint pl;
      pl = longint'(va2pa(VA_W'(vl << 6)) >> 6);
      case (v)
        0: g_cache[0].cache.mem[pl] = m.mem[vl];
        1: g_cache[1].cache.mem[pl] = m.mem[vl];
        default: g_cache[2].cache.mem[pl] = m.mem[vl];
      endcase
    end
  endfunction

  function automatic bit out_ok(int v, ref_tfu m, longint obase, int n);
    longint pl;
    logic [DATA_W-1:0] got;
    pl = longint'(va2pa(VA_W'(obase + 64 * n)) >> 6);
    case (v)
      0: got = g_cache[0].cache.mem.exists(pl) ? g_cache[0].cache.mem[pl] : 'x;
      1: got = g_cache[1].cache.mem.exists(pl) ? g_cache[1].cache.mem[pl] : 'x;
      default: got = g_cache[2].cache.mem.exists(pl) ? g_cache[2].cache.mem[pl] : 'x;
    endcase
    return got === m.mem[(obase + 64 * n) >> 6];
  endfunction

  initial begin
    kernel_hdr_t h1, h2, h0, h3;
    code_entry_t e1[$], e2[$], e0[$], e3[$];
    ref_tfu m1, m2, m0, m3;
    int t0, cyc, tlb0;

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    tlb0 = tlb.requests;   // requests seen before reset came from random power-up state

    // ---- code register overflow on thread 0, then a clean start ----
    issue(0, 1, PSX_LOOP_START, 0, 0, 0, 0);
    for (int i = 0; i < 33; i++) issue(0, 1, PSX_CODE, 0, 0, 0, 3);
    check(ovf[0], "thread 0 code register overflow flagged");

    // ---- data and reference results ----
    m1 = new();
    for (int i = 0; i < 4; i++)  m1.mem[(64'h100000 >> 6) + i] = rand_line();
    for (int i = 0; i < 32; i++) m1.mem[(64'h110000 >> 6) + i] = rand_line();
    conv_kernel(8, 4, 64'h100000, 64'h110000, 64'h120000, h1, e1);
    preload(1, m1); m1.run(h1, e1);

    m2 = new();
    for (int i = 0; i < 16; i++) begin
      m2.mem[(64'h200000 >> 6) + i] = rand_line();
      m2.mem[(64'h210000 >> 6) + i] = rand_line();
    end
    pool_kernel(16, 64'h200000, 64'h210000, 64'h220000, h2, e2);
    preload(2, m2); m2.run(h2, e2);

    m0 = new();
    for (int i = 0; i < 6; i++)  m0.mem[(64'h300000 >> 6) + i] = rand_line();
    for (int i = 0; i < 60; i++) m0.mem[(64'h310000 >> 6) + i] = rand_line();
    conv_kernel(10, 6, 64'h300000, 64'h310000, 64'h320000, h0, e0);
    preload(0, m0); m0.run(h0, e0);

    m3 = new();
    for (int i = 0; i < 8; i++) begin
      m3.mem[(64'h400000 >> 6) + i] = rand_line();
      m3.mem[(64'h410000 >> 6) + i] = rand_line();
    end
    pool_kernel(8, 64'h400000, 64'h410000, 64'h420000, h3, e3);
    preload(0, m3); m3.run(h3, e3);

    // ---- the L1 owns some of the near-L2 kernel's input lines ----
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); l1f = 1; l1fl = va2pa(VA_W'(64'h110000 + 64 * 3 * i));
    end
    @(negedge clk); l1f = 0;

    t0 = $time;
    // ---- thread 1 -> near-L2 TFU ----
    program_kernel(1, h1, e1);
    issue(1, 1, PSX_LOOP_END, 0, 0, 0, 0);
    // ---- non-PSX work: idle thread 2 passes, busy thread 1 is fenced ----
    issue(2, 0, PSX_CODE, 0, 0, 0, 0);
    issue(1, 0, PSX_CODE, 0, 0, 0, 0);   // waits for the near-L2 TFU's DONE
    check(n_done[1] == 1, "thread 1's non-PSX instruction passed only after its TFU finished");
    // ---- translation caches invalidated (e.g. TLB shootdown) ----
    @(negedge clk); inval = 1; @(negedge clk); inval = 0;
    // ---- thread 2 -> near-L3 TFU ----
    program_kernel(2, h2, e2);
    issue(2, 1, PSX_LOOP_END, 0, 0, 0, 0);
    // ---- threads 0 and 3 -> near-L1 TFU ----
    program_kernel(0, h0, e0);
    program_kernel(3, h3, e3);
    issue(0, 1, PSX_LOOP_END, 0, 0, 0, 0);
    issue(3, 1, PSX_LOOP_END, 0, 0, 0, 0);
    check(tbusy[3] && tbusy[0], "threads 0 and 3 both waiting on the near-L1 TFU");
    cyc = 0;
    while ((n_done[0] < 2 || n_done[2] < 1) && cyc < 50000) begin @(posedge clk); cyc++; end
    repeat (2) @(posedge clk);
    check(cyc < 50000, "all kernels finished");
    check(tbusy == 4'b0000, "no thread fenced at the end");
    $display("all kernels done after %0d cycles", ($time - t0) / 10);

    // ---- results ----
    for (int n = 0; n < 8; n++)  check(out_ok(1, m1, 64'h120000, n), $sformatf("near-L2 conv output %0d", n));
    for (int n = 0; n < 16; n++) check(out_ok(2, m2, 64'h220000, n), $sformatf("near-L3 pool output %0d", n));
    for (int n = 0; n < 10; n++) check(out_ok(0, m0, 64'h320000, n), $sformatf("near-L1 conv output %0d", n));
    for (int n = 0; n < 8; n++)  check(out_ok(0, m3, 64'h420000, n), $sformatf("near-L1 pool output %0d", n));

    // ---- the near-L2 kernel again: its three pages would all hit in the TC,
    //      but the invalidation in between must force fresh translations ----
    begin
      int miss_before;
      miss_before = n_miss_v[1];
      @(negedge clk); inval = 1; @(negedge clk); inval = 0;
      program_kernel(1, h1, e1);
      issue(1, 1, PSX_LOOP_END, 0, 0, 0, 0);
      cyc = 0;
      while (n_done[1] < 2 && cyc < 20000) begin @(posedge clk); cyc++; end
      check(n_miss_v[1] - miss_before == 3, $sformatf("re-translation after invalidation (%0d misses)", n_miss_v[1] - miss_before));
      for (int n = 0; n < 8; n++) check(out_ok(1, m1, 64'h120000, n), $sformatf("near-L2 conv rerun output %0d", n));
    end

    // ---- core-side requests to lines held by the near-L3 TFU ----
    for (int i = 0; i < 3; i++) begin
      int w;
      @(negedge clk); l3v = 1; l3l = va2pa(VA_W'(64'h200000 + 64 * i)); w = 0;
      #1;
      while (!l3g && w < 100) begin @(negedge clk); w++; #1; end
      check(l3g, "core request to the L3 slice granted");
      @(negedge clk); l3v = 0;
    end
    @(negedge clk); l3v = 1; l3l = 48'h7777_0000; #1;
    check(l3g, "core request to a line the TFU never touched granted at once");
    @(negedge clk); l3v = 0;

    // ---- mechanisms ----
    check(n_done[1] == 2 && n_done[2] == 1 && n_done[0] == 2, "DONE once per kernel");
    check(n_fence > 0,       "fence held non-PSX work of a busy thread");
    check(n_other == 2,      "non-PSX instructions reached the other units");
    check(l1_snoops == 4,    "near-L2 accesses snooped each L1-owned line once");
    check(l3_snoops == 3,    "core requests snooped the near-L3 reserved ways");
    check(n_hoist > 0,       "loads hoisted above compute");
    check(n_stall > 0,       "register hazard stalls");
    check(n_full > 0,        "issue queue back-pressure");
    check(n_miss > 0,        "translation cache misses");
    check(tlb.requests - tlb0 == n_miss, "TC misses reached the core TLB");
    check(n_mac_l1_dual > 0, "near-L1 TFU issued two compute ops in one cycle");
    $display("events: fence=%0d hoist=%0d hazard=%0d iqfull=%0d tcmiss=%0d l1snoop=%0d l3snoop=%0d dualissue=%0d",
             n_fence, n_hoist, n_stall, n_full, n_miss, l1_snoops, l3_snoops, n_mac_l1_dual);
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
