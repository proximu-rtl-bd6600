// tb_tfu_unroller: bench of the unroll scheduler.  The micro-op streams it
// pushes into the two queues are collected and compared, micro-op by
// micro-op, with streams produced from the kernel by a direct walk of the
// loop nest written here.  Queue space is limited at random to exercise
// back-pressure.  Kernels: the convolution and pooling kernels, and a random
// four-loop kernel with random loop enables, tail bits and strides.  Also
// checks the age tags increase by one per micro-op across both queues, and
// that `finished` pulses once.
module tb_tfu_unroller;
  import psx_pkg::*;
  import tfu_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, stalls = 0, fin = 0;
  logic start = 0, busy, finished, stalled;
  kernel_hdr_t hdr;
  code_entry_t [CODE_REGS-1:0] entries;
  logic [3:0] ls_free, cq_free;
  logic [2:0] ls_n, cq_n;
  uop_t [3:0] ls_push, cq_push;
  uop_t got_ls[$], got_cq[$];
  tfu_unroller dut (.clk, .rst_n, .start, .hdr, .entries, .ls_free, .cq_free,
                    .ls_push_n(ls_n), .ls_push, .cq_push_n(cq_n), .cq_push, .busy, .finished, .stalled);
  always @(posedge clk) begin
    for (int j = 0; j < int'(ls_n); j++) got_ls.push_back(ls_push[j]);
    for (int j = 0; j < int'(cq_n); j++) got_cq.push_back(cq_push[j]);
    stalls += int'(stalled); fin += int'(finished);
    ls_free <= 4'($urandom_range(8)); cq_free <= 4'($urandom_range(8));
  end

  task automatic run(kernel_hdr_t h, code_entry_t e[$]);
    uop_t exp_ls[$], exp_cq[$];
    int cnt[4];
    int f0, seq;
    for (int l = 0; l < 4; l++) cnt[l] = (l < int'(h.num_loops) && h.iters[l] != 0) ? int'(h.iters[l]) : 1;
    for (int i3 = 0; i3 < cnt[3]; i3++) for (int i2 = 0; i2 < cnt[2]; i2++)
    for (int i1 = 0; i1 < cnt[1]; i1++) for (int i0 = 0; i0 < cnt[0]; i0++)
      for (int p = 0; p < int'(h.num_insts); p++) begin
        int ix[4];
        bit act;
        uop_t u;
        ix = '{i0, i1, i2, i3};
        act = e[p].op != OP_NOP;
        for (int l = 0; l < 4; l++)
          if (!(e[p].loop_en[l] && l < int'(h.num_loops)) && ix[l] != (e[p].tail ? cnt[l] - 1 : 0)) act = 0;
        if (!act) continue;
        u = '0; u.op = e[p].op; u.base = e[p].base; u.astride = e[p].astride;
        for (int l = 0; l < 4; l++) u.idx[l] = ITER_W'(ix[l]);
        begin
          int r0, r1, r2;
          r0 = int'(e[p].dst); r1 = int'(e[p].src1); r2 = int'(e[p].src2);
          for (int l = 0; l < 4; l++) begin
            r0 += ix[l] * int'($signed(e[p].rstride[0][l]));
            r1 += ix[l] * int'($signed(e[p].rstride[1][l]));
            r2 += ix[l] * int'($signed(e[p].rstride[2][l]));
          end
          u.dst = REG_W'(r0 & 63); u.src1 = REG_W'(r1 & 63); u.src2 = REG_W'(r2 & 63);
        end
        if (is_mem_op(e[p].op)) exp_ls.push_back(u); else exp_cq.push_back(u);
      end
    got_ls = {}; got_cq = {};
    hdr = h; entries = '0;
    foreach (e[i]) entries[i] = e[i];
    f0 = fin;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    @(negedge clk);
    checks++;
    if (fin != f0 + 1) begin failures++; $display("FAIL: finished pulses"); end
    checks++;
    if (got_ls.size() != exp_ls.size() || got_cq.size() != exp_cq.size()) begin
      failures++; $display("FAIL: counts ls %0d/%0d cq %0d/%0d", got_ls.size(), exp_ls.size(), got_cq.size(), exp_cq.size());
    end else begin
      uop_t all[$];
      foreach (exp_ls[i]) begin
        uop_t g; g = got_ls[i]; all.push_back(g); g.seq = '0;
        checks++; if (g !== exp_ls[i]) begin failures++; $display("FAIL: ls uop %0d", i); end
      end
      foreach (exp_cq[i]) begin
        uop_t g; g = got_cq[i]; all.push_back(g); g.seq = '0;
        checks++; if (g !== exp_cq[i]) begin failures++; $display("FAIL: cq uop %0d", i); end
      end
      // tags: the union of both streams must be consecutive
      begin
        bit seen [int];
        int base;
        base = int'(all.size() > 0 ? got_ls.size() > 0 && got_cq.size() > 0 ?
                    ((seq_older(got_ls[0].seq, got_cq[0].seq)) ? got_ls[0].seq : got_cq[0].seq)
                    : (got_ls.size() > 0 ? got_ls[0].seq : got_cq[0].seq) : 0);
        foreach (all[i]) seen[int'(SEQ_W'(all[i].seq - SEQ_W'(base)))] = 1;
        checks++;
        if (all.size() <= 64 && seen.num() != all.size()) begin failures++; $display("FAIL: tags"); end
      end
    end
  endtask

  initial begin
    kernel_hdr_t h;
    code_entry_t e[$];
    ls_free = 8; cq_free = 8;
    repeat (2) @(posedge clk); rst_n = 1;
    conv_kernel(4, 3, 'h1000, 'h2000, 'h3000, h, e);
    run(h, e);
    pool_kernel(9, 'h1000, 'h2000, 'h3000, h, e);
    run(h, e);
    for (int k = 0; k < 6; k++) begin
      h = '0; h.num_loops = 3'($urandom_range(1, 4));
      for (int l = 0; l < 4; l++) h.iters[l] = ITER_W'($urandom_range(0, 3));
      e = {};
      for (int i = 0; i < 5; i++) begin
        code_entry_t c;
        c = '0;
        c.op = tfu_op_e'($urandom_range(0, 6));
        c.tail = $urandom_range(1); c.loop_en = 4'($urandom);
        c.dst = 6'($urandom); c.src1 = 6'($urandom); c.src2 = 6'($urandom);
        c.base = VA_W'($urandom);
        for (int l = 0; l < 4; l++) begin
          c.astride[l] = $urandom;
          for (int o = 0; o < 3; o++) c.rstride[o][l] = 4'($urandom);
        end
        e.push_back(c);
      end
      h.num_insts = 6'(e.size());
      run(h, e);
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL: no back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
