// tfu_tb_pkg: testbench helpers shared by the TFU and top-level benches.
//
// It holds an instruction-level reference model of a TFU kernel, written
// straight from the kernel semantics and independent of the RTL: the loop
// nest is walked one point at a time, code registers in program order, each
// instruction executed completely before the next (no queues, no hazards).
// It also builds the small kernels the benches run, and defines the page
// mapping the benches' TLB models use.
package tfu_tb_pkg;
  import psx_pkg::*;

  typedef logic [DATA_W-1:0] line_t;

  // Page mapping used by every TLB model: physical page = virtual page + 0x300.
  function automatic logic [PPN_W-1:0] xlate(logic [VPN_W-1:0] vpn);
    return PPN_W'(vpn) + PPN_W'(32'h300);
  endfunction

  function automatic logic [PA_W-1:0] va2pa(logic [VA_W-1:0] va);
    return {xlate(va[VA_W-1:PAGE_BITS]), va[PAGE_BITS-1:0]};
  endfunction

  // Reference semantics of the compute opcodes.
  function automatic line_t ref_compute(tfu_op_e op, line_t a, line_t b, line_t acc);
    line_t r;
    r = acc;
    case (op)
      OP_MAC:
        for (int j = 0; j < 16; j++) begin
          int s;
          s = int'($signed(acc[32*j +: 32]));
          for (int k = 0; k < 4; k++)
            s += int'(a[8*(4*j+k) +: 8]) * int'($signed(b[8*(4*j+k) +: 8]));
          r[32*j +: 32] = s;
        end
      OP_ZERO: r = '0;
      OP_RELU:
        for (int j = 0; j < 16; j++) begin
          int v;
          v = int'($signed(a[32*j +: 32]));
          r[32*j +: 32] = (v < 0) ? 0 : v;
        end
      OP_MAX:
        for (int b8 = 0; b8 < 64; b8++) begin
          int x, y;
          x = int'($signed(a[8*b8 +: 8]));
          y = int'($signed(b[8*b8 +: 8]));
          r[8*b8 +: 8] = (x > y) ? a[8*b8 +: 8] : b[8*b8 +: 8];
        end
      default: r = acc;
    endcase
    return r;
  endfunction

  class ref_tfu;
    line_t mem [longint];    // keyed by virtual line number
    line_t regs [64];
    int    n_mac, n_load, n_store;

    function new();
      foreach (regs[i]) regs[i] = '0;
      n_mac = 0; n_load = 0; n_store = 0;
    endfunction

    function line_t rd(longint va_line);
      if (mem.exists(va_line)) return mem[va_line];
      return '0;
    endfunction

    function void run(kernel_hdr_t h, code_entry_t e[$]);
      int cnt[4];
      int ix[4];
      int total;
      for (int l = 0; l < 4; l++)
        cnt[l] = (l < int'(h.num_loops) && h.iters[l] != 0) ? int'(h.iters[l]) : 1;
      total = cnt[0] * cnt[1] * cnt[2] * cnt[3];
      for (int t = 0; t < total; t++) begin
        int rem;
        rem = t;
        for (int l = 0; l < 4; l++) begin ix[l] = rem % cnt[l]; rem = rem / cnt[l]; end
        for (int p = 0; p < int'(h.num_insts); p++) begin
          bit act;
          int rid[3];
          longint va;
          act = (e[p].op != OP_NOP);
          for (int l = 0; l < 4; l++) begin
            bit inl;
            inl = e[p].loop_en[l] && (l < int'(h.num_loops));
            if (!inl && ix[l] != (e[p].tail ? cnt[l] - 1 : 0)) act = 0;
          end
          if (!act) continue;
          for (int o = 0; o < 3; o++) begin
            int r;
            r = (o == 0) ? int'(e[p].dst) : (o == 1) ? int'(e[p].src1) : int'(e[p].src2);
            for (int l = 0; l < 4; l++) r += ix[l] * int'($signed(e[p].rstride[o][l]));
            rid[o] = r & 63;
          end
          va = longint'(e[p].base);
          for (int l = 0; l < 4; l++) va += longint'(ix[l]) * longint'($signed(e[p].astride[l]));
          va = va & ((longint'(1) << VA_W) - 1);
          case (e[p].op)
            OP_LOAD:  begin regs[rid[0]] = rd(va >> 6); n_load++; end
            OP_STORE: begin mem[va >> 6] = regs[rid[1]]; n_store++; end
            default: begin
              regs[rid[0]] = ref_compute(e[p].op, regs[rid[1]], regs[rid[2]], regs[rid[0]]);
              if (e[p].op == OP_MAC) n_mac++;
            end
          endcase
        end
      end
    endfunction
  endclass

  function automatic code_entry_t mk(tfu_op_e op, int dst, int s1, int s2, bit tail,
                                     logic [3:0] loop_en, longint base);
    code_entry_t c;
    c = '0;
    c.op = op; c.dst = REG_W'(dst); c.src1 = REG_W'(s1); c.src2 = REG_W'(s2);
    c.tail = tail; c.loop_en = loop_en; c.base = VA_W'(base);
    return c;
  endfunction

  // A 1x1-convolution-like kernel: loop 0 runs over NO output vectors, loop 1
  // over K input-channel blocks.  Weights are loaded once per k (outside loop
  // 0) into one register; every input vector is loaded into the same register
  // r20, so the loads can only be hoisted as far as the register hazards
  // allow.  Outputs accumulate in r0..r(NO-1), get a ReLU and are stored after
  // the last k.
  function automatic void conv_kernel(int NO, int K, longint wbase, longint xbase, longint obase,
                                      output kernel_hdr_t h, output code_entry_t e[$]);
    code_entry_t c;
    e = {};
    h = '0;
    h.num_loops = 3'd2;
    h.iters[0]  = ITER_W'(NO);
    h.iters[1]  = ITER_W'(K);
    c = mk(OP_ZERO, 0, 0, 0, 0, 4'b0001, 0);  c.rstride[0][0] = 4'd1; e.push_back(c);
    c = mk(OP_LOAD, 40, 0, 0, 0, 4'b0010, wbase); c.astride[1] = 64; e.push_back(c);
    c = mk(OP_LOAD, 20, 0, 0, 0, 4'b0011, xbase); c.astride[0] = 64 * K; c.astride[1] = 64; e.push_back(c);
    c = mk(OP_MAC, 0, 20, 40, 0, 4'b0011, 0); c.rstride[0][0] = 4'd1; e.push_back(c);
    c = mk(OP_RELU, 0, 0, 0, 1, 4'b0001, 0);  c.rstride[0][0] = 4'd1; c.rstride[1][0] = 4'd1; e.push_back(c);
    c = mk(OP_STORE, 0, 0, 0, 1, 4'b0001, obase); c.rstride[1][0] = 4'd1; c.astride[0] = 64; e.push_back(c);
    h.num_insts = (CODE_IDX_W+1)'(e.size());
  endfunction

  // A max-pooling-like kernel: out[n] = max(a[n], b[n]) over loop 0 (N).
  function automatic void pool_kernel(int N, longint abase, longint bbase, longint obase,
                                      output kernel_hdr_t h, output code_entry_t e[$]);
    code_entry_t c;
    e = {};
    h = '0;
    h.num_loops = 3'd1;
    h.iters[0]  = ITER_W'(N);
    c = mk(OP_LOAD, 1, 0, 0, 0, 4'b0001, abase); c.astride[0] = 64; e.push_back(c);
    c = mk(OP_LOAD, 2, 0, 0, 0, 4'b0001, bbase); c.astride[0] = 64; e.push_back(c);
    c = mk(OP_MAX, 3, 1, 2, 0, 4'b0001, 0); e.push_back(c);
    c = mk(OP_STORE, 0, 3, 0, 0, 4'b0001, obase); c.astride[0] = 64; e.push_back(c);
    h.num_insts = (CODE_IDX_W+1)'(e.size());
  endfunction

  function automatic line_t rand_line();
    line_t r;
    for (int i = 0; i < DATA_W / 32; i++) r[32*i +: 32] = $urandom;
    return r;
  endfunction

  // Offload beats of a kernel, in the layout of tfu_code_rf.
  function automatic void kernel_beats(kernel_hdr_t h, code_entry_t e[$],
                                       output logic [OFFLOAD_W-1:0] beats[$]);
    logic [BEATS_PER_ENTRY*OFFLOAD_W-1:0] b;
    beats = {};
    beats.push_back(OFFLOAD_W'(h.iters));
    beats.push_back(OFFLOAD_W'({h.num_insts, h.num_loops}));
    foreach (e[i]) begin
      b = (BEATS_PER_ENTRY*OFFLOAD_W)'(e[i]);
      for (int k = 0; k < BEATS_PER_ENTRY; k++) beats.push_back(b[k*OFFLOAD_W +: OFFLOAD_W]);
    end
  endfunction

endpackage
