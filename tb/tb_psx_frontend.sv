// tb_psx_frontend: bench of one thread's TFU code registers and offload.
// It issues a PSX instruction sequence (TFULoopStart, kernel instructions,
// loop count and iterations, loop disables, base addresses, strides,
// register strides, TFULoopEnd) for the convolution kernel, captures the
// offload beats with random back-pressure, and compares them with the beats
// the kernel should produce.  It checks the number of beats sent (2 + 4 per
// code register, one per cycle when ready), that the thread stays fenced
// (busy, not ready) until DONE, and the overflow flag on a 33rd
// instruction.
module tb_psx_frontend;
  import psx_pkg::*;
  import tfu_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic iv = 0, ir, ov, ordy = 1, olast, done = 0, busy, ovf;
  dec_instr_t ins;
  logic [OFFLOAD_W-1:0] od;
  logic [OFFLOAD_W-1:0] got[$];
  int cycles_sending = 0;
  psx_frontend dut (.clk, .rst_n, .instr_valid(iv), .instr_ready(ir), .instr(ins),
                    .off_valid(ov), .off_ready(ordy), .off_data(od), .off_last(olast),
                    .tfu_done(done), .busy, .overflow(ovf));
  always @(posedge clk) begin
    if (ov && ordy) got.push_back(od);
    if (ov) cycles_sending++;
  end

  task automatic send(psx_kind_e k, int creg, int loop, int opnd, longint v);
    @(negedge clk);
    ins = '0; ins.psx = 1; ins.kind = k; ins.creg = 5'(creg); ins.loop = 2'(loop);
    ins.opnd = 2'(opnd); ins.value = 64'(v); iv = 1;
    @(posedge clk);
    while (!ir) @(posedge clk);
    #1 iv = 0;
  endtask

  task automatic program_kernel(kernel_hdr_t h, code_entry_t e[$]);
    send(PSX_LOOP_START, 0, 0, 0, 0);
    foreach (e[i])
      send(PSX_CODE, 0, 0, 0, {42'd0, e[i].src2, e[i].src1, e[i].dst, e[i].tail, e[i].op});
    send(PSX_LOOP_COUNT, 0, 0, 0, h.num_loops);
    for (int l = 0; l < 4; l++) send(PSX_LOOP_ITER, 0, l, 0, h.iters[l]);
    foreach (e[i]) begin
      send(PSX_LOOP_DISABLE, i, 0, 0, ~e[i].loop_en & 4'hf);
      send(PSX_BASE_ADDR, i, 0, 0, e[i].base);
      for (int l = 0; l < 4; l++) if (e[i].astride[l] != 0) send(PSX_STRIDE, i, l, 0, e[i].astride[l]);
      for (int o = 0; o < 3; o++) for (int l = 0; l < 4; l++)
        if (e[i].rstride[o][l] != 0) send(PSX_REG_STRIDE, i, l, o, e[i].rstride[o][l]);
    end
  endtask

  initial begin
    kernel_hdr_t h;
    code_entry_t e[$];
    logic [OFFLOAD_W-1:0] exp[$];
    repeat (2) @(posedge clk); rst_n = 1;
    conv_kernel(4, 3, 'h1000, 'h2000, 'h3000, h, e);
    kernel_beats(h, e, exp);
    program_kernel(h, e);
    // offload with no back-pressure: one beat per cycle
    got = {}; cycles_sending = 0;
    send(PSX_LOOP_END, 0, 0, 0, 0);
    repeat (60) @(posedge clk);
    checks++;
    if (got.size() != exp.size()) begin failures++; $display("FAIL: %0d beats, expected %0d", got.size(), exp.size()); end
    else foreach (exp[i]) begin
      checks++; if (got[i] !== exp[i]) begin failures++; $display("FAIL: beat %0d", i); end
    end
    checks++;
    if (cycles_sending != 2 + BEATS_PER_ENTRY * e.size()) begin
      failures++; $display("FAIL: offload took %0d cycles", cycles_sending);
    end
    $display("offload of %0d code registers: %0d cycles", e.size(), cycles_sending);
    // fenced until DONE
    checks++; if (!busy || ir) begin failures++; $display("FAIL: not fenced after offload"); end
    @(negedge clk); done = 1; @(negedge clk); done = 0;
    checks++; if (busy || !ir) begin failures++; $display("FAIL: still fenced after DONE"); end

    // second kernel with random back-pressure
    pool_kernel(7, 'h4000, 'h5000, 'h6000, h, e);
    kernel_beats(h, e, exp);
    program_kernel(h, e);
    got = {};
    fork
      send(PSX_LOOP_END, 0, 0, 0, 0);
      repeat (200) begin @(negedge clk); ordy = $urandom_range(1); end
    join
    ordy = 1;
    repeat (5) @(posedge clk);
    checks++;
    if (got.size() != exp.size()) begin failures++; $display("FAIL: pool beats %0d", got.size()); end
    else foreach (exp[i]) begin
      checks++; if (got[i] !== exp[i]) begin failures++; $display("FAIL: pool beat %0d", i); end
    end
    @(negedge clk); done = 1; @(negedge clk); done = 0;

    // overflow: 33 instructions
    send(PSX_LOOP_START, 0, 0, 0, 0);
    for (int i = 0; i < 32; i++) send(PSX_CODE, 0, 0, 0, 3);
    checks++; if (ovf) begin failures++; $display("FAIL: overflow at 32"); end
    send(PSX_CODE, 0, 0, 0, 3);
    checks++; if (!ovf) begin failures++; $display("FAIL: no overflow at 33"); end
    send(PSX_LOOP_START, 0, 0, 0, 0);
    checks++; if (ovf) begin failures++; $display("FAIL: overflow not cleared"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
