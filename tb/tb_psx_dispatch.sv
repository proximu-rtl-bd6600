// tb_psx_dispatch: bench of the "Is PSX?" steering and the fence.
// Random instructions of random threads with random busy flags and ready
// signals; for each one the bench works out where it must go (the thread's
// front-end, the other units, or held by the fence) and checks every
// output.  Fence stalls and both routes must all occur.
module tb_psx_dispatch;
  import psx_pkg::*;
  int checks = 0, failures = 0, n_fence = 0, n_psx = 0, n_other = 0;
  logic iv, ir, ov, ordy, fs;
  dec_instr_t ii, pi, oi;
  logic [3:0] pv, prdy, tb;
  psx_dispatch dut (.in_valid(iv), .in_ready(ir), .in_instr(ii), .psx_valid(pv), .psx_ready(prdy),
                    .psx_instr(pi), .other_valid(ov), .other_ready(ordy), .other_instr(oi),
                    .thread_busy(tb), .fence_stall(fs));
  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic [3:0] epv;
      logic eov, eir, efs;
      iv = $urandom_range(3) != 0;
      ii = dec_instr_t'({$urandom, $urandom, $urandom});
      prdy = 4'($urandom); ordy = $urandom_range(1); tb = 4'($urandom);
      #1;
      epv = '0; eov = 0; eir = 0; efs = 0;
      if (iv && ii.psx) begin epv[ii.thread] = 1; eir = prdy[ii.thread]; n_psx++; end
      else if (iv && tb[ii.thread]) begin efs = 1; n_fence++; end
      else if (iv) begin eov = 1; eir = ordy; n_other++; end
      checks++;
      if (pv !== epv || ov !== eov || ir !== eir || fs !== efs ||
          (eov && oi !== ii) || (|epv && pi !== ii)) begin
        failures++; $display("FAIL: vector %0d", t);
      end
    end
    checks++;
    if (n_fence == 0 || n_psx == 0 || n_other == 0) begin failures++; $display("FAIL: coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
