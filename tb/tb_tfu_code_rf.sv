// tb_tfu_code_rf: bench of the TFU code register file.  Random kernels of
// 1 to 32 code registers are sent as offload beats (with random gaps); after
// `loaded` the header and every entry must match what was sent, and the
// number of beats must be 2 + 4 per entry.  While `busy` is high, off_ready
// must be low.
module tb_tfu_code_rf;
  import psx_pkg::*;
  import tfu_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic busy = 0, ov = 0, ordy, olast = 0, loaded;
  logic [OFFLOAD_W-1:0] od = '0;
  kernel_hdr_t hdr;
  code_entry_t [CODE_REGS-1:0] entries;
  tfu_code_rf dut (.clk, .rst_n, .busy, .off_valid(ov), .off_ready(ordy), .off_data(od), .off_last(olast),
                   .loaded, .hdr, .entries);
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 20; k++) begin
      kernel_hdr_t h;
      code_entry_t e[$];
      logic [OFFLOAD_W-1:0] beats[$];
      int n;
      n = (k == 0) ? 32 : $urandom_range(1, 32);
      h = '0; h.num_loops = 3'($urandom_range(1, 4));
      for (int l = 0; l < 4; l++) h.iters[l] = ITER_W'($urandom);
      h.num_insts = 6'(n);
      e = {};
      for (int i = 0; i < n; i++) begin
        code_entry_t c;
        c = code_entry_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
        e.push_back(c);
      end
      kernel_beats(h, e, beats);
      checks++;
      if (beats.size() != 2 + BEATS_PER_ENTRY * n) begin failures++; $display("FAIL: beat count"); end
      foreach (beats[i]) begin
        @(negedge clk);
        while ($urandom_range(3) == 0) begin ov = 0; @(negedge clk); end
        ov = 1; od = beats[i]; olast = (i == beats.size() - 1);
        @(posedge clk);
      end
      @(negedge clk); ov = 0; olast = 0;
      checks++;
      if (!loaded) begin failures++; $display("FAIL: loaded not pulsed"); end
      checks++;
      if (hdr !== h) begin failures++; $display("FAIL: header kernel %0d", k); end
      for (int i = 0; i < n; i++) begin
        checks++;
        if (entries[i] !== e[i]) begin failures++; $display("FAIL: kernel %0d entry %0d", k, i); end
      end
      busy = 1; #1;
      checks++;
      if (ordy) begin failures++; $display("FAIL: ready while busy"); end
      @(negedge clk); busy = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
