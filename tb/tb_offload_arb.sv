// tb_offload_arb: bench of the sharing of the L1 TFU between threads 0 and 3.
// Both threads send kernels of random lengths at random times.  A small TFU
// stand-in accepts beats with random readiness and signals DONE some cycles
// after a last beat.  The bench checks that beats of the two threads never
// interleave within a kernel, every beat arrives in order, DONE goes back
// only to the thread whose kernel finished, and that both threads had to
// wait for each other at least once.
module tb_offload_arb;
  import psx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, contention = 0;
  logic [1:0] rv, rr, rl, rd;
  logic [1:0][OFFLOAD_W-1:0] rdat;
  logic ov, ordy, ol, tdone;
  logic [OFFLOAD_W-1:0] od;
  int kernels_done[2];
  offload_arb dut (.clk, .rst_n, .req_valid(rv), .req_ready(rr), .req_data(rdat), .req_last(rl),
                   .req_done(rd), .off_valid(ov), .off_ready(ordy), .off_data(od), .off_last(ol),
                   .tfu_done(tdone));

  // TFU stand-in
  int cur_owner = -1, done_timer = -1;
  int exp_owner_of_done = -1;
  initial begin ordy = 1; tdone = 0; end
  always @(posedge clk) begin
    tdone <= 0;
    if (ov && ordy) begin
      int who;
      who = int'(od[63]);
      checks++;
      if (cur_owner != -1 && who != cur_owner) begin failures++; $display("FAIL: interleaved beats"); end
      cur_owner <= who;
      if (ol) begin done_timer <= 5; exp_owner_of_done <= who; end
    end
    if (done_timer == 0) begin tdone <= 1; done_timer <= -1; end
    else if (done_timer > 0) done_timer <= done_timer - 1;
    if (tdone) cur_owner <= -1;
    ordy <= $urandom_range(3) != 0;
    if (rv == 2'b11 && rr != 2'b11) contention++;
  end

  // thread k sends kernels; beat = {k, seq}
  for (genvar k = 0; k < 2; k++) begin : g_src
    initial begin
      rv[k] = 0; rl[k] = 0; rdat[k] = '0; kernels_done[k] = 0;
      wait (rst_n);
      for (int n = 0; n < 8; n++) begin
        int len;
        len = $urandom_range(2, 10);
        repeat ($urandom_range(0, 6)) @(posedge clk);
        for (int b = 0; b < len; b++) begin
          rv[k] <= 1; rdat[k] <= {1'(k), 31'd0, 32'(n * 100 + b)}; rl[k] <= (b == len - 1);
          @(posedge clk);
          while (!rr[k]) @(posedge clk);
        end
        rv[k] <= 0; rl[k] <= 0;
        @(posedge clk);
        while (!rd[k]) @(posedge clk);
        kernels_done[k]++;
      end
    end
  end
  always @(posedge clk) begin
    if (rd != 0) begin
      checks++;
      if (rd != (2'b01 << exp_owner_of_done)) begin failures++; $display("FAIL: DONE routed to wrong thread"); end
    end
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    wait (kernels_done[0] == 8 && kernels_done[1] == 8);
    checks++;
    if (contention == 0) begin failures++; $display("FAIL: no contention seen"); end
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
