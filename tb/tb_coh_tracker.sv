// tb_coh_tracker: bench of the per-line coherence bit and its snoop gate.
// The bench keeps its own set of owned lines, sets and clears bits through
// fill and eviction events, and makes accesses.  An access to a line it
// owns must raise a snoop for that line and be granted only after the
// acknowledgement (which comes 1 to 5 cycles later), after which the line
// is no longer owned; an access to any other line must be granted at once.
module tb_coh_tracker;
  import psx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, snoops = 0;
  logic sv = 0, cv = 0, av = 0, grant, snv, ack = 0;
  logic [PA_W-1:0] sl = '0, cl = '0, al = '0, snl;
  bit owned [int];
  coh_tracker #(.LINES(1024)) dut (.clk, .rst_n, .set_valid(sv), .set_line(sl), .clr_valid(cv), .clr_line(cl),
                                   .acc_valid(av), .acc_line(al), .acc_grant(grant),
                                   .snoop_valid(snv), .snoop_line(snl), .snoop_ack(ack));
  function automatic logic [PA_W-1:0] la(int i); return PA_W'(i) << 6; endfunction
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      int ln, kind;
      ln = $urandom_range(0, 63); kind = $urandom_range(0, 2);
      @(negedge clk);
      if (kind == 0) begin sv = 1; sl = la(ln); @(negedge clk); sv = 0; owned[ln] = 1; end
      else if (kind == 1) begin cv = 1; cl = la(ln); @(negedge clk); cv = 0; owned.delete(ln); end
      else begin
        int wait_cyc;
        av = 1; al = la(ln) | PA_W'($urandom_range(63)); #1;
        if (owned.exists(ln)) begin
          checks++;
          if (grant) begin failures++; $display("FAIL: owned line %0d granted without snoop", ln); end
          @(negedge clk);
          checks++;
          if (!snv || snl !== la(ln)) begin failures++; $display("FAIL: no snoop for line %0d", ln); end
          wait_cyc = $urandom_range(1, 5);
          repeat (wait_cyc - 1) begin
            @(negedge clk);
            checks++; if (grant) begin failures++; $display("FAIL: granted before ack"); end
          end
          ack = 1; @(negedge clk); ack = 0; #1;
          snoops++;
          owned.delete(ln);
        end
        checks++;
        if (!grant) begin failures++; $display("FAIL: line %0d not granted", ln); end
        @(negedge clk); av = 0;
      end
    end
    checks++;
    if (snoops == 0) begin failures++; $display("FAIL: no snoops"); end
    $display("snoops: %0d", snoops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
