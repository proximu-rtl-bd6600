// tb_tfu_issue_queue: bench of the 8-entry in-order issue queue with four
// push and two pop slots.  Random push/pop counts within the legal range
// are applied; a SystemVerilog queue is the model.  Every cycle count, free
// and every visible entry (oldest first) are compared, so order, capacity
// and the full/empty limits are all checked.  Full queues occur often.
module tb_tfu_issue_queue;
  import psx_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, fulls = 0;
  logic [2:0] push_n;
  uop_t [3:0] push;
  logic [1:0] pop_n;
  uop_t [7:0] q;
  logic [3:0] count, free;
  uop_t model[$];
  logic [SEQ_W-1:0] tag = '0;
  tfu_issue_queue #(.PUSH_W(4), .POP_W(2)) dut (.clk, .rst_n, .push_n, .push, .pop_n, .q, .count, .free);
  initial begin
    push_n = '0; pop_n = '0; push = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      checks++;
      if (int'(count) != model.size() || int'(free) != 8 - model.size()) begin
        failures++; $display("FAIL: count %0d vs %0d", count, model.size());
      end
      for (int i = 0; i < model.size(); i++) begin
        checks++;
        if (q[i] !== model[i]) begin failures++; $display("FAIL: entry %0d t=%0d", i, t); end
      end
      if (model.size() == 8) fulls++;

      pop_n  = 2'($urandom_range((model.size() < 2) ? model.size() : 2));
      push_n = 3'($urandom_range((8 - model.size() < 4) ? 8 - model.size() : 4));
      for (int j = 0; j < 4; j++) begin
        push[j] = '0;
        push[j].seq = tag + SEQ_W'(j);
        push[j].dst = REG_W'($urandom);
        push[j].base = VA_W'($urandom);
      end
      @(posedge clk);
      for (int k = 0; k < int'(pop_n); k++) void'(model.pop_front());
      for (int j = 0; j < int'(push_n); j++) model.push_back(push[j]);
      tag = tag + SEQ_W'(push_n);
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL: queue never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
