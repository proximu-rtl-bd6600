// tb_tfu_mac: random-vector bench of one 64-byte compute unit.
// Each opcode is checked against the reference semantics in tfu_tb_pkg on
// random operands, plus corner operands (all 0xFF bytes, all 0x80 bytes).
module tb_tfu_mac;
  import psx_pkg::*;
  import tfu_tb_pkg::*;
  int checks = 0, failures = 0;
  tfu_op_e op;
  line_t a, b, acc, res;
  tfu_mac dut (.op, .src1(a), .src2(b), .acc, .res);

  initial begin
    tfu_op_e ops[5] = '{OP_MAC, OP_ZERO, OP_RELU, OP_MAX, OP_NOP};
    for (int t = 0; t < 400; t++) begin
      op  = ops[t % 5];
      a   = (t == 5) ? '1 : (t == 10) ? {64{8'h80}} : rand_line();
      b   = (t == 5) ? {64{8'h80}} : (t == 10) ? '1 : rand_line();
      acc = rand_line();
      #1;
      checks++;
      if (res !== ref_compute(op, a, b, acc)) begin
        failures++;
        $display("FAIL: op %0d vector %0d", op, t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
