// tb_tfu_agu: random-vector bench of the address generation unit.
// va must equal base + sum idx[l]*stride[l] (signed strides) modulo 2^48,
// computed here with 64-bit integers.
module tb_tfu_agu;
  import psx_pkg::*;
  int checks = 0, failures = 0;
  logic [VA_W-1:0] base, va;
  logic [NUM_LOOPS-1:0][ASTRIDE_W-1:0] astride;
  logic [NUM_LOOPS-1:0][ITER_W-1:0] idx;
  tfu_agu dut (.base, .astride, .idx, .va);
  initial begin
    for (int t = 0; t < 500; t++) begin
      longint exp;
      base = {$urandom, $urandom};
      for (int l = 0; l < NUM_LOOPS; l++) begin
        astride[l] = (t % 2) ? $urandom : ASTRIDE_W'($signed($urandom_range(4096)) - 2048);
        idx[l] = ITER_W'($urandom);
      end
      #1;
      exp = longint'(base);
      for (int l = 0; l < NUM_LOOPS; l++) exp += longint'(idx[l]) * longint'($signed(astride[l]));
      checks++;
      if (va !== VA_W'(exp)) begin failures++; $display("FAIL: vector %0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
