// tb_tfu_data_rf: bench of the 48 x 64-byte data register file with three
// read and two write ports.  Random writes (never two to one register in a
// cycle) are mirrored in a model array; every cycle all read ports are
// compared with it, including a read of a register being written (old value
// expected).  Also checks reset clears everything.
module tb_tfu_data_rf;
  import psx_pkg::*;
  import tfu_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [2:0][REG_W-1:0] raddr;
  logic [2:0][DATA_W-1:0] rdata;
  logic [1:0] we;
  logic [1:0][REG_W-1:0] waddr;
  logic [1:0][DATA_W-1:0] wdata;
  line_t model [48];
  tfu_data_rf #(.NR(3), .NW(2)) dut (.clk, .rst_n, .raddr, .rdata, .we, .waddr, .wdata);
  initial begin
    foreach (model[i]) model[i] = '0;
    we = '0; waddr = '0; wdata = '0; raddr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 48; i++) begin
      raddr[0] = REG_W'(i); #1;
      checks++; if (rdata[0] !== '0) begin failures++; $display("FAIL: reset reg %0d", i); end
    end
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      we[0] = $urandom_range(1); we[1] = $urandom_range(1);
      waddr[0] = REG_W'($urandom_range(47));
      waddr[1] = REG_W'($urandom_range(47));
      if (waddr[1] == waddr[0]) waddr[1] = REG_W'((int'(waddr[0]) + 1) % 48);
      wdata[0] = rand_line(); wdata[1] = rand_line();
      for (int r = 0; r < 3; r++) raddr[r] = (r == 2) ? waddr[0] : REG_W'($urandom_range(47));
      #1;
      for (int r = 0; r < 3; r++) begin
        checks++;
        if (rdata[r] !== model[raddr[r]]) begin failures++; $display("FAIL: read port %0d t=%0d", r, t); end
      end
      @(posedge clk);
      for (int w = 0; w < 2; w++) if (we[w]) model[waddr[w]] = wdata[w];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
