// tfu_data_rf: the TFU Data Register File, 48 registers of 64 bytes.
//
// The TFU has no register renaming: the unroll scheduler resolves the
// architectural register id of every micro-op, and this file is indexed by
// it directly.  It has NR combinational read ports and NW write ports that
// take effect at the clock edge.  Write ports are served in index order, so
// if two ports name the same register in one cycle the higher-numbered port
// wins (the TFU's hazard checks never let that happen).  A read in the same
// cycle as a write to the same register sees the old value.  Reset clears
// all registers.  The size follows the paper (48 entries); the port counts
// are set by the TFU that uses it.
module tfu_data_rf
  import psx_pkg::*;
#(
  parameter int unsigned NREGS = DATA_REGS,
  parameter int unsigned NR    = 3,
  parameter int unsigned NW    = 2
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [NR-1:0][REG_W-1:0]     raddr,
  output logic [NR-1:0][DATA_W-1:0]    rdata,
  input  logic [NW-1:0]                we,
  input  logic [NW-1:0][REG_W-1:0]     waddr,
  input  logic [NW-1:0][DATA_W-1:0]    wdata
);

  logic [DATA_W-1:0] regs [NREGS];

  always_comb
    for (int r = 0; r < NR; r++)
      rdata[r] = (int'(raddr[r]) < NREGS) ? regs[raddr[r]] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else begin
      for (int w = 0; w < NW; w++)
        if (we[w] && int'(waddr[w]) < NREGS) regs[waddr[w]] <= wdata[w];
    end
  end

endmodule
