// offload_arb: shares one TFU's offload (DISPATCH) bus between two SMT
// threads.
//
// In the 4-way SMT core, thread 0 and thread 3 are both bound to the
// near-L1 TFU.  The first thread to present an offload beat becomes the
// owner (thread 0 on a tie) and keeps the bus until the TFU signals DONE for
// that kernel; only then can the other thread's kernel go in.  DONE is
// returned only to the owner.  A combinational path connects the owner's
// valid/data/last to the TFU and the TFU's ready back to the owner; the
// other requester sees ready low.  Ownership is decided in the same cycle as
// the first beat and recorded at the clock edge.
//
// The sharing of the L1 TFU by two threads follows the paper's SMT binding;
// the fixed-priority-then-lock arbitration is this design's choice.
module offload_arb
  import psx_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [1:0]                  req_valid,
  output logic [1:0]                  req_ready,
  input  logic [1:0][OFFLOAD_W-1:0]   req_data,
  input  logic [1:0]                  req_last,
  output logic [1:0]                  req_done,
  output logic                        off_valid,
  input  logic                        off_ready,
  output logic [OFFLOAD_W-1:0]        off_data,
  output logic                        off_last,
  input  logic                        tfu_done
);

  logic locked, owner, sel;

  always_comb begin
    if (locked)            sel = owner;
    else if (req_valid[0]) sel = 1'b0;
    else                   sel = req_valid[1];
  end

  assign off_valid = req_valid[sel];
  assign off_data  = req_data[sel];
  assign off_last  = req_last[sel];

  always_comb begin
    req_ready      = '0;
    req_ready[sel] = off_ready;
    req_done       = '0;
    req_done[owner] = tfu_done && locked;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0;
      owner  <= 1'b0;
    end else begin
      if (!locked && off_valid) begin
        locked <= 1'b1;
        owner  <= sel;
      end else if (locked && tfu_done) begin
        locked <= 1'b0;
      end
    end
  end

endmodule
