// psx_dispatch: the "Is PSX?" decision at the core's dispatch stage.
//
// Each SMT thread of the core is bound to one TFU (thread 0 and thread 3 to
// the near-L1 TFU, thread 1 to the near-L2 TFU, thread 2 to the near-L3
// TFU).  A decoded instruction carrying the PSX-bit goes to its thread's
// code registers (psx_frontend), which lie on the path to that thread's TFU;
// any other instruction goes on to the core's ordinary functional units.
// The hardware fence: while a thread's TFU is running a kernel
// (thread_busy), a non-PSX instruction of that thread is held, so a thread
// never executes TFU and non-TFU work at the same time; other threads are
// not affected.
//
// Interface: one instruction per cycle on in_valid/in_ready; per-thread
// valid/ready towards the front-ends; other_valid/other_ready towards the
// other units.  `fence_stall` is high in a cycle in which the fence held an
// instruction.  The thread-to-TFU binding and the fence follow the paper;
// the single-instruction-per-cycle port is this design's simplification.
module psx_dispatch
  import psx_pkg::*;
#(
  parameter int unsigned NT = NUM_THREADS
) (
  input  logic              in_valid,
  output logic              in_ready,
  input  dec_instr_t        in_instr,
  output logic [NT-1:0]     psx_valid,
  input  logic [NT-1:0]     psx_ready,
  output dec_instr_t        psx_instr,
  output logic              other_valid,
  input  logic              other_ready,
  output dec_instr_t        other_instr,
  input  logic [NT-1:0]     thread_busy,
  output logic              fence_stall
);

  always_comb begin
    psx_valid   = '0;
    psx_instr   = in_instr;
    other_instr = in_instr;
    other_valid = 1'b0;
    fence_stall = 1'b0;
    in_ready    = 1'b0;
    if (in_valid) begin
      if (in_instr.psx) begin
        psx_valid[in_instr.thread] = 1'b1;
        in_ready = psx_ready[in_instr.thread];
      end else if (thread_busy[in_instr.thread]) begin
        fence_stall = 1'b1;
      end else begin
        other_valid = 1'b1;
        in_ready    = other_ready;
      end
    end
  end

endmodule
