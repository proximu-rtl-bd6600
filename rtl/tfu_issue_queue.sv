// tfu_issue_queue: one of the TFU's two in-order issue queues (8 entries).
//
// The TFU has one queue for loads and stores and one for compute opcodes.
// Both are plain FIFOs: micro-ops leave in the order the unroll scheduler
// wrote them.  Up to PUSH_W micro-ops enter per cycle (push_n of the push
// array, lowest index first) and up to POP_W leave (pop_n, oldest first).
// Every held micro-op is visible, oldest first, on `q`, with `count` valid
// ones, so that the issue logic of the other queue can check register
// hazards against everything still waiting here.  `free` is the number of
// empty slots at the start of the cycle; the pusher must not exceed it, and
// an assertion checks that, and that pop_n never exceeds count.
//
// The depth follows the paper's figure of the TFU; multi-slot push and pop
// are this design's choice so that wider TFUs can issue several micro-ops
// per cycle.
//
// Lint note: rst_n also appears in the assertions' `disable iff`, which a
// linter reports as a net used both synchronously and asynchronously.
module tfu_issue_queue
  import psx_pkg::*;
#(
  parameter int unsigned DEPTH  = IQ_DEPTH,
  parameter int unsigned PUSH_W = 4,
  parameter int unsigned POP_W  = 2
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic [$clog2(PUSH_W+1)-1:0]     push_n,
  input  uop_t [PUSH_W-1:0]               push,
  input  logic [$clog2(POP_W+1)-1:0]      pop_n,
  output uop_t [DEPTH-1:0]                q,
  output logic [$clog2(DEPTH+1)-1:0]      count,
  output logic [$clog2(DEPTH+1)-1:0]      free
);

  localparam int unsigned CW = $clog2(DEPTH+1);

  uop_t [DEPTH-1:0] mem_q, mem_d;
  logic [CW-1:0]    cnt_q, cnt_d;

  assign q     = mem_q;
  assign count = cnt_q;
  assign free  = CW'(DEPTH) - cnt_q;

  // Shift-register FIFO: entry 0 is always the oldest.
  always_comb begin
    logic [CW-1:0] remain;
    mem_d  = '0;
    remain = cnt_q - CW'(pop_n);
    for (int i = 0; i < DEPTH; i++)
      if (i + int'(pop_n) < DEPTH && i < int'(remain)) mem_d[i] = mem_q[i + int'(pop_n)];
    for (int j = 0; j < PUSH_W; j++)
      if (j < int'(push_n) && int'(remain) + j < DEPTH) mem_d[int'(remain) + j] = push[j];
    cnt_d = remain + CW'(push_n);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_q <= '0;
      cnt_q <= '0;
    end else begin
      mem_q <= mem_d;
      cnt_q <= cnt_d;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) 32'(push_n) <= 32'(free));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) 32'(pop_n) <= 32'(cnt_q));

endmodule
