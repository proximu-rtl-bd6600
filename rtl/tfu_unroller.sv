// tfu_unroller: the TFU's lean "Unroll Scheduler".
//
// It turns one offloaded kernel (a few code registers plus up to four loop
// iteration counts) into the full stream of micro-ops, without any help from
// the core.  The loop nest is walked in lexicographic order with loop 0
// innermost; at every point of the iteration space the code registers are
// visited in program order.  A code register whose loop_en bit for loop l is
// clear sits outside loop l and runs only at that loop's first iteration
// (tail = 0, e.g. a weight load before the inner loop) or only at its last
// one (tail = 1, e.g. a store after the accumulation).  Register ids are
// resolved here: reg + sum over loops of idx[l] * rstride[operand][l],
// modulo 64 (kernels keep ids below 48).  Addresses are not resolved here:
// the micro-op carries base, strides and the loop indices to the AGU.
//
// Per cycle the unroller looks at up to W consecutive (code register,
// iteration) positions.  Inactive positions are skipped; active ones are
// pushed, in order, into the load/store queue or the compute queue.  It stops
// at the first micro-op whose queue has no free slot (back-pressure), so
// program order inside each queue is kept and nothing is dropped.  Each
// micro-op gets a wrapping age tag (seq) that the TFU's hazard checks use;
// age comparisons are modulo 64, so live micro-ops must span under 32 tags
// (not enforced here; see the TFU's issue rules).
//
// Interface: `start` (one cycle) begins a kernel given by hdr/entries;
// `busy` is high until the last micro-op has been pushed, then `finished`
// pulses for one cycle.  A loop count of 0 is treated as 1.
//
// The scheduler, the two queues and the four-loop limit follow the paper;
// the issue width W, the first/last-iteration rule (tail bit) and the
// register-id arithmetic are this design's choices.
module tfu_unroller
  import psx_pkg::*;
#(
  parameter int unsigned NREGS = CODE_REGS,
  parameter int unsigned W     = 4
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  kernel_hdr_t                       hdr,
  input  code_entry_t [NREGS-1:0]           entries,
  input  logic [$clog2(IQ_DEPTH+1)-1:0]     ls_free,
  input  logic [$clog2(IQ_DEPTH+1)-1:0]     cq_free,
  output logic [$clog2(W+1)-1:0]            ls_push_n,
  output uop_t [W-1:0]                      ls_push,
  output logic [$clog2(W+1)-1:0]            cq_push_n,
  output uop_t [W-1:0]                      cq_push,
  output logic                              busy,
  output logic                              finished,
  output logic                              stalled     // a micro-op waited for queue space
);

  localparam int unsigned PC_W = $clog2(NREGS);
  localparam int unsigned CW   = $clog2(W+1);

  logic [PC_W-1:0]                    pc_q, pc_d;
  logic [NUM_LOOPS-1:0][ITER_W-1:0]   idx_q, idx_d;
  logic [SEQ_W-1:0]                   seq_q, seq_d;
  logic                               end_d;

  // Effective loop counts: loops beyond num_loops, and counts of 0, count 1.
  logic [NUM_LOOPS-1:0][ITER_W-1:0]   cnt;
  always_comb begin
    for (int l = 0; l < NUM_LOOPS; l++) begin
      if (l < int'(hdr.num_loops) && hdr.iters[l] != '0) cnt[l] = hdr.iters[l];
      else                                                 cnt[l] = ITER_W'(1);
    end
  end

  function automatic logic [REG_W-1:0] resolve(logic [REG_W-1:0] r,
                                               logic [NUM_LOOPS-1:0][RSTRIDE_W-1:0] st,
                                               logic [NUM_LOOPS-1:0][ITER_W-1:0] ix);
    logic [REG_W-1:0] acc;
    acc = r;
    for (int l = 0; l < NUM_LOOPS; l++)
      acc = acc + REG_W'($signed({1'b0, ix[l]}) * $signed(st[l]));
    return acc;
  endfunction

  always_comb begin
    logic [PC_W-1:0]                  p;
    logic [NUM_LOOPS-1:0][ITER_W-1:0] ix;
    logic                             done, blocked, active, carry;
    logic [CW-1:0]                    nl, nc;
    logic [SEQ_W-1:0]                 sq;
    code_entry_t                      e;
    uop_t                             u;

    p = pc_q; ix = idx_q; sq = seq_q;
    e = '0; u = '0; active = 1'b0; carry = 1'b0;
    done = 1'b0; blocked = 1'b0;
    nl = '0; nc = '0;
    ls_push = '0; cq_push = '0;
    stalled = 1'b0;

    for (int s = 0; s < W; s++) begin
      if (busy && !done && !blocked) begin
        e = entries[p];
        active = 1'b1;
        for (int l = 0; l < NUM_LOOPS; l++)
          if (!e.loop_en[l] || l >= int'(hdr.num_loops))
            if (e.tail ? (ix[l] != cnt[l] - 1'b1) : (ix[l] != '0)) active = 1'b0;
        if (e.op == OP_NOP) active = 1'b0;

        u.op      = e.op;
        u.seq     = sq;
        u.dst     = resolve(e.dst,  e.rstride[0], ix);
        u.src1    = resolve(e.src1, e.rstride[1], ix);
        u.src2    = resolve(e.src2, e.rstride[2], ix);
        u.base    = e.base;
        u.astride = e.astride;
        u.idx     = ix;

        if (active && is_mem_op(e.op)) begin
          if (32'(nl) < 32'(ls_free)) begin
            ls_push[nl] = u; nl = nl + 1'b1; sq = sq + 1'b1;
          end else begin
            blocked = 1'b1; stalled = 1'b1;
          end
        end else if (active) begin
          if (32'(nc) < 32'(cq_free)) begin
            cq_push[nc] = u; nc = nc + 1'b1; sq = sq + 1'b1;
          end else begin
            blocked = 1'b1; stalled = 1'b1;
          end
        end

        if (!blocked) begin
          // advance to the next (code register, iteration) position
          if (32'(p) + 1 >= 32'(hdr.num_insts)) begin
            p = '0;
            carry = 1'b1;
            for (int l = 0; l < NUM_LOOPS; l++) begin
              if (carry) begin
                if (ix[l] == cnt[l] - 1'b1) ix[l] = '0;
                else begin ix[l] = ix[l] + 1'b1; carry = 1'b0; end
              end
            end
            if (carry) done = 1'b1;
          end else begin
            p = p + 1'b1;
          end
        end
      end
    end
    pc_d = p; idx_d = ix; seq_d = sq; end_d = done;
    ls_push_n = nl; cq_push_n = nc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      finished <= 1'b0;
      pc_q     <= '0;
      idx_q    <= '0;
      seq_q    <= '0;
    end else begin
      finished <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        pc_q  <= '0;
        idx_q <= '0;
      end else if (busy) begin
        pc_q  <= pc_d;
        idx_q <= idx_d;
        seq_q <= seq_d;
        if (end_d) begin
          busy     <= 1'b0;
          finished <= 1'b1;
        end
      end
    end
  end

endmodule
