// coh_tracker: the extra coherence bit per cache line that near-cache
// compute needs, and the snoop it forces.
//
// A TFU next to the L2 reads and writes the L2 directly, bypassing the L1,
// so the L2 keeps one more bit per line saying that the L1 currently owns
// the line.  Likewise the L3 directory keeps one more sharer bit per line
// for the near-L3 TFU, saying that the TFU's locally reserved L3 ways hold
// the line.  This module is that bit array plus the gate in front of the
// access that must respect it:
//   - set_valid/set_line sets the bit (a fill into the inner owner),
//     clr_valid/clr_line clears it (an eviction from the inner owner);
//   - an access (acc_valid, acc_line) whose bit is clear passes at once
//     (acc_grant in the same cycle);
//   - an access whose bit is set is held; the tracker raises snoop_valid
//     with the line, waits for snoop_ack, clears the bit and then grants.
// The bit array is indexed by the low LINE_IDX_W bits of the line address,
// one bit per line of the cache (16384 for a 1 MB L2 of 64-byte lines).
// Lines that alias on an index share a bit; that can only add snoops, never
// lose one, as long as clear events are sent only for lines that alias
// nothing still owned (the caller's duty, as with any inclusive bit).
//
// The bit per L2 line and the sharer bit per near-L3 TFU follow the paper;
// the indexing, the set/clear ports and the snoop handshake are this
// design's choices.
//
// Lint note: clearing all LINES bits at reset is a replication of '0 wider
// than Verilator's default replication limit, which it reports; the wide
// reset is intended (every bit must start clear).
// rst_n also appears in the assertion's `disable iff`, which a linter
// reports as a net used both synchronously and asynchronously.
module coh_tracker
  import psx_pkg::*;
#(
  parameter int unsigned LINES = 16384
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               set_valid,
  input  logic [PA_W-1:0]    set_line,      // byte address
  input  logic               clr_valid,
  input  logic [PA_W-1:0]    clr_line,
  input  logic               acc_valid,
  input  logic [PA_W-1:0]    acc_line,
  output logic               acc_grant,
  output logic               snoop_valid,
  output logic [PA_W-1:0]    snoop_line,
  input  logic               snoop_ack
);

  localparam int unsigned OFF_W      = $clog2(LINE_BYTES);
  localparam int unsigned LINE_IDX_W = $clog2(LINES);

  logic [LINES-1:0]         owned;
  logic                     snooping;
  logic [LINE_IDX_W-1:0]    acc_idx, set_idx, clr_idx;

  assign acc_idx = acc_line[OFF_W +: LINE_IDX_W];
  assign set_idx = set_line[OFF_W +: LINE_IDX_W];
  assign clr_idx = clr_line[OFF_W +: LINE_IDX_W];

  assign acc_grant   = acc_valid && !owned[acc_idx] && !snooping;
  assign snoop_valid = snooping;
  assign snoop_line  = {acc_line[PA_W-1:OFF_W], {OFF_W{1'b0}}};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      owned    <= '0;
      snooping <= 1'b0;
    end else begin
      if (clr_valid) owned[clr_idx] <= 1'b0;
      if (set_valid) owned[set_idx] <= 1'b1;
      if (!snooping && acc_valid && owned[acc_idx]) begin
        snooping <= 1'b1;
      end else if (snooping && snoop_ack) begin
        snooping         <= 1'b0;
        owned[acc_idx]   <= 1'b0;
      end
    end
  end

  a_hold_during_snoop: assert property (@(posedge clk) disable iff (!rst_n)
    snooping && !snoop_ack |=> acc_valid && acc_line == $past(acc_line));

endmodule
