// tfu_tc: the TFU's Translation Cache (6 entries).
//
// The TFU's AGU produces virtual addresses, but the caches are physically
// tagged.  The TC keeps the most recent virtual-to-physical page mappings
// (4 KiB pages) in a small fully associative array.  A lookup is
// combinational: hit and ppn answer in the same cycle.  On a miss the TC
// sends the virtual page number to the core's TLB / page walker over a
// valid/ready request and waits for the response (xlat_rsp_valid with the
// physical page number); it then fills an entry, first an invalid one, else
// the next in round-robin order, and the waiting access hits on retry.
// Only one miss is outstanding.  inval_all clears every entry; it is raised
// on a TLB invalidation, a page swap or a context switch.  A response that
// returns after an invalidation is dropped, and the access misses again.
//
// The 6-entry size, the miss path through the core's TLB and the
// invalidate-all rule follow the paper; associativity, replacement and the
// handshake are this design's choices.
module tfu_tc
  import psx_pkg::*;
#(
  parameter int unsigned ENTRIES = TC_ENTRIES
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               lookup_valid,
  input  logic [VPN_W-1:0]   lookup_vpn,
  output logic               hit,
  output logic [PPN_W-1:0]   ppn,
  output logic               xlat_req_valid,
  input  logic               xlat_req_ready,
  output logic [VPN_W-1:0]   xlat_req_vpn,
  input  logic               xlat_rsp_valid,
  input  logic [PPN_W-1:0]   xlat_rsp_ppn,
  input  logic               inval_all,
  output logic               miss_start     // pulses when a miss is sent out
);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT} state_e;

  logic [ENTRIES-1:0]             valid;
  logic [ENTRIES-1:0][VPN_W-1:0]  vtag;
  logic [ENTRIES-1:0][PPN_W-1:0]  pdata;
  logic [$clog2(ENTRIES)-1:0]     rr;
  state_e                         state;
  logic [VPN_W-1:0]               miss_vpn;
  logic                           stale;

  always_comb begin
    hit = 1'b0;
    ppn = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (valid[i] && vtag[i] == lookup_vpn) begin
        hit = 1'b1;
        ppn = pdata[i];
      end
  end

  // fill slot: the lowest invalid entry, else the round-robin victim
  logic                           fill_found;
  logic [$clog2(ENTRIES)-1:0]     fill_slot;
  always_comb begin
    fill_found = 1'b0;
    fill_slot  = rr;
    for (int i = 0; i < ENTRIES; i++)
      if (!valid[i] && !fill_found) begin
        fill_slot  = ($clog2(ENTRIES))'(i);
        fill_found = 1'b1;
      end
  end

  assign xlat_req_valid = (state == S_REQ);
  assign xlat_req_vpn   = miss_vpn;
  assign miss_start     = (state == S_IDLE) && lookup_valid && !hit && !inval_all;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid    <= '0;
      vtag     <= '0;
      pdata    <= '0;
      rr       <= '0;
      state    <= S_IDLE;
      miss_vpn <= '0;
      stale    <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (miss_start) begin
          miss_vpn <= lookup_vpn;
          stale    <= 1'b0;
          state    <= S_REQ;
        end
        S_REQ:  if (xlat_req_ready) state <= S_WAIT;
        S_WAIT: if (xlat_rsp_valid) begin
          state <= S_IDLE;
          if (!stale && !inval_all) begin
            valid[fill_slot] <= 1'b1;
            vtag[fill_slot]  <= miss_vpn;
            pdata[fill_slot] <= xlat_rsp_ppn;
            if (!fill_found) rr <= (32'(rr) == ENTRIES-1) ? '0 : rr + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
      if (inval_all) begin
        valid <= '0;
        if (state != S_IDLE) stale <= 1'b1;
      end
    end
  end

endmodule
