// tfu: a Tensor Functional Unit, the light-weight compute engine placed next
// to one cache level (L1, L2 or an L3 slice).
//
// A kernel arrives from the core over the DISPATCH (offload) bus into the
// code register file.  The unroll scheduler then expands it into micro-ops
// and fills two in-order issue queues, one for loads/stores and one for
// compute.  Because the queues are separate, loads can be hoisted above
// older compute (hiding load latency) while loads and stores stay in strict
// program order among themselves.  Dependences are only through the 48 data
// registers (no renaming), so each queue head is checked against every older
// micro-op still waiting in the other queue and against loads in flight:
//   compute waits for an older load that writes any register it touches
//   (RAW/WAW) and for an older store that reads its destination (WAR);
//   a load waits for older compute that touches its destination (WAR/WAW);
//   a store waits for older compute or an in-flight load that writes the
//   register it stores (RAW).
// Up to NMAC compute micro-ops issue per cycle to NMAC 64-byte MAC units,
// in order, stopping at the first one that is blocked or that depends on an
// earlier one of the same cycle; their results are written at the clock
// edge.  One load or store issues per cycle: the AGU forms its virtual
// address, the Translation Cache maps it to a physical one, and it goes to
// the adjacent cache.  Load data returns in request order and is written to
// the data register file.  When the unroller has finished and both queues
// and the in-flight loads have drained, DONE pulses for one cycle.
//
// Cache port: mem_req_* valid/ready (we=1 for a store, carrying 64 bytes;
// stores need no response); mem_rsp_valid/mem_rsp_data return loads in order.
// Translation port: see tfu_tc.  inval_all clears the TC.
//
// The structure (code RF, unroll scheduler, two 8-entry in-order queues,
// AGU, TC, 48-entry data RF, MAC units, DONE) follows the paper's TFU
// schematic; the hazard rules, one memory access per cycle and the limit of
// LDQ loads in flight are this design's choices.  The ev_* outputs pulse
// when a mechanism is used, for performance counting.
//
// Lint note: rst_n is an asynchronous reset and also appears in the
// assertions' `disable iff`; a linter reports that as a net used both
// synchronously and asynchronously.  The assertions are not logic.
module tfu
  import psx_pkg::*;
#(
  parameter int unsigned NMAC = 1,   // number of 64-byte MAC units
  parameter int unsigned W    = 4,   // unroll scheduler width
  parameter int unsigned LDQ  = 8    // loads in flight
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // DISPATCH / DONE
  input  logic                  off_valid,
  output logic                  off_ready,
  input  logic [OFFLOAD_W-1:0]  off_data,
  input  logic                  off_last,
  output logic                  done,
  output logic                  busy,
  // cache port
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic                  mem_req_we,
  output logic [PA_W-1:0]       mem_req_addr,
  output logic [DATA_W-1:0]     mem_req_wdata,
  input  logic                  mem_rsp_valid,
  input  logic [DATA_W-1:0]     mem_rsp_data,
  // address translation
  output logic                  xlat_req_valid,
  input  logic                  xlat_req_ready,
  output logic [VPN_W-1:0]      xlat_req_vpn,
  input  logic                  xlat_rsp_valid,
  input  logic [PPN_W-1:0]      xlat_rsp_ppn,
  input  logic                  inval_all,
  // mechanism events
  output logic                  ev_load_hoist,
  output logic                  ev_hazard_stall,
  output logic                  ev_iq_full,
  output logic                  ev_tc_miss,
  output logic [$clog2(NMAC+1)-1:0] ev_mac_issued
);

  localparam int unsigned QCW = $clog2(IQ_DEPTH+1);
  localparam int unsigned WCW = $clog2(W+1);
  localparam int unsigned MCW = $clog2(NMAC+1);
  localparam int unsigned LCW = $clog2(LDQ+1);

  // ---------------- code RF and unroller ----------------
  kernel_hdr_t                 hdr;
  code_entry_t [CODE_REGS-1:0] entries;
  logic                        loaded, running, unr_busy, unr_finished, unr_stall;

  tfu_code_rf u_code_rf (
    .clk, .rst_n, .busy(running),
    .off_valid, .off_ready, .off_data, .off_last,
    .loaded, .hdr, .entries
  );

  logic [QCW-1:0] ls_free, cq_free, ls_count, cq_count;
  logic [WCW-1:0] ls_push_n, cq_push_n;
  uop_t [W-1:0]   ls_push, cq_push;

  tfu_unroller #(.W(W)) u_unroller (
    .clk, .rst_n, .start(loaded), .hdr, .entries,
    .ls_free, .cq_free, .ls_push_n, .ls_push, .cq_push_n, .cq_push,
    .busy(unr_busy), .finished(unr_finished), .stalled(unr_stall)
  );

  // ---------------- issue queues ----------------
  uop_t [IQ_DEPTH-1:0] lsq, cq;
  logic                ls_pop;
  logic [MCW-1:0]      cq_pop_n;

  tfu_issue_queue #(.PUSH_W(W), .POP_W(1)) u_lsq (
    .clk, .rst_n, .push_n(ls_push_n), .push(ls_push), .pop_n(ls_pop),
    .q(lsq), .count(ls_count), .free(ls_free)
  );

  tfu_issue_queue #(.PUSH_W(W), .POP_W(NMAC)) u_cq (
    .clk, .rst_n, .push_n(cq_push_n), .push(cq_push), .pop_n(cq_pop_n),
    .q(cq), .count(cq_count), .free(cq_free)
  );

  // ---------------- in-flight loads (destination registers, in order) ----------------
  logic [LDQ-1:0][REG_W-1:0] ld_dst;
  logic [LCW-1:0]            ld_cnt;
  logic                      ld_push;

  function automatic logic inflight_writes(logic [LDQ-1:0][REG_W-1:0] d, logic [LCW-1:0] n,
                                           logic [REG_W-1:0] r);
    for (int i = 0; i < LDQ; i++)
      if (i < int'(n) && d[i] == r) return 1'b1;
    return 1'b0;
  endfunction

  // ---------------- compute issue ----------------
  logic [NMAC-1:0]                 c_issue;
  logic [3*NMAC+1-1:0][REG_W-1:0]  raddr;
  logic [3*NMAC+1-1:0][DATA_W-1:0] rdata;
  logic [NMAC:0]                   we;
  logic [NMAC:0][REG_W-1:0]        waddr;
  logic [NMAC:0][DATA_W-1:0]       wdata;
  logic                            c_blocked_any;

  always_comb begin
    logic stop, blk;
    uop_t u;
    stop = 1'b0;
    c_issue = '0;
    c_blocked_any = 1'b0;
    for (int k = 0; k < NMAC; k++) begin
      u   = cq[k];
      blk = 1'b0;
      if (k >= int'(cq_count)) stop = 1'b1;
      // older loads/stores still queued
      for (int i = 0; i < IQ_DEPTH; i++)
        if (i < int'(ls_count) && seq_older(lsq[i].seq, u.seq)) begin
          if (lsq[i].op == OP_LOAD &&
              (lsq[i].dst == u.src1 || lsq[i].dst == u.src2 || lsq[i].dst == u.dst)) blk = 1'b1;
          if (lsq[i].op == OP_STORE && lsq[i].src1 == u.dst) blk = 1'b1;
        end
      // loads in flight
      if (inflight_writes(ld_dst, ld_cnt, u.src1) || inflight_writes(ld_dst, ld_cnt, u.src2) ||
          inflight_writes(ld_dst, ld_cnt, u.dst)) blk = 1'b1;
      // earlier compute of the same cycle
      for (int j = 0; j < NMAC; j++)
        if (j < k && (cq[j].dst == u.src1 || cq[j].dst == u.src2 || cq[j].dst == u.dst)) blk = 1'b1;
      if (!stop && blk) c_blocked_any = 1'b1;
      if (blk) stop = 1'b1;
      c_issue[k] = !stop;
    end
    cq_pop_n = '0;
    for (int k = 0; k < NMAC; k++) if (c_issue[k]) cq_pop_n = cq_pop_n + 1'b1;
  end

  for (genvar k = 0; k < NMAC; k++) begin : g_mac
    assign raddr[3*k]   = cq[k].src1;
    assign raddr[3*k+1] = cq[k].src2;
    assign raddr[3*k+2] = cq[k].dst;
    tfu_mac u_mac (
      .op(cq[k].op), .src1(rdata[3*k]), .src2(rdata[3*k+1]), .acc(rdata[3*k+2]),
      .res(wdata[k])
    );
    assign we[k]    = c_issue[k];
    assign waddr[k] = cq[k].dst;
  end

  // ---------------- load/store issue ----------------
  uop_t             lh;
  logic [VA_W-1:0]  va;
  logic             tc_hit;
  logic [PPN_W-1:0] tc_ppn;
  logic             ls_ready, ls_lookup, older_compute;

  assign lh = lsq[0];

  tfu_agu u_agu (.base(lh.base), .astride(lh.astride), .idx(lh.idx), .va);

  always_comb begin
    logic blk;
    blk = 1'b0;
    older_compute = 1'b0;
    for (int i = 0; i < IQ_DEPTH; i++)
      if (i < int'(cq_count) && seq_older(cq[i].seq, lh.seq)) begin
        older_compute = 1'b1;
        if (lh.op == OP_LOAD &&
            (cq[i].src1 == lh.dst || cq[i].src2 == lh.dst || cq[i].dst == lh.dst)) blk = 1'b1;
        if (lh.op == OP_STORE && cq[i].dst == lh.src1) blk = 1'b1;
      end
    if (lh.op == OP_STORE && inflight_writes(ld_dst, ld_cnt, lh.src1)) blk = 1'b1;
    if (lh.op == OP_LOAD && 32'(ld_cnt) >= LDQ) blk = 1'b1;
    ls_ready  = (ls_count != '0) && !blk;
    ls_lookup = ls_ready;
  end

  tfu_tc u_tc (
    .clk, .rst_n, .lookup_valid(ls_lookup), .lookup_vpn(va[VA_W-1:PAGE_BITS]),
    .hit(tc_hit), .ppn(tc_ppn),
    .xlat_req_valid, .xlat_req_ready, .xlat_req_vpn, .xlat_rsp_valid, .xlat_rsp_ppn,
    .inval_all, .miss_start(ev_tc_miss)
  );

  assign raddr[3*NMAC]  = lh.src1;
  assign mem_req_valid  = ls_ready && tc_hit;
  assign mem_req_we     = (lh.op == OP_STORE);
  assign mem_req_addr   = {tc_ppn, va[PAGE_BITS-1:0]};
  assign mem_req_wdata  = rdata[3*NMAC];
  assign ls_pop         = mem_req_valid && mem_req_ready;
  assign ld_push        = ls_pop && (lh.op == OP_LOAD);

  // load writeback
  assign we[NMAC]    = mem_rsp_valid;
  assign waddr[NMAC] = ld_dst[0];
  assign wdata[NMAC] = mem_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_dst <= '0;
      ld_cnt <= '0;
    end else begin
      logic [LDQ-1:0][REG_W-1:0] d;
      logic [LCW-1:0]            n;
      d = ld_dst;
      n = ld_cnt;
      if (mem_rsp_valid) begin
        for (int i = 0; i < LDQ - 1; i++) d[i] = d[i+1];
        n = n - 1'b1;
      end
      if (ld_push) begin
        d[n] = lh.dst;
        n = n + 1'b1;
      end
      ld_dst <= d;
      ld_cnt <= n;
    end
  end

  tfu_data_rf #(.NR(3*NMAC+1), .NW(NMAC+1)) u_rf (
    .clk, .rst_n, .raddr, .rdata, .we, .waddr, .wdata
  );

  // ---------------- kernel life cycle ----------------
  logic unr_done_seen;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running       <= 1'b0;
      unr_done_seen <= 1'b0;
      done          <= 1'b0;
    end else begin
      done <= 1'b0;
      if (loaded) begin
        running       <= 1'b1;
        unr_done_seen <= 1'b0;
      end else if (running) begin
        if (unr_finished) unr_done_seen <= 1'b1;
        if (unr_done_seen && !unr_busy && ls_count == '0 && cq_count == '0 && ld_cnt == '0) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end

  assign busy            = running;
  assign ev_load_hoist   = ld_push && older_compute;
  assign ev_hazard_stall = c_blocked_any || ((ls_count != '0) && !ls_ready);
  assign ev_iq_full      = unr_stall;
  assign ev_mac_issued   = cq_pop_n;

  a_rsp_has_load: assert property (@(posedge clk) disable iff (!rst_n) mem_rsp_valid |-> ld_cnt != '0);

endmodule
