// proximus_core: the near-cache compute additions of one CPU core.
//
// The core keeps its normal pipeline and caches (outside this module).  What
// is added is one Tensor Functional Unit (TFU) beside each cache level it
// owns: a near-L1, a near-L2 and a near-L3 TFU (the near-L3 one sits at this
// core's L3 slice).  Each TFU is bound to one SMT thread: SMT0 and SMT3 use
// the near-L1 TFU, SMT1 the near-L2 TFU, SMT2 the near-L3 TFU.  Software
// places a DNN primitive's work on the caches that suit it simply by
// choosing the threads it runs on.
//
// Data flow:
//   decoded instructions -> psx_dispatch ("Is PSX?", hardware fence)
//     -> non-PSX: other_* port (the core's own functional units)
//     -> PSX:     psx_frontend of the thread (code registers, TFULoopEnd
//                 offload) -> [offload_arb for the shared L1 TFU] -> TFU
//   TFU loads/stores -> the adjacent cache port (l1_/l2_/l3_ mem ports);
//     near-L2 accesses pass the L1-owns bit check (coh_tracker): a line the
//     L1 owns is snooped out of the L1 first;
//     near-L3 accesses mark the line as held by the TFU's reserved L3 ways,
//     and a core-side request to the slice for such a line first snoops
//     those ways (second coh_tracker, the directory's sharer bit);
//   TFU translation-cache misses -> xlat_arb -> the core's TLB port;
//   inval_all (TLB shootdown, page swap, context switch) clears every TC.
//
// Compute width per TFU is a parameter (64-byte MAC units); the defaults
// give the P256 configuration: 128 MACs/cycle at L1 (2 units), 64 at L2 and
// 64 at L3 (1 unit each).  Cache ports carry one 64-byte access per cycle
// with valid/ready; load data returns in order.
//
// What follows the paper: the three TFUs and their binding to SMT threads,
// the PSX code registers and fence, the TC with misses to the core's TLB,
// the extra L2 and L3 coherence bits.  The port protocols, the arbitration
// between threads 0 and 3, and the event outputs are this design's choices.
module proximus_core
  import psx_pkg::*;
#(
  parameter int unsigned NMAC_L1  = 2,       // P256: 128 MACs/cycle near L1
  parameter int unsigned NMAC_L2  = 1,       // P256:  64 MACs/cycle near L2
  parameter int unsigned NMAC_L3  = 1,       // P256:  64 MACs/cycle near L3
  parameter int unsigned L2_LINES = 16384,   // 1 MB / 64 B
  parameter int unsigned L3_LINES = 32768    // 1.375 MB / 64 B = 22528, rounded up to a power of 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // decoded instructions from the core front end
  input  logic                   in_valid,
  output logic                   in_ready,
  input  dec_instr_t             in_instr,
  // non-PSX instructions to the core's functional units
  output logic                   other_valid,
  input  logic                   other_ready,
  output dec_instr_t             other_instr,
  // cache ports of the three TFUs, index 0 = L1, 1 = L2, 2 = L3
  output logic [2:0]             mem_req_valid,
  input  logic [2:0]             mem_req_ready,
  output logic [2:0]             mem_req_we,
  output logic [2:0][PA_W-1:0]   mem_req_addr,
  output logic [2:0][DATA_W-1:0] mem_req_wdata,
  input  logic [2:0]             mem_rsp_valid,
  input  logic [2:0][DATA_W-1:0] mem_rsp_data,
  // the core's TLB / page walker
  output logic                   tlb_req_valid,
  input  logic                   tlb_req_ready,
  output logic [VPN_W-1:0]       tlb_req_vpn,
  input  logic                   tlb_rsp_valid,
  input  logic [PPN_W-1:0]       tlb_rsp_ppn,
  input  logic                   inval_all,
  // L2: L1 fills and evictions, and snoops into the L1
  input  logic                   l1_fill_valid,
  input  logic [PA_W-1:0]        l1_fill_line,
  input  logic                   l1_evict_valid,
  input  logic [PA_W-1:0]        l1_evict_line,
  output logic                   l1_snoop_valid,
  output logic [PA_W-1:0]        l1_snoop_line,
  input  logic                   l1_snoop_ack,
  // L3 slice: core-side requests, and snoops into the TFU's reserved ways
  input  logic                   l3_core_req_valid,
  input  logic [PA_W-1:0]        l3_core_req_line,
  output logic                   l3_core_req_grant,
  output logic                   l3_part_snoop_valid,
  output logic [PA_W-1:0]        l3_part_snoop_line,
  input  logic                   l3_part_snoop_ack,
  // status and mechanism events
  output logic [NUM_THREADS-1:0] thread_busy,
  output logic [NUM_THREADS-1:0] code_overflow,
  output logic [2:0]             tfu_done,
  output logic [2:0]             tfu_busy,
  output logic                   ev_fence_stall,
  output logic [2:0]             ev_load_hoist,
  output logic [2:0]             ev_hazard_stall,
  output logic [2:0]             ev_iq_full,
  output logic [2:0]             ev_tc_miss,
  output logic [2:0][2:0]        ev_compute_issued
);

  // ---------------- dispatch ----------------
  logic [NUM_THREADS-1:0] psx_valid, psx_ready;
  dec_instr_t             psx_instr;

  psx_dispatch u_dispatch (
    .in_valid, .in_ready, .in_instr,
    .psx_valid, .psx_ready, .psx_instr,
    .other_valid, .other_ready, .other_instr,
    .thread_busy, .fence_stall(ev_fence_stall)
  );

  // ---------------- per-thread code registers ----------------
  logic [NUM_THREADS-1:0]                t_off_valid, t_off_ready, t_off_last, t_done;
  logic [NUM_THREADS-1:0][OFFLOAD_W-1:0] t_off_data;

  for (genvar t = 0; t < NUM_THREADS; t++) begin : g_thread
    psx_frontend u_fe (
      .clk, .rst_n,
      .instr_valid(psx_valid[t]), .instr_ready(psx_ready[t]), .instr(psx_instr),
      .off_valid(t_off_valid[t]), .off_ready(t_off_ready[t]),
      .off_data(t_off_data[t]), .off_last(t_off_last[t]),
      .tfu_done(t_done[t]), .busy(thread_busy[t]), .overflow(code_overflow[t])
    );
  end

  // ---------------- offload buses to the TFUs ----------------
  logic [2:0]                o_valid, o_ready, o_last;
  logic [2:0][OFFLOAD_W-1:0] o_data;
  logic [1:0]                l1_done;

  offload_arb u_l1_arb (
    .clk, .rst_n,
    .req_valid({t_off_valid[3], t_off_valid[0]}),
    .req_ready({t_off_ready[3], t_off_ready[0]}),
    .req_data ({t_off_data[3],  t_off_data[0]}),
    .req_last ({t_off_last[3],  t_off_last[0]}),
    .req_done (l1_done),
    .off_valid(o_valid[0]), .off_ready(o_ready[0]), .off_data(o_data[0]), .off_last(o_last[0]),
    .tfu_done (tfu_done[0])
  );
  assign t_done[0] = l1_done[0];
  assign t_done[3] = l1_done[1];

  assign o_valid[1]     = t_off_valid[1];
  assign o_data[1]      = t_off_data[1];
  assign o_last[1]      = t_off_last[1];
  assign t_off_ready[1] = o_ready[1];
  assign t_done[1]      = tfu_done[1];

  assign o_valid[2]     = t_off_valid[2];
  assign o_data[2]      = t_off_data[2];
  assign o_last[2]      = t_off_last[2];
  assign t_off_ready[2] = o_ready[2];
  assign t_done[2]      = tfu_done[2];

  // ---------------- the three TFUs ----------------
  logic [2:0]             t_req_valid, t_req_ready;
  logic [2:0]             x_valid, x_ready, x_rsp;
  logic [2:0][VPN_W-1:0]  x_vpn;
  logic [PPN_W-1:0]       x_ppn;

  localparam int unsigned NMAC [3] = '{NMAC_L1, NMAC_L2, NMAC_L3};

  for (genvar v = 0; v < 3; v++) begin : g_tfu
    logic [$clog2(NMAC[v]+1)-1:0] issued;
    tfu #(.NMAC(NMAC[v])) u_tfu (
      .clk, .rst_n,
      .off_valid(o_valid[v]), .off_ready(o_ready[v]), .off_data(o_data[v]), .off_last(o_last[v]),
      .done(tfu_done[v]), .busy(tfu_busy[v]),
      .mem_req_valid(t_req_valid[v]), .mem_req_ready(t_req_ready[v]),
      .mem_req_we(mem_req_we[v]), .mem_req_addr(mem_req_addr[v]), .mem_req_wdata(mem_req_wdata[v]),
      .mem_rsp_valid(mem_rsp_valid[v]), .mem_rsp_data(mem_rsp_data[v]),
      .xlat_req_valid(x_valid[v]), .xlat_req_ready(x_ready[v]), .xlat_req_vpn(x_vpn[v]),
      .xlat_rsp_valid(x_rsp[v]), .xlat_rsp_ppn(x_ppn),
      .inval_all,
      .ev_load_hoist(ev_load_hoist[v]), .ev_hazard_stall(ev_hazard_stall[v]),
      .ev_iq_full(ev_iq_full[v]), .ev_tc_miss(ev_tc_miss[v]), .ev_mac_issued(issued)
    );
    assign ev_compute_issued[v] = 3'(issued);
  end

  xlat_arb #(.N(3)) u_xlat_arb (
    .clk, .rst_n,
    .req_valid(x_valid), .req_ready(x_ready), .req_vpn(x_vpn),
    .rsp_valid(x_rsp), .rsp_ppn(x_ppn),
    .tlb_req_valid, .tlb_req_ready, .tlb_req_vpn, .tlb_rsp_valid, .tlb_rsp_ppn
  );

  // ---------------- near-L1: straight to the L1 ----------------
  assign mem_req_valid[0] = t_req_valid[0];
  assign t_req_ready[0]   = mem_req_ready[0];

  // ---------------- near-L2: L1-owns bit per L2 line ----------------
  logic l2_grant;
  coh_tracker #(.LINES(L2_LINES)) u_l2_bits (
    .clk, .rst_n,
    .set_valid(l1_fill_valid),  .set_line(l1_fill_line),
    .clr_valid(l1_evict_valid), .clr_line(l1_evict_line),
    .acc_valid(t_req_valid[1]), .acc_line(mem_req_addr[1]), .acc_grant(l2_grant),
    .snoop_valid(l1_snoop_valid), .snoop_line(l1_snoop_line), .snoop_ack(l1_snoop_ack)
  );
  assign mem_req_valid[1] = t_req_valid[1] && l2_grant;
  assign t_req_ready[1]   = mem_req_ready[1] && l2_grant;

  // ---------------- near-L3: TFU sharer bit in the slice's directory ----------------
  coh_tracker #(.LINES(L3_LINES)) u_l3_bits (
    .clk, .rst_n,
    .set_valid(mem_req_valid[2] && mem_req_ready[2]), .set_line(mem_req_addr[2]),
    .clr_valid(1'b0), .clr_line('0),
    .acc_valid(l3_core_req_valid), .acc_line(l3_core_req_line), .acc_grant(l3_core_req_grant),
    .snoop_valid(l3_part_snoop_valid), .snoop_line(l3_part_snoop_line), .snoop_ack(l3_part_snoop_ack)
  );
  assign mem_req_valid[2] = t_req_valid[2];
  assign t_req_ready[2]   = mem_req_ready[2];

endmodule
