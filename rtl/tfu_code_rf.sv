// tfu_code_rf: the TFU's code register file (32 entries).
//
// It receives a kernel from the core over the 8-byte offload (DISPATCH) bus
// and holds it for the unroll scheduler.  A kernel arrives as a stream of
// 64-bit beats: beat 0 carries the four 16-bit loop iteration counts (loop 0
// in bits 15:0), beat 1 carries {num_insts, num_loops} in its low bits, and
// then each code register follows in BEATS_PER_ENTRY beats, least significant
// beat first.  off_last marks the final beat; on the cycle after it `loaded`
// pulses and the kernel is visible on hdr/entries.
//
// Interface: valid/ready on the offload bus; ready is low while `busy`
// (the TFU is running a kernel), so a new kernel cannot overwrite a running
// one.  All entries are readable at once because the unroller looks at
// several consecutive code registers per cycle.
//
// The 32-entry size follows the figure of the TFU; the beat layout and the
// entry format (wider than the paper's 8-byte estimate) are this design's.
module tfu_code_rf
  import psx_pkg::*;
#(
  parameter int unsigned NREGS = CODE_REGS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      busy,
  input  logic                      off_valid,
  output logic                      off_ready,
  input  logic [OFFLOAD_W-1:0]      off_data,
  input  logic                      off_last,
  output logic                      loaded,
  output kernel_hdr_t               hdr,
  output code_entry_t [NREGS-1:0]   entries
);

  localparam int unsigned ENT_BITS = BEATS_PER_ENTRY * OFFLOAD_W;
  localparam int unsigned BEAT_W   = $clog2(BEATS_PER_ENTRY);

  logic [1:0]                   hdr_cnt;      // header beats received
  logic [$clog2(NREGS)-1:0]     ent_idx;
  logic [BEAT_W-1:0]            beat_idx;
  logic [ENT_BITS-1:0]          shift;        // entry being assembled
  logic [ENT_BITS-1:0]          assembled;

  assign off_ready = !busy;

  always_comb begin
    assembled = shift;
    assembled[beat_idx*OFFLOAD_W +: OFFLOAD_W] = off_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hdr_cnt  <= '0;
      ent_idx  <= '0;
      beat_idx <= '0;
      shift    <= '0;
      loaded   <= 1'b0;
      hdr      <= '0;
      entries  <= '0;
    end else begin
      loaded <= 1'b0;
      if (off_valid && off_ready) begin
        if (hdr_cnt == 2'd0) begin
          hdr.iters <= off_data[NUM_LOOPS*ITER_W-1:0];
          hdr_cnt   <= 2'd1;
        end else if (hdr_cnt == 2'd1) begin
          hdr.num_loops <= off_data[2:0];
          hdr.num_insts <= off_data[3 +: CODE_IDX_W+1];
          hdr_cnt       <= 2'd2;
        end else begin
          shift <= assembled;
          if (beat_idx == BEAT_W'(BEATS_PER_ENTRY-1)) begin
            entries[ent_idx] <= code_entry_t'(assembled[CODE_ENTRY_W-1:0]);
            ent_idx  <= ent_idx + 1'b1;
            beat_idx <= '0;
            shift    <= '0;
          end else begin
            beat_idx <= beat_idx + 1'b1;
          end
        end
        if (off_last) begin
          loaded   <= 1'b1;
          hdr_cnt  <= '0;
          ent_idx  <= '0;
          beat_idx <= '0;
          shift    <= '0;
        end
      end
    end
  end

endmodule
