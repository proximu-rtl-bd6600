// psx_frontend: one SMT thread's TFU code registers in the core, and the
// offload of a kernel to the thread's TFU.
//
// Kernel instructions tagged with the PSX-bit are not executed by the core.
// They are decoded once and allocated, in program order, into the thread's
// 32 TFU code registers.  The PSX meta-data instructions then fill in the
// loop information of the kernel (number of loops, iteration counts) and of
// each code register (which loops it sits in, base address, per-loop address
// strides and per-loop register-id strides).  TFULoopStart flushes the code
// registers; TFULoopEnd sends everything to the TFU over the 8-byte offload
// bus, one 64-bit beat per cycle: two header beats, then BEATS_PER_ENTRY
// beats per allocated code register (layout in tfu_code_rf).  From
// TFULoopEnd until the TFU's DONE the thread is fenced: `busy` is high and
// no further instruction of this thread is accepted, so TFU and non-TFU work
// of one thread never overlap.
//
// A kernel with more than 32 instructions does not fit; the extra ones are
// dropped and `overflow` is set until the next TFULoopStart (the paper
// requires software to split such kernels).
//
// Interface: instr_valid/instr_ready take one decoded PSX instruction per
// cycle; off_* is the offload bus (valid/ready, last beat flagged); tfu_done
// is the TFU's DONE pulse.  A new kernel's code registers start with all
// loops enabled, base 0 and strides 0.
//
// The register count, the PSX instruction set, the 8-byte bus and the fence
// follow the paper.  The entry format (wider than the paper's 8-byte
// estimate, so one entry takes several beats) is this design's choice.
module psx_frontend
  import psx_pkg::*;
#(
  parameter int unsigned NREGS = CODE_REGS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  instr_valid,
  output logic                  instr_ready,
  input  dec_instr_t            instr,
  output logic                  off_valid,
  input  logic                  off_ready,
  output logic [OFFLOAD_W-1:0]  off_data,
  output logic                  off_last,
  input  logic                  tfu_done,
  output logic                  busy,
  output logic                  overflow
);

  localparam int unsigned ENT_BITS = BEATS_PER_ENTRY * OFFLOAD_W;
  localparam int unsigned BEAT_W   = $clog2(BEATS_PER_ENTRY);

  typedef enum logic [1:0] {S_FILL, S_SEND, S_WAIT} state_e;

  state_e                     state;
  kernel_hdr_t                hdr;
  code_entry_t [NREGS-1:0]    regs;
  logic [CODE_IDX_W:0]        alloc;        // registers allocated
  logic [1:0]                 hdr_beat;     // 0,1 header, 2 = entries
  logic [CODE_IDX_W-1:0]      send_idx;
  logic [BEAT_W-1:0]          send_beat;
  logic [ENT_BITS-1:0]        cur_bits;

  assign instr_ready = (state == S_FILL);
  assign busy        = (state != S_FILL);

  // ---- offload beat generation ----
  assign cur_bits  = ENT_BITS'(regs[send_idx]);
  assign off_valid = (state == S_SEND);
  always_comb begin
    off_data = '0;
    off_last = 1'b0;
    unique case (hdr_beat)
      2'd0:    off_data = OFFLOAD_W'(hdr.iters);
      2'd1: begin
        off_data = OFFLOAD_W'({alloc, hdr.num_loops});
        off_last = (alloc == '0);
      end
      default: begin
        off_data = cur_bits[send_beat*OFFLOAD_W +: OFFLOAD_W];
        off_last = (32'(send_idx) + 1 == 32'(alloc)) && (send_beat == BEAT_W'(BEATS_PER_ENTRY-1));
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_FILL;
      hdr       <= '0;
      regs      <= '0;
      alloc     <= '0;
      hdr_beat  <= '0;
      send_idx  <= '0;
      send_beat <= '0;
      overflow  <= 1'b0;
    end else begin
      unique case (state)
        S_FILL: if (instr_valid) begin
          unique case (instr.kind)
            PSX_LOOP_START: begin
              regs     <= '0;
              alloc    <= '0;
              overflow <= 1'b0;
              hdr      <= '0;
            end
            PSX_CODE: begin
              if (32'(alloc) < NREGS) begin
                regs[alloc[CODE_IDX_W-1:0]].op      <= tfu_op_e'(instr.value[2:0]);
                regs[alloc[CODE_IDX_W-1:0]].tail    <= instr.value[3];
                regs[alloc[CODE_IDX_W-1:0]].dst     <= instr.value[9:4];
                regs[alloc[CODE_IDX_W-1:0]].src1    <= instr.value[15:10];
                regs[alloc[CODE_IDX_W-1:0]].src2    <= instr.value[21:16];
                regs[alloc[CODE_IDX_W-1:0]].loop_en <= '1;
                alloc <= alloc + 1'b1;
              end else begin
                overflow <= 1'b1;
              end
            end
            PSX_LOOP_COUNT:   hdr.num_loops <= instr.value[2:0];
            PSX_LOOP_ITER:    hdr.iters[instr.loop] <= instr.value[ITER_W-1:0];
            PSX_LOOP_DISABLE: regs[instr.creg].loop_en <= ~instr.value[NUM_LOOPS-1:0];
            PSX_BASE_ADDR:    regs[instr.creg].base <= instr.value[VA_W-1:0];
            PSX_STRIDE:       regs[instr.creg].astride[instr.loop] <= instr.value[ASTRIDE_W-1:0];
            PSX_REG_STRIDE:   if (instr.opnd < 2'd3)
                                regs[instr.creg].rstride[instr.opnd][instr.loop] <= instr.value[RSTRIDE_W-1:0];
            PSX_LOOP_END: begin
              state     <= S_SEND;
              hdr_beat  <= '0;
              send_idx  <= '0;
              send_beat <= '0;
            end
            default: ;
          endcase
        end
        S_SEND: if (off_ready) begin
          if (off_last) state <= S_WAIT;
          if (hdr_beat != 2'd2) hdr_beat <= hdr_beat + 1'b1;
          else if (send_beat == BEAT_W'(BEATS_PER_ENTRY-1)) begin
            send_beat <= '0;
            send_idx  <= send_idx + 1'b1;
          end else begin
            send_beat <= send_beat + 1'b1;
          end
        end
        S_WAIT: if (tfu_done) state <= S_FILL;
        default: state <= S_FILL;
      endcase
    end
  end

endmodule
