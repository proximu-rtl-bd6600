// psx_pkg: shared constants and types of the near-cache Tensor Functional
// Unit (TFU) design and of the Proximity Support Extensions (PSX) that feed it.
//
// Sizes that follow the paper: 4 encoded loops, 32 TFU code registers, a
// 48-entry data register file of 64-byte registers, 8-entry in-order issue
// queues, a 6-entry translation cache, an 8-byte offload bus and int8 MAC
// units 64 bytes wide.  Everything else here (field widths, the opcode set,
// the "tail" position bit, the beat layout of the offload) is this design's
// own choice, because the paper gives the contents of a code register only
// as a list and estimates them at 8 bytes.
package psx_pkg;

  // ---- sizes from the paper ----
  localparam int unsigned NUM_LOOPS   = 4;    // loops encoded per kernel
  localparam int unsigned CODE_REGS   = 32;   // TFU code registers
  localparam int unsigned DATA_REGS   = 48;   // TFU data registers
  localparam int unsigned LINE_BYTES  = 64;   // one register = one cache line
  localparam int unsigned IQ_DEPTH    = 8;    // each in-order issue queue
  localparam int unsigned TC_ENTRIES  = 6;    // translation cache entries
  localparam int unsigned OFFLOAD_W   = 64;   // 8-byte offload bus
  localparam int unsigned NUM_THREADS = 4;    // 4-way SMT core

  // ---- derived / chosen widths ----
  localparam int unsigned DATA_W      = LINE_BYTES * 8;   // 512
  localparam int unsigned REG_W       = 6;                // log2(48) rounded up
  localparam int unsigned CODE_IDX_W  = 5;                // log2(32)
  localparam int unsigned LOOP_IDX_W  = 2;                // log2(4)
  localparam int unsigned ITER_W      = 16;               // iteration count width
  localparam int unsigned VA_W        = 48;               // virtual address
  localparam int unsigned PA_W        = 48;               // physical address
  localparam int unsigned PAGE_BITS   = 12;               // 4 KiB pages
  localparam int unsigned VPN_W       = VA_W - PAGE_BITS;
  localparam int unsigned PPN_W       = PA_W - PAGE_BITS;
  localparam int unsigned ASTRIDE_W   = 32;               // signed byte stride
  localparam int unsigned RSTRIDE_W   = 4;                // signed register stride
  localparam int unsigned SEQ_W       = 6;                // age tag of a micro-op
  localparam int unsigned THREAD_W    = 2;

  // TFU levels, in the order of the cache they sit next to.
  typedef enum logic [1:0] {LVL_L1 = 2'd0, LVL_L2 = 2'd1, LVL_L3 = 2'd2} tfu_level_e;

  // TFU opcodes.  MAC follows the int8 dot-product form used by DNN kernels
  // on x86 (unsigned activations times signed weights, four products summed
  // into each of 16 int32 lanes).
  typedef enum logic [2:0] {
    OP_NOP   = 3'd0,
    OP_LOAD  = 3'd1,   // dst <- mem[va]
    OP_STORE = 3'd2,   // mem[va] <- src1
    OP_MAC   = 3'd3,   // dst.i32[j] += sum_k u8(src1[4j+k]) * s8(src2[4j+k])
    OP_ZERO  = 3'd4,   // dst <- 0
    OP_RELU  = 3'd5,   // dst.i32[j] <- max(src1.i32[j], 0)
    OP_MAX   = 3'd6    // dst.s8[b] <- max(src1.s8[b], src2.s8[b])  (pooling)
  } tfu_op_e;

  function automatic logic is_mem_op(tfu_op_e op);
    return (op == OP_LOAD) || (op == OP_STORE);
  endfunction

  // Register operands that take per-loop strides.
  localparam int unsigned NUM_OPND = 3;    // 0 = dst, 1 = src1, 2 = src2

  // One TFU code register: a pre-decoded kernel instruction and its loop
  // meta-data.  loop_en[l] = 1 means the instruction sits inside loop l.
  // For a loop it is outside of, the instruction runs only at that loop's
  // first iteration (tail = 0) or only at its last one (tail = 1).
  typedef struct packed {
    tfu_op_e                                        op;
    logic                                           tail;
    logic [NUM_LOOPS-1:0]                           loop_en;
    logic [REG_W-1:0]                               dst;
    logic [REG_W-1:0]                               src1;
    logic [REG_W-1:0]                               src2;
    logic [VA_W-1:0]                                base;
    logic [NUM_LOOPS-1:0][ASTRIDE_W-1:0]            astride;
    logic [NUM_OPND-1:0][NUM_LOOPS-1:0][RSTRIDE_W-1:0] rstride;
  } code_entry_t;

  localparam int unsigned CODE_ENTRY_W = $bits(code_entry_t);
  localparam int unsigned BEATS_PER_ENTRY = (CODE_ENTRY_W + OFFLOAD_W - 1) / OFFLOAD_W;
  localparam int unsigned HDR_BEATS = 2;

  // Kernel-wide loop information.  Loop 0 is innermost.
  typedef struct packed {
    logic [2:0]                          num_loops;   // 1..4
    logic [CODE_IDX_W:0]                 num_insts;   // 1..32
    logic [NUM_LOOPS-1:0][ITER_W-1:0]    iters;       // iteration counts
  } kernel_hdr_t;

  // One unrolled micro-op as held in an issue queue.
  typedef struct packed {
    tfu_op_e                              op;
    logic [SEQ_W-1:0]                     seq;
    logic [REG_W-1:0]                     dst;
    logic [REG_W-1:0]                     src1;
    logic [REG_W-1:0]                     src2;
    logic [VA_W-1:0]                      base;
    logic [NUM_LOOPS-1:0][ASTRIDE_W-1:0]  astride;
    logic [NUM_LOOPS-1:0][ITER_W-1:0]     idx;
  } uop_t;

  // Decoded instructions reaching the dispatch stage of the core.
  typedef enum logic [3:0] {
    PSX_LOOP_START   = 4'd0,   // TFULoopStart: flush the code registers
    PSX_CODE         = 4'd1,   // a kernel instruction tagged with the PSX-bit
    PSX_LOOP_COUNT   = 4'd2,   // TFULoopCount
    PSX_LOOP_ITER    = 4'd3,   // TFULoopIteration
    PSX_LOOP_DISABLE = 4'd4,   // TFULoopDisable
    PSX_BASE_ADDR    = 4'd5,   // TFUBaseAddres
    PSX_STRIDE       = 4'd6,   // TFUStride
    PSX_REG_STRIDE   = 4'd7,   // TFURegStride
    PSX_LOOP_END     = 4'd8    // TFULoopEnd: offload to the TFU
  } psx_kind_e;

  typedef struct packed {
    logic                    psx;      // PSX-bit
    logic [THREAD_W-1:0]     thread;   // SMT thread
    psx_kind_e               kind;
    logic [CODE_IDX_W-1:0]   creg;     // target code register (meta-data ops)
    logic [LOOP_IDX_W-1:0]   loop;     // target loop (count/iter/stride ops)
    logic [1:0]              opnd;     // operand for TFURegStride
    logic [63:0]             value;    // immediate value
  } dec_instr_t;

  // Field layout of value for PSX_CODE: [2:0] op, [3] tail,
  // [9:4] dst, [15:10] src1, [21:16] src2.

  // Age comparison of two micro-op tags; a is older than b.
  function automatic logic seq_older(logic [SEQ_W-1:0] a, logic [SEQ_W-1:0] b);
    logic [SEQ_W-1:0] d;
    d = b - a;
    return (d != '0) && !d[SEQ_W-1];
  endfunction

  // Which TFU an SMT thread is bound to: SMT0 and SMT3 -> L1, SMT1 -> L2,
  // SMT2 -> L3 (Figure 11).
  function automatic tfu_level_e tfu_of_thread(logic [THREAD_W-1:0] t);
    case (t)
      2'd1:    return LVL_L2;
      2'd2:    return LVL_L3;
      default: return LVL_L1;
    endcase
  endfunction

endpackage
