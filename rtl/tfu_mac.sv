// tfu_mac: one 64-byte compute unit of the TFU.
//
// A TFU has one or more of these units; each one executes one compute
// micro-op per cycle on whole 64-byte registers.  For int8 inference the
// main operation is MAC: the 64 bytes of src1 are read as unsigned
// activations, the 64 bytes of src2 as signed weights, and the four products
// of each group of four bytes are added to one of the 16 signed 32-bit lanes
// of the accumulator acc (the current value of the destination register):
//     res.i32[j] = acc.i32[j] + sum_{k<4} u8(src1[4j+k]) * s8(src2[4j+k])
// That is 64 multiply-accumulates per instruction.  The other opcodes serve
// the non-MAC primitives the paper studies: ZERO (clear an accumulator),
// RELU (max with 0 per int32 lane, for fused convolution+ReLU) and MAX (per
// signed byte, for max pooling).  The unit is combinational; the TFU writes
// `res` into the destination register at the clock edge.
//
// The 64-byte width and int8 data follow the paper; the dot-product form and
// the opcode set are this design's choices.
module tfu_mac
  import psx_pkg::*;
(
  input  tfu_op_e             op,
  input  logic [DATA_W-1:0]   src1,
  input  logic [DATA_W-1:0]   src2,
  input  logic [DATA_W-1:0]   acc,
  output logic [DATA_W-1:0]   res
);

  localparam int unsigned LANES = DATA_W / 32;

  always_comb begin
    logic signed [31:0] sum;
    sum = '0;
    res = acc;
    unique case (op)
      OP_MAC: begin
        for (int j = 0; j < LANES; j++) begin
          sum = $signed(acc[32*j +: 32]);
          for (int k = 0; k < 4; k++)
            sum = sum + 32'($signed({1'b0, src1[8*(4*j+k) +: 8]}) * $signed(src2[8*(4*j+k) +: 8]));
          res[32*j +: 32] = sum;
        end
      end
      OP_ZERO: res = '0;
      OP_RELU:
        for (int j = 0; j < LANES; j++)
          res[32*j +: 32] = src1[32*j+31] ? 32'd0 : src1[32*j +: 32];
      OP_MAX:
        for (int b = 0; b < LINE_BYTES; b++)
          res[8*b +: 8] = ($signed(src1[8*b +: 8]) > $signed(src2[8*b +: 8])) ? src1[8*b +: 8]
                                                                           : src2[8*b +: 8];
      default: res = acc;
    endcase
  end

endmodule
