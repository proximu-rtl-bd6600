// tfu_agu: the TFU's address generation unit.
//
// A load or store micro-op carries its base virtual address, one signed
// byte stride per encoded loop and the loop indices at which it was
// unrolled.  The AGU forms
//     va = base + sum over l of idx[l] * astride[l]
// modulo 2^VA_W.  It is purely combinational: the address is used in the
// same cycle by the translation cache.  Per-loop base/stride addressing is
// what the paper's PSX encoding provides (TFUBaseAddres, TFUStride); the
// 32-bit stride width and the single-cycle form are this design's choices.
module tfu_agu
  import psx_pkg::*;
(
  input  logic [VA_W-1:0]                   base,
  input  logic [NUM_LOOPS-1:0][ASTRIDE_W-1:0] astride,
  input  logic [NUM_LOOPS-1:0][ITER_W-1:0]    idx,
  output logic [VA_W-1:0]                   va
);

  always_comb begin
    logic signed [VA_W-1:0] acc;
    acc = $signed(base);
    for (int l = 0; l < NUM_LOOPS; l++)
      acc = acc + VA_W'($signed({1'b0, idx[l]}) * $signed(astride[l]));
    va = acc;
  end

endmodule
