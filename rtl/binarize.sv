// binarize: sign binarization of bfloat16 query or key elements.
//
// Each element x becomes one bit: 1 stands for +1 (x >= 0) and 0 for -1
// (x < 0). This is Q = sign(Q_c), K = sign(K_c) of the method; the
// standardization coefficients used during training are positive and do not
// change a sign, so they do not appear in hardware. Zero and negative zero map
// to +1 (a choice of this design: the sign of exactly zero is not defined by
// the method). Purely combinational, LANES elements per call.
module binarize
  import had_pkg::*;
#(
  parameter int unsigned LANES = LANES_DEF
) (
  input  bf16_t [LANES-1:0] x,    // bfloat16 elements
  output logic  [LANES-1:0] bits  // 1 = +1, 0 = -1
);

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      // negative only when the sign bit is set and the magnitude is non-zero
      bits[i] = !(x[i][15] && (x[i][14:0] != '0));
    end
  end

endmodule
