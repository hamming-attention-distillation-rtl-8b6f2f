// logit_scale: scale and mask stage between top-N selection and softmax.
//
// Takes the kept logits (sorted, largest first) and produces, for each entry,
// whether it takes part in the softmax (keep) and its softmax exponent in base
// 2: t = (s_max - s) * log2(e) / sqrt(DK), unsigned Q16. Subtracting the row
// maximum is the usual way to keep exp() in range and does not change the
// softmax; writing exp(x) as 2^(x*log2 e) folds the 1/sqrt(d_k) scale of the
// method and the change of base into one multiply by scale = log2(e)/sqrt(d_k)
// in Q16 (2955 for d_k = 1024, 11819 for d_k = 64; had_pkg::scale_q16 gives
// it). The scale is an input so that a head of smaller d_k, zero-padded to DK
// elements, can be run with its own temperature.
// An entry is dropped when it is not valid, lies at or beyond the runtime
// count nsel, or is masked (mask_en and masked[j]); s_max is the first entry
// that survives. The mask follows the order drawn in the method's block
// diagram (TopK, Scale, Mask, SoftMax), so a masked key still occupies a
// top-N slot. Purely combinational.
module logit_scale
  import had_pkg::*;
#(
  parameter int unsigned N         = TOPN_DEF,
  parameter int unsigned SW        = $clog2(DK_DEF) + 2,
  localparam int unsigned NW       = $clog2(N + 1)
) (
  input  logic signed [N-1:0][SW-1:0] score,
  input  logic [N-1:0]                valid,
  input  logic [N-1:0]                masked,
  input  logic                        mask_en,
  input  logic [NW-1:0]               nsel,
  input  logic [17:0]                 scale,  // log2(e)/sqrt(d_k), Q16
  output logic [N-1:0]                keep,
  output logic [N-1:0][31:0]          t
);

  logic signed [SW-1:0] smax;
  logic                 found;

  always_comb begin
    for (int j = 0; j < N; j++) begin
      keep[j] = valid[j] && (j < int'(nsel)) && !(mask_en && masked[j]);
    end
    smax  = '0;
    found = 1'b0;
    for (int j = 0; j < N; j++) begin
      if (keep[j] && !found) begin
        smax  = $signed(score[j]);
        found = 1'b1;
      end
    end
    for (int j = 0; j < N; j++) begin
      logic [SW:0] d;
      d    = (SW+1)'(smax) - (SW+1)'($signed(score[j]));  // >= 0 for kept entries
      t[j] = keep[j] ? 32'(d) * 32'(scale) : '0;
    end
  end

endmodule
