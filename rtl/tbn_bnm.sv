// tbn_bnm: batch-normalisation multiplier.
//
// Scales each of 32 channel values by its pretrained factor: out = (in *
// factor) >>> BN_FRAC, with the factor a signed fixed-point number with
// BN_FRAC fractional bits (read from MIS).  With bn_en low the value is only
// sign-extended.  The multiplication by a pretrained factor is the paper's;
// the fixed-point format and the arithmetic shift (rounding toward minus
// infinity) are this design's choices.  Purely combinational.
module tbn_bnm
  import tbn_pkg::*;
(
  input  logic       bn_en,
  input  psum_vec_t  in,
  input  mis_vec_t   factor,
  output dval_vec_t  out
);

  always_comb begin
    for (int k = 0; k < NCH; k++) begin
      logic signed [TMPW+MISW-1:0] p;
      p = (TMPW+MISW)'(in[k]) * (TMPW+MISW)'(factor[k]);
      out[k] = bn_en ? DW'(p >>> BN_FRAC) : DW'(in[k]);
    end
  end

endmodule
