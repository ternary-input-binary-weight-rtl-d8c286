// tbn_plr: pooling-ReLU unit.
//
// Takes the four partial-sum words of a 2x2 output block (32 channels each),
// keeps the per-channel maximum and clamps negative results to zero.  When
// pooling is off the first word passes unchanged (no ReLU), as layers without
// a pooling stage feed the quantiser directly.  2x2 max pooling followed by a
// ReLU is what the paper's block shows; the bypass is this design's choice.
// Purely combinational.
module tbn_plr
  import tbn_pkg::*;
(
  input  logic        pool_en,
  input  psum_vec_t   in0,
  input  psum_vec_t   in1,
  input  psum_vec_t   in2,
  input  psum_vec_t   in3,
  output psum_vec_t   out
);

  always_comb begin
    for (int k = 0; k < NCH; k++) begin
      psum_t m;
      m = in0[k];
      if (pool_en) begin
        if (in1[k] > m) m = in1[k];
        if (in2[k] > m) m = in2[k];
        if (in3[k] > m) m = in3[k];
        if (m < 0)      m = '0;
      end
      out[k] = m;
    end
  end

endmodule
