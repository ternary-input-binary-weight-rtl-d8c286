// tbn_qtn: quantisation unit (fixed point to ternary).
//
// Each of 32 channels has a pair of comparators: value > +threshold gives
// +1, value < -threshold gives -1, anything else 0.  The OR of the two
// comparator outputs is the channel's sparsity-map bit; the value bit is set
// for +1 and clear for -1.  Thresholds come per channel from MIS.  The
// comparator pair against a threshold and its negation, and the map/value
// encoding, follow the paper; strict comparisons are this design's choice.
//
// Outputs: `map` (bit k = channel k non-zero), `vals` (the value bits of the
// non-zero channels packed from bit 0 in stream order, i.e. channel 31
// first) and `nnz` (their count).  Purely combinational.
module tbn_qtn
  import tbn_pkg::*;
(
  input  dval_vec_t             in,
  input  mis_vec_t              thr,
  output logic [NCH-1:0]        map,
  output logic [NCH-1:0]        vals,
  output logic [$clog2(NCH+1)-1:0] nnz
);

  logic [NCH-1:0] pos, neg;

  always_comb begin
    logic [31:0] n;
    n    = 0;
    vals = '0;
    for (int k = 0; k < NCH; k++) begin
      pos[k] = in[k] > DW'(thr[k]);
      neg[k] = in[k] < -DW'(thr[k]);
      map[k] = pos[k] | neg[k];
    end
    for (int k = NCH - 1; k >= 0; k--)
      if (map[k]) begin
        vals[n[$clog2(NCH)-1:0]] = pos[k] & ~neg[k];
        n = n + 1;
      end
    nnz = ($clog2(NCH+1))'(n);
  end

endmodule
