// tbn_pkg: shared constants and types of the ternary-input binary-weight (TBN)
// accelerator.
//
// Ternary encoding used everywhere: a feature-map element is a sparsity-map
// bit (1 = non-zero) plus, for non-zero elements only, one value bit in the
// value stream (1 = +1, 0 = -1).  Weights are binary with the same polarity
// (1 = +1, 0 = -1).  Feature maps are stored channel-first: one 32-bit map
// word holds channels 32c..32c+31 of one pixel, bit b = channel 32c+b, and the
// value bits of a word follow each other in the stream from bit 31 down to
// bit 0.  Word size, the 1x3 input window, 32 output channels per pass, six
// PEs and three processing clusters follow the paper; the widths of partial
// sums and of the normalisation constants are this design's own choices.
package tbn_pkg;

  localparam int NCH    = 32;          // channels per map word / per pass
  localparam int KW     = 3;           // kernel width = window width
  localparam int WINB   = NCH * KW;    // 96-bit window and weight word
  localparam int NPCL   = 3;           // one processing cluster per kernel row
  localparam int NPE    = 6;           // PEs per cluster
  localparam int PCLW   = 8;           // cluster sum width (|sum| <= 96)
  localparam int TMPW   = 16;          // partial-sum width in TMP
  localparam int MISW   = 16;          // threshold / BN factor width
  localparam int BN_FRAC = 8;          // fractional bits of the BN factor
  localparam int DW     = 24;          // width after BN, into QTN

  localparam int MAP_DEPTH = 4096;     // 16 kB per bank / 4 B
  localparam int WGH_DEPTH = 24576;    // 6 x 48 kB / 12 B
  localparam int TMP_DEPTH = 1056;     // 4 x 16.5 kB / 64 B
  localparam int MIS_DEPTH = 16;       // 1 kB / 64 B
  localparam int VAL_DEPTH = 98304;    // 12 kB in bits

  localparam int MAP_AW = $clog2(MAP_DEPTH);
  localparam int WGH_AW = $clog2(WGH_DEPTH);
  localparam int TMP_AW = $clog2(TMP_DEPTH);
  localparam int MIS_AW = $clog2(MIS_DEPTH);
  localparam int VAL_AW = $clog2(VAL_DEPTH + 1);

  typedef logic signed [TMPW-1:0] psum_t;
  typedef psum_t [NCH-1:0]         psum_vec_t;
  typedef logic signed [DW-1:0]   dval_t;
  typedef dval_t [NCH-1:0]         dval_vec_t;
  typedef logic signed [MISW-1:0] mis_t;
  typedef mis_t [NCH-1:0]          mis_vec_t;

  // Per-layer parameters given to the controller.  A fully connected layer
  // is run as a 1x1 image whose channels are all map words of the input.
  typedef struct packed {
    logic [5:0] width;     // input image width, 1..32
    logic [5:0] height;    // input image height, 1..32
    logic [8:0] n_ic;      // input channel chunks of 32, 1..256
    logic [5:0] n_oc;      // output channel chunks of 32 in this run, 1..32
    logic [5:0] oc_first;  // first output chunk of this run (0 = whole layer)
    logic       pool_en;   // 2x2 max pooling + ReLU (PLR)
    logic       bn_en;     // batch normalisation (BNM)
    logic       in_sel;    // 0: MAP bank 0 / VAL1 are the input
  } layer_cfg_t;

  // Ternary product of a value bit and a weight bit: +1 when equal.
  function automatic logic signed [1:0] tmul(input logic v, input logic w);
    return (v ^ w) ? -2'sd1 : 2'sd1;
  endfunction

endpackage
