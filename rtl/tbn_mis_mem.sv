// tbn_mis_mem: miscellaneous-value memory, two 1 kB arrays.
//
// Array 0 holds the quantisation thresholds, array 1 the batch-normalisation
// factors, 16-bit each; a word carries the 32 channels of one output chunk,
// so 16 words cover 512 channels.  Both words of a chunk are read together.
// The two 1 kB arrays and their use for thresholds (and, by the block
// diagram, for the normalisation factors) follow the paper; the word shape is
// this design's choice.
module tbn_mis_mem
  import tbn_pkg::*;
#(
  parameter int DEPTH = tbn_pkg::MIS_DEPTH,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic          wsel,     // 0: thresholds, 1: BN factors
  input  logic [AW-1:0] waddr,
  input  mis_vec_t      wdata,
  input  logic [AW-1:0] raddr,
  output mis_vec_t      thr,
  output mis_vec_t      factor
);

  mis_vec_t thr_mem [DEPTH];
  mis_vec_t bn_mem  [DEPTH];

  always_ff @(posedge clk) begin
    if (we && !wsel) thr_mem[waddr] <= wdata;
    if (we &&  wsel) bn_mem[waddr]  <= wdata;
    thr    <= thr_mem[raddr];
    factor <= bn_mem[raddr];
  end

endmodule
