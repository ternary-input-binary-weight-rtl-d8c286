// tbn_tmp_mem: partial-sum memory.
//
// One word holds the 16-bit partial sums of 32 output channels for one
// output pixel (address y*W + x), so a 32x32 layer needs 1024 of the 1056
// words that 4 x 16.5 kB provide.  The clusters' results are added into it
// row after row and it is read back by the pooling / quantisation path.
// Capacity follows the paper; word shape, one write port and a synchronous
// read port are this design's choices.
module tbn_tmp_mem
  import tbn_pkg::*;
#(
  parameter int DEPTH = tbn_pkg::TMP_DEPTH,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic       clk,
  input  logic       we,
  input  logic [AW-1:0] waddr,
  input  psum_vec_t  wdata,
  input  logic [AW-1:0] raddr,
  output psum_vec_t  rdata
);

  psum_vec_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
