// tbn_map_mem: sparsity-map memory, two banks of DEPTH x 32 bits.
//
// One bank holds the current layer's input map, the other receives its
// output; the roles swap from layer to layer.  Words are stored channel-first:
// address = chunk*H*W + y*W + x, bit b = channel 32*chunk + b.  The two 16 kB
// banks and the channel-first order are the paper's; one write and one
// synchronous read port (data one cycle after the address) are this design's
// model of the SRAM macros.
module tbn_map_mem
  import tbn_pkg::*;
#(
  parameter int DEPTH = tbn_pkg::MAP_DEPTH,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic           clk,
  input  logic           we,
  input  logic           wbank,
  input  logic [AW-1:0]  waddr,
  input  logic [NCH-1:0] wdata,
  input  logic           rbank,
  input  logic [AW-1:0]  raddr,
  output logic [NCH-1:0] rdata
);

  logic [NCH-1:0] bank0 [DEPTH];
  logic [NCH-1:0] bank1 [DEPTH];

  always_ff @(posedge clk) begin
    if (we && !wbank) bank0[waddr] <= wdata;
    if (we &&  wbank) bank1[waddr] <= wdata;
    rdata <= rbank ? bank1[raddr] : bank0[raddr];
  end

endmodule
