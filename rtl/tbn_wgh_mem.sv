// tbn_wgh_mem: weight memory, DEPTH words of 96 bits.
//
// A word is one flattened kernel row of one output channel: three kernel
// columns x 32 input channels, column 0 in bits 95:64, bit 64+b = input
// channel b.  For a layer the words are ordered output chunk, input chunk,
// output channel, kernel row: address = ((oc*n_ic + ic)*32 + k)*3 + r.
// The 96-bit flattened rows and the 6 x 48 kB capacity follow the paper;
// the ordering of the words and the single write / synchronous read port are
// this design's choices.
module tbn_wgh_mem
  import tbn_pkg::*;
#(
  parameter int DEPTH = tbn_pkg::WGH_DEPTH,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            we,
  input  logic [AW-1:0]   waddr,
  input  logic [WINB-1:0] wdata,
  input  logic [AW-1:0]   raddr,
  output logic [WINB-1:0] rdata
);

  logic [WINB-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
