// tbn_val_fifo: value-stream FIFO.
//
// Stores one bit per non-zero feature-map element (1 = +1, 0 = -1) in the
// order the map words are stored, most significant channel first.  Bits are
// pushed and popped one per cycle.  Because a layer reads its input stream
// once per output-channel chunk, the read pointer can be rewound to the
// start; `clr` empties the FIFO before a layer writes into it.  Pushing into
// a full FIFO drops the bit and sets the sticky `overflow` flag.  A serial
// FIFO of 12 kB is the paper's; rewind, clear, the overflow flag and the
// peek port (for reading results out) are this design's choices.
//
// Timing: `pop` returns the bit at the read pointer in `dout` on the next
// cycle with `dout_valid`.
module tbn_val_fifo
  import tbn_pkg::*;
#(
  parameter int DEPTH = tbn_pkg::VAL_DEPTH,
  localparam int AW = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          rewind,
  input  logic          push,
  input  logic          din,
  input  logic          pop,
  output logic          dout,
  output logic          dout_valid,
  output logic [AW-1:0] count,
  output logic          overflow,
  input  logic [AW-1:0] peek_addr,
  output logic          peek_data
);

  logic          mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;

  assign count     = wr_ptr - rd_ptr;
  assign peek_data = mem[peek_addr];

  always_ff @(posedge clk) begin
    if (push && !clr && wr_ptr != AW'(DEPTH)) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      dout       <= 1'b0;
      dout_valid <= 1'b0;
      overflow   <= 1'b0;
    end else begin
      dout_valid <= 1'b0;
      if (clr) begin
        wr_ptr   <= '0;
        rd_ptr   <= '0;
        overflow <= 1'b0;
      end else begin
        if (push) begin
          if (wr_ptr == AW'(DEPTH)) overflow <= 1'b1;
          else                      wr_ptr   <= wr_ptr + 1'b1;
        end
        if (rewind) rd_ptr <= '0;
        else if (pop) begin
          dout       <= mem[rd_ptr];
          dout_valid <= 1'b1;
          rd_ptr     <= rd_ptr + 1'b1;
        end
      end
    end
  end

  // popping an empty FIFO is a controller error
  always_ff @(posedge clk)
    if (rst_n && pop && !rewind && !clr)
      assert (rd_ptr != wr_ptr) else $error("tbn_val_fifo: pop while empty");

endmodule
