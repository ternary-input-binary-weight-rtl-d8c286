// tbn_pe: sparsity-aware processing engine.
//
// Holds NB input positions of one window: PMA (sparsity bits), PVA (the value
// bits of the non-zero positions, first value in bit 0) and, for each of NOUT
// output channels, PWG (the NB weight bits).  Each cycle a priority encoder
// finds the highest set PMA bit, a multiplexer per output channel picks that
// position's weight bit, and NOUT XOR gates form the ternary x binary product
// with PVA[0]; the products (+1 when the bits agree, -1 otherwise) are added
// into the NOUT PSUM registers.  The PMA bit is then cleared and PVA shifts
// right, so zero inputs cost no cycle.  This structure follows the paper.
//
// Interface: `start` loads pma/pva/pwg and clears PSUM; `busy` is high while
// set PMA bits remain; `psum` is valid when `busy` is low.  A window with k
// non-zero positions takes exactly k cycles after the load cycle.
module tbn_pe #(
  parameter int NB   = 16,
  parameter int NOUT = 32,
  parameter int PSW  = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [NB-1:0]        pma,
  input  logic [NB-1:0]        pva,
  input  logic [NOUT-1:0][NB-1:0] pwg,
  output logic                 busy,
  output logic signed [NOUT-1:0][PSW-1:0] psum
);

  logic [NB-1:0]           pma_q, pva_q;
  logic [NOUT-1:0][NB-1:0] pwg_q;
  logic [$clog2(NB)-1:0]   pos;

  // priority encoder: highest set bit
  always_comb begin
    pos = '0;
    for (int i = 0; i < NB; i++)
      if (pma_q[i]) pos = i[$clog2(NB)-1:0];
  end

  assign busy = |pma_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pma_q <= '0;
      pva_q <= '0;
      pwg_q <= '0;
      psum  <= '0;
    end else if (start) begin
      pma_q <= pma;
      pva_q <= pva;
      pwg_q <= pwg;
      psum  <= '0;
    end else if (busy) begin
      for (int k = 0; k < NOUT; k++)
        psum[k] <= psum[k] + PSW'(tbn_pkg::tmul(pva_q[0], pwg_q[k][pos]));
      pma_q[pos] <= 1'b0;
      pva_q      <= pva_q >> 1;
    end
  end

endmodule
