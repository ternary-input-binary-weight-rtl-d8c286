// tbn_pcl: processing cluster.
//
// One cluster convolves the current 1x3 input window (three pixels x 32
// input channels = 96 positions) with one row of the 3x3 kernel for 32 output
// channels at once.  It holds the window's sparsity bits (RMA) and packed
// value bits (RVA), broadcast to all clusters, and its own kernel-row weights
// (RWG, 32 words of 96 bits, written one word at a time).  The slicer and
// sorting network spread the non-zero positions over NPE engines, and an
// adder tree sums the engines' partial sums.  Three clusters (one per kernel
// row), six engines each and the register names follow the paper.
//
// Timing: `start` captures rma/rva into RMA/RVA; the next cycle the sorted
// loads enter the PEs; `done` pulses once all PEs are idle, with `psum`
// valid from then on until the next start.  `done` is sampled high 3 + L
// clock edges after the edge that sees `start`, where L is the slowest PE's
// load (its number of non-zero positions); `cycles` reports L.
module tbn_pcl
  import tbn_pkg::*;
#(
  parameter int NPE = tbn_pkg::NPE
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wg_we,
  input  logic [$clog2(NCH)-1:0]     wg_idx,
  input  logic [WINB-1:0]            wg_data,
  input  logic                       start,
  input  logic [WINB-1:0]            rma,
  input  logic [WINB-1:0]            rva,
  output logic                       done,
  output logic signed [NCH-1:0][PCLW-1:0] psum,
  output logic [$clog2(WINB+1)-1:0]  cycles
);

  localparam int GW  = WINB / (2 * NPE);
  localparam int PLW = $clog2(2 * GW + 1);

  logic [WINB-1:0]           rma_q, rva_q;
  logic [NCH-1:0][WINB-1:0]  rwg_q;
  logic                      go, running;

  logic [NPE-1:0][2*GW-1:0]       pe_pma, pe_pva;
  logic [NPE-1:0][NCH-1:0][2*GW-1:0] pe_pwg;
  logic [NPE-1:0][PLW-1:0]        pe_load;
  logic [PLW-1:0]                 max_load;
  logic [NPE-1:0]                 pe_busy;
  logic signed [NPE-1:0][NCH-1:0][PCLW-1:0] pe_psum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rma_q   <= '0;
      rva_q   <= '0;
      rwg_q   <= '0;
      go      <= 1'b0;
      running <= 1'b0;
      done    <= 1'b0;
      cycles  <= '0;
    end else begin
      if (wg_we) rwg_q[wg_idx] <= wg_data;
      go   <= start;
      done <= 1'b0;
      if (start) begin
        rma_q <= rma;
        rva_q <= rva;
      end
      if (go) begin
        running <= 1'b1;
        cycles  <= ($clog2(WINB+1))'(max_load);
      end else if (running && pe_busy == '0) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

  tbn_sort #(.NPE(NPE), .GW(GW), .NOUT(NCH)) u_sort (
    .rma(rma_q), .rva(rva_q), .rwg(rwg_q),
    .pe_pma(pe_pma), .pe_pva(pe_pva), .pe_pwg(pe_pwg),
    .pe_load(pe_load), .max_load(max_load)
  );

  for (genvar i = 0; i < NPE; i++) begin : g_pe
    tbn_pe #(.NB(2*GW), .NOUT(NCH), .PSW(PCLW)) u_pe (
      .clk(clk), .rst_n(rst_n), .start(go),
      .pma(pe_pma[i]), .pva(pe_pva[i]), .pwg(pe_pwg[i]),
      .busy(pe_busy[i]), .psum(pe_psum[i])
    );
  end

  // adder tree over the PEs
  always_comb begin
    for (int k = 0; k < NCH; k++) begin
      psum[k] = '0;
      for (int i = 0; i < NPE; i++) psum[k] = psum[k] + pe_psum[i][k];
    end
  end

endmodule
