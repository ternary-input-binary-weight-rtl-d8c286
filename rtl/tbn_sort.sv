// tbn_sort: data slicer (SLC) and workload-balancing sorting network (SORT).
//
// The window's sparsity bits are cut into 2*NPE groups of GW bits (group 0
// is the most significant).  Each group's workload is its number of set
// bits; its value bits are the run of the packed value word that starts
// after the values of all earlier groups.  A sorting network of
// compare-exchange cells (odd-even transposition, NG rows) orders the groups by workload, highest first, in
// one combinational stage.  PE i then takes the i-th highest group (upper
// half of its PMA/PVA/PWG) and the i-th lowest group (lower half), so the
// slowest PE is as fast as the split allows.  Grouping, the sort and the
// high/low pairing follow the paper; the network moves (workload, group
// index) pairs and the data are then picked by index, which is equivalent to
// moving the data through the network.
//
// Interface: purely combinational.  rma/rva: window sparsity bits and packed
// values (first value in bit 0); rwg: per output channel the window's weight
// bits.  pe_* are the per-PE loads; pe_load is each PE's number of cycles and
// max_load the cluster's.
module tbn_sort #(
  parameter int NPE  = 6,
  parameter int GW   = 8,
  parameter int NOUT = 32,
  localparam int NG  = 2 * NPE,
  localparam int WB  = NG * GW,
  localparam int LW  = $clog2(GW + 1),
  localparam int PLW = $clog2(2 * GW + 1)
) (
  input  logic [WB-1:0]                   rma,
  input  logic [WB-1:0]                   rva,
  input  logic [NOUT-1:0][WB-1:0]         rwg,
  output logic [NPE-1:0][2*GW-1:0]        pe_pma,
  output logic [NPE-1:0][2*GW-1:0]        pe_pva,
  output logic [NPE-1:0][NOUT-1:0][2*GW-1:0] pe_pwg,
  output logic [NPE-1:0][PLW-1:0]         pe_load,
  output logic [PLW-1:0]                  max_load
);

  typedef struct packed {
    logic [LW-1:0]          load;
    logic [$clog2(NG)-1:0]  idx;
  } tag_t;

  logic [NG-1:0][GW-1:0]    g_map, g_val;
  logic [NG-1:0][LW-1:0]    g_load;
  tag_t [NG-1:0]            tags;

  // slicer: split map, count workloads, cut the value stream
  always_comb begin
    logic [31:0] off;
    off = 0;
    for (int g = 0; g < NG; g++) begin
      g_map[g]  = rma[WB-1-g*GW -: GW];
      g_load[g] = LW'($countones(g_map[g]));
      g_val[g]  = GW'(rva >> off);
      off       = off + g_load[g];
    end
  end

  // sorting network: NG stages of odd-even transposition, each a row of
  // compare-exchange cells on neighbouring tags, descending by workload
  tag_t [NG-1:0] st [NG+1];
  for (genvar g = 0; g < NG; g++) begin : g_init
    assign st[0][g] = '{load: g_load[g], idx: g};
  end
  for (genvar s = 0; s < NG; s++) begin : g_stage
    for (genvar j = 0; j < NG; j++) begin : g_cell
      if ((j % 2) == (s % 2) && j + 1 < NG) begin : g_cx
        logic swap;
        assign swap         = st[s][j+1].load > st[s][j].load;
        assign st[s+1][j]   = swap ? st[s][j+1] : st[s][j];
        assign st[s+1][j+1] = swap ? st[s][j]   : st[s][j+1];
      end else if (!((j % 2) == ((s + 1) % 2) && j > 0)) begin : g_pass
        assign st[s+1][j] = st[s][j];
      end
    end
  end
  assign tags = st[NG];

  // pairing: PE i gets the i-th highest and the i-th lowest group
  always_comb begin
    max_load = '0;
    for (int i = 0; i < NPE; i++) begin
      logic [31:0] hi, lo;
      hi = tags[i].idx;
      lo = tags[NG-1-i].idx;
      pe_pma[i]  = {g_map[hi], g_map[lo]};
      // first value belongs to the highest PMA bit, i.e. to group hi
      pe_pva[i]  = (2*GW)'(g_val[hi] & ((1 << g_load[hi]) - 1)) |
                   (2*GW)'(g_val[lo] << g_load[hi]);
      pe_load[i] = PLW'(g_load[hi]) + PLW'(g_load[lo]);
      for (int k = 0; k < NOUT; k++)
        pe_pwg[i][k] = {rwg[k][WB-1-hi*GW -: GW], rwg[k][WB-1-lo*GW -: GW]};
      if (pe_load[i] > max_load) max_load = pe_load[i];
    end
  end

endmodule
