// tb_tbn_sort: self-checking test of the slicer and sorting network.
// 1) The 3-PE, 6-group example: group workloads 4,8,0,4,4,5 give PE loads
//    12/4/9 unsorted and must give 8/9/8 (9 cycles) after sorting.
// 2) Random windows at the default 6 PEs / 12 groups: the PE loads must
//    cover every non-zero exactly once (sum of per-PE ternary products equals
//    the directly computed window dot product for every output channel), each
//    PE load must equal its PMA population, and the slowest PE must match an
//    independent sort-and-pair reference.
module tb_tbn_sort;
  int checks = 0, failures = 0;

  // ---- small instance: the worked example ----
  localparam int GW = 8;
  logic [47:0] s_rma, s_rva;
  logic [3:0][47:0] s_rwg;
  logic [2:0][15:0] s_pma, s_pva;
  logic [2:0][3:0][15:0] s_pwg;
  logic [2:0][4:0] s_load;
  logic [4:0] s_max;
  tbn_sort #(.NPE(3), .GW(GW), .NOUT(4)) u_small (
    .rma(s_rma), .rva(s_rva), .rwg(s_rwg), .pe_pma(s_pma), .pe_pva(s_pva),
    .pe_pwg(s_pwg), .pe_load(s_load), .max_load(s_max));

  // ---- default instance ----
  logic [95:0] rma, rva;
  logic [31:0][95:0] rwg;
  logic [5:0][15:0] pma, pva;
  logic [5:0][31:0][15:0] pwg;
  logic [5:0][4:0] load;
  logic [4:0] maxl;
  tbn_sort u_dut (.rma, .rva, .rwg, .pe_pma(pma), .pe_pva(pva), .pe_pwg(pwg),
                  .pe_load(load), .max_load(maxl));

  function automatic logic [7:0] ones(input int n);
    logic [7:0] m = '0;
    for (int i = 0; i < n; i++) m[7-2*(i%4)-(i/4)] = 1'b1;
    return m;
  endfunction

  initial begin
    // example
    s_rma = {ones(4), ones(8), ones(0), ones(4), ones(4), ones(5)};
    s_rva = '0; s_rwg = '0;
    #1;
    checks++;
    if (s_max != 9) begin failures++; $display("example: max load %0d, expected 9", s_max); end
    checks++;
    if (!(s_load[0] == 8 && s_load[1] == 9 && s_load[2] == 8)) begin
      failures++; $display("example: loads %0d %0d %0d, expected 8 9 8", s_load[0], s_load[1], s_load[2]);
    end

    for (int t = 0; t < 2000; t++) begin
      int ref_dot [32], pe_dot [32], gl [12], srt [12], refmax, nnz, sparsity;
      sparsity = $urandom_range(0, 3);
      for (int i = 0; i < 3; i++) rma[32*i +: 32] = $urandom & (sparsity == 0 ? 32'hffffffff : $urandom) & (sparsity > 1 ? $urandom : 32'hffffffff);
      if (t % 7 == 0) rma[95:48] = '0;   // strongly uneven
      rva = {$urandom, $urandom, $urandom};
      for (int k = 0; k < 32; k++) rwg[k] = {$urandom, $urandom, $urandom};
      #1;
      // reference dot product, stream order = bit 95 down to 0
      nnz = 0;
      for (int k = 0; k < 32; k++) ref_dot[k] = 0;
      for (int b = 95; b >= 0; b--)
        if (rma[b]) begin
          for (int k = 0; k < 32; k++) ref_dot[k] += (rva[nnz] == rwg[k][b]) ? 1 : -1;
          nnz++;
        end
      // sum over PEs, each PE consuming its pva from bit 0 highest-first
      for (int k = 0; k < 32; k++) pe_dot[k] = 0;
      for (int i = 0; i < 6; i++) begin
        int n;
        n = 0;
        for (int b = 15; b >= 0; b--)
          if (pma[i][b]) begin
            for (int k = 0; k < 32; k++) pe_dot[k] += (pva[i][n] == pwg[i][k][b]) ? 1 : -1;
            n++;
          end
        checks++;
        if (n != load[i]) begin failures++; $display("PE%0d load %0d vs pma population %0d", i, load[i], n); end
      end
      for (int k = 0; k < 32; k++) begin
        checks++;
        if (pe_dot[k] != ref_dot[k]) begin
          failures++;
          if (failures < 10) $display("t=%0d ch %0d: PEs %0d, reference %0d", t, k, pe_dot[k], ref_dot[k]);
        end
      end
      // reference balance: sort the 12 group loads, pair highest with lowest
      for (int g = 0; g < 12; g++) gl[g] = $countones(rma[95-8*g -: 8]);
      srt = gl;
      srt.rsort();
      refmax = 0;
      for (int i = 0; i < 6; i++) if (srt[i] + srt[11-i] > refmax) refmax = srt[i] + srt[11-i];
      checks++;
      if (maxl != refmax) begin failures++; $display("max load %0d, reference %0d", maxl, refmax); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
