// tb_tbn_pcl: self-checking test of a processing cluster.
// Loads 32 random 96-bit kernel-row words, then runs random 1x3 windows of
// varying sparsity.  Checks the 32 cluster sums against a direct dot product
// and the window latency against 3 + the slowest PE's load after sorting
// (computed independently from the group workloads).
module tb_tbn_pcl;
  import tbn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic wg_we = 0, start = 0, done;
  logic [4:0] wg_idx;
  logic [95:0] wg_data, rma, rva;
  logic signed [31:0][7:0] psum;
  logic [6:0] cycles;
  logic [31:0][95:0] w;
  int checks = 0, failures = 0, wins = 0;

  tbn_pcl dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 32; k++) begin
      w[k] = {$urandom, $urandom, $urandom};
      @(negedge clk);
      wg_we = 1; wg_idx = 5'(k); wg_data = w[k];
    end
    @(negedge clk);
    wg_we = 0;
    for (int t = 0; t < 400; t++) begin
      int ref_dot [32], gl [12], srt [12], refmax, nnz, lat, sp;
      sp = t % 4;
      rma = {$urandom, $urandom, $urandom};
      if (sp > 0) rma &= {$urandom, $urandom, $urandom};
      if (sp > 1) rma &= {$urandom, $urandom, $urandom};
      if (sp > 2) rma[95:40] = '0;
      rva = {$urandom, $urandom, $urandom};
      nnz = 0;
      for (int k = 0; k < 32; k++) ref_dot[k] = 0;
      for (int b = 95; b >= 0; b--)
        if (rma[b]) begin
          for (int k = 0; k < 32; k++) ref_dot[k] += (rva[nnz] == w[k][b]) ? 1 : -1;
          nnz++;
        end
      for (int g = 0; g < 12; g++) gl[g] = $countones(rma[95-8*g -: 8]);
      srt = gl;
      srt.rsort();
      refmax = 0;
      for (int i = 0; i < 6; i++) if (srt[i] + srt[11-i] > refmax) refmax = srt[i] + srt[11-i];
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      rma = '0; rva = '0;       // cluster must hold its own copy
      lat = 1;
      while (!done) begin
        @(negedge clk);
        lat++;
      end
      checks++;
      if (lat != refmax + 3) begin
        failures++;
        $display("latency %0d, expected %0d", lat, refmax + 3);
      end
      for (int k = 0; k < 32; k++) begin
        checks++;
        if ($signed(psum[k]) != ref_dot[k]) begin
          failures++;
          if (failures < 10) $display("ch %0d: %0d expected %0d", k, $signed(psum[k]), ref_dot[k]);
        end
      end
      wins++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
