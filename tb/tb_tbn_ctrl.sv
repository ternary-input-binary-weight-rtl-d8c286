// tb_tbn_ctrl: test of the layer controller on its own.  The memories, the
// value FIFOs, the three clusters and the pooling/normalisation/quantisation
// path are behavioural models in this testbench (an ideal cluster returns
// the exact dot product of the window with its kernel row after a fixed
// delay), so only the controller's sequencing is under test: addresses,
// window shifting and padding, weight loading, accumulation in TMP, the
// output pass and the value streams.  Outputs are compared with the
// reference model for a conv layer, a conv + pool + BN layer with two input
// chunks and a fully connected layer.
module tb_tbn_ctrl;
  import tbn_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  layer_cfg_t cfg;
  logic map_rbank, map_we, map_wbank;
  logic [MAP_AW-1:0] map_raddr, map_waddr;
  logic [31:0] map_rdata, map_wdata;
  logic [WGH_AW-1:0] wgh_raddr;
  logic tmp_we;
  logic [TMP_AW-1:0] tmp_waddr, tmp_raddr;
  psum_vec_t tmp_wdata, tmp_rdata;
  logic [MIS_AW-1:0] mis_raddr;
  logic vin_pop, vin_rewind, vin_dout, vin_valid, vout_clr, vout_push, vout_din;
  logic [2:0] wg_we, pcl_done;
  logic [4:0] wg_idx;
  logic pcl_start;
  logic [95:0] rma, rva;
  logic signed [2:0][31:0][7:0] pcl_psum;
  psum_vec_t [3:0] pool_in;
  logic [31:0] q_map, q_vals;
  logic [5:0] q_nnz;
  logic [31:0] stat_load, stat_mac, stat_acc, stat_wgt, stat_write, stat_clear;
  int checks = 0, failures = 0;

  tbn_ctrl dut (.*);
  always #5 clk = ~clk;

  `include "tbn_ref.svh"

  // ---- behavioural surroundings ----
  logic [31:0] mapm [2][MAP_DEPTH];
  psum_vec_t   tmpm [TMP_DEPTH];
  logic [95:0] rwg [3][32];
  bit          vin [$], vout [$];
  int          vin_rd;
  logic [95:0] wgh_q;
  int          pcl_cnt = 0;
  int          mis_q = 0;

  always @(posedge clk) begin
    map_rdata <= mapm[map_rbank][map_raddr];
    if (map_we) mapm[map_wbank][map_waddr] <= map_wdata;
    tmp_rdata <= tmpm[tmp_raddr];
    if (tmp_we) tmpm[tmp_waddr] <= tmp_wdata;
    begin
      int wa;
      wa = int'(wgh_raddr);
      wgh_q <= r_wgt[wa];
    end
    mis_q <= int'(mis_raddr);
    for (int i = 0; i < 3; i++) if (wg_we[i]) rwg[i][wg_idx] <= wgh_q;
    vin_valid <= 0;
    if (vin_rewind) vin_rd <= 0;
    else if (vin_pop) begin
      vin_dout <= vin[vin_rd]; vin_valid <= 1; vin_rd <= vin_rd + 1;
    end
    if (vout_clr) vout.delete();
    if (vout_push) vout.push_back(vout_din);
    // ideal clusters: fixed 4-cycle latency
    pcl_done <= '0;
    if (pcl_start) pcl_cnt <= 4;
    else if (pcl_cnt > 0) begin
      pcl_cnt <= pcl_cnt - 1;
      if (pcl_cnt == 1) begin
        for (int i = 0; i < 3; i++)
          for (int k = 0; k < 32; k++) begin
            int s, n;
            s = 0; n = 0;
            for (int b = 95; b >= 0; b--)
              if (rma_q[b]) begin
                s += (rva_q[n] == rwg[i][k][b]) ? 1 : -1;
                n++;
              end
            pcl_psum[i][k] <= 8'(s);
          end
        pcl_done <= '1;
      end
    end
  end
  logic [95:0] rma_q, rva_q;
  always @(posedge clk) if (pcl_start) begin rma_q <= rma; rva_q <= rva; end

  // behavioural pooling / BN / quantiser from the current pool_in
  always_comb begin
    int n;
    q_map = '0; q_vals = '0; n = 0;
    for (int k = 31; k >= 0; k--) begin
      longint v, t;
      int o;
      o = mis_q * 32 + k;
      v = $signed(pool_in[0][k]);
      if (r_pool) begin
        v = 0;
        for (int d = 0; d < 4; d++) if ($signed(pool_in[d][k]) > v) v = $signed(pool_in[d][k]);
      end
      if (r_bn) begin
        t = v * r_fac[o];
        v = (t >= 0) ? t / 256 : -((-t + 255) / 256);
      end
      if (v > r_thr[o] || v < -r_thr[o]) begin
        q_map[k] = 1;
        q_vals[n] = (v > r_thr[o]);
        n++;
      end
    end
    q_nnz = 6'(n);
  end


  task automatic run_check(bit sel);
    int n_bad, ho, wo;
    ref_compute();
    foreach (r_map[a]) mapm[sel][a] = r_map[a];
    vin = r_val;
    vin_rd = 0;
    cfg = '0;
    cfg.width = 6'(r_w); cfg.height = 6'(r_h); cfg.n_ic = 9'(r_nic);
    cfg.n_oc = 6'(r_noc); cfg.pool_en = r_pool; cfg.bn_en = r_bn; cfg.in_sel = sel;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    n_bad = 0;
    foreach (e_map[a]) begin
      checks++;
      if (mapm[~sel][a] != e_map[a]) begin
        failures++; n_bad++;
        if (n_bad < 5) $display("map[%0d]=%h expected %h", a, mapm[~sel][a], e_map[a]);
      end
    end
    checks++;
    if (vout.size() != e_val.size()) begin failures++; $display("stream %0d bits, expected %0d", vout.size(), e_val.size()); end
    else foreach (e_val[i]) begin
      checks++;
      if (vout[i] != e_val[i]) failures++;
    end
    // every window is loaded exactly once per output chunk: values read
    checks++;
    if (vin_rd != r_val.size()) begin failures++; $display("read %0d value bits, expected %0d", vin_rd, r_val.size()); end
    $display("layer %0dx%0d ic=%0d oc=%0d pool=%0d bn=%0d: load %0d mac %0d acc %0d wgt %0d write %0d clear %0d",
             r_h, r_w, r_nic, r_noc, r_pool, r_bn, stat_load, stat_mac, stat_acc, stat_wgt, stat_write, stat_clear);
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    ref_gen_input(6, 5, 1, 32, 6);
    ref_gen_weights(2, 0, 0, 2);
    run_check(0);
    ref_gen_input(6, 4, 2, 64, 5);
    ref_gen_weights(1, 1, 1, 1);
    run_check(1);
    ref_chain(1);
    ref_gen_weights(1, 0, 0, 1);
    run_check(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
