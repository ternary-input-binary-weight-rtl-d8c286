// tbn_tb_host.svh: host-side tasks for driving tbn_top (included inside a
// testbench module that declares the top's port signals and `checks`,
// `failures`).  They load a layer described by the reference model in
// tbn_ref.svh, run it and compare the output map and value stream.

task automatic host_idle();
  host_map_we = 0; host_val_clr = 0; host_val_push = 0; host_wgh_we = 0;
  host_mis_we = 0; start = 0;
endtask

// input map and value stream into bank / FIFO `sel`
task automatic host_load_input(bit sel);
  @(negedge clk);
  host_val_sel = sel; host_val_clr = 1;
  @(negedge clk);
  host_val_clr = 0;
  foreach (r_map[a]) begin
    host_map_we = 1; host_map_bank = sel; host_map_addr = MAP_AW'(a); host_map_wdata = r_map[a];
    @(negedge clk);
  end
  host_map_we = 0;
  foreach (r_val[i]) begin
    host_val_push = 1; host_val_bit = r_val[i];
    @(negedge clk);
  end
  host_val_push = 0;
endtask

// weights and MIS words of output chunks oc0 .. oc0+n-1, stored from 0
task automatic host_load_params(int oc0, int n);
  for (int i = 0; i < n * r_nic * 96; i++) begin
    host_wgh_we = 1; host_wgh_addr = WGH_AW'(i); host_wgh_wdata = r_wgt[oc0 * r_nic * 96 + i];
    @(negedge clk);
  end
  host_wgh_we = 0;
  for (int s = 0; s < 2; s++)
    for (int oc = 0; oc < n; oc++) begin
      host_mis_we = 1; host_mis_sel = s[0]; host_mis_addr = MIS_AW'(oc);
      for (int k = 0; k < 32; k++)
        host_mis_wdata[k] = mis_t'(s == 0 ? r_thr[(oc0 + oc) * 32 + k] : r_fac[(oc0 + oc) * 32 + k]);
      @(negedge clk);
    end
  host_mis_we = 0;
endtask

task automatic host_run(bit sel, int oc0, int n, output int cyc);
  cfg = '0;
  cfg.width = 6'(r_w); cfg.height = 6'(r_h); cfg.n_ic = 9'(r_nic);
  cfg.n_oc = 6'(n); cfg.oc_first = 6'(oc0);
  cfg.pool_en = r_pool; cfg.bn_en = r_bn; cfg.in_sel = sel;
  start = 1;
  @(negedge clk);
  start = 0;
  cyc = 1;
  while (!done) begin
    @(negedge clk);
    cyc++;
  end
  @(negedge clk);
endtask

// compare the output bank / FIFO (the ones not selected as input)
task automatic host_check_output(bit sel);
  int n_bad;
  n_bad = 0;
  foreach (e_map[a]) begin
    host_map_bank = ~sel; host_map_addr = MAP_AW'(a);
    @(negedge clk);
    checks++;
    if (host_map_rdata != e_map[a]) begin
      failures++; n_bad++;
      if (n_bad < 5) $display("map[%0d] = %h, expected %h", a, host_map_rdata, e_map[a]);
    end
  end
  checks++;
  if (int'(val_count[~sel]) != e_val.size()) begin
    failures++;
    $display("value stream length %0d, expected %0d", val_count[~sel], e_val.size());
  end
  host_val_sel = ~sel;
  foreach (e_val[i]) begin
    host_val_peek_addr = VAL_AW'(i);
    #1;
    checks++;
    if (host_val_peek_data != e_val[i]) begin
      failures++; n_bad++;
      if (n_bad < 10) $display("value bit %0d = %0d, expected %0d", i, host_val_peek_data, e_val[i]);
    end
  end
  @(negedge clk);
endtask

// raw sums of the last output chunk computed, as left in TMP
task automatic host_check_tmp(int oc);
  for (int p = 0; p < r_h * r_w; p++) begin
    host_tmp_addr = TMP_AW'(p);
    @(negedge clk);
    for (int k = 0; k < 32; k++) begin
      checks++;
      if ($signed(host_tmp_rdata[k]) != e_sum[((oc * 32 + k) * r_h) * r_w + p]) begin
        failures++;
        $display("tmp pixel %0d ch %0d = %0d, expected %0d", p, k, $signed(host_tmp_rdata[k]), e_sum[((oc * 32 + k) * r_h) * r_w + p]);
      end
    end
  end
endtask
