// tb_tbn_top: end-to-end test of the accelerator on a chain of small layers.
//   L1  8x8, 2 input channels (two-channel sensor frame) -> 64 channels,
//       quantise only, input in bank 0 / VAL1;
//   L2  8x8x64 -> 64, pooling + ReLU + batch normalisation, input in bank 1;
//   L3  fully connected 4x4x64 (32 map words) -> 32;
//   L4  fully connected 32 -> 64 run in two pieces (one output chunk each,
//       weights and thresholds reloaded between them).
// Every output map word and value bit is compared with the reference model,
// as are the raw sums left in TMP, the number of windows and the cycles spent
// in the clusters (1 + 3 + slowest PE load per window).  Mechanisms that must
// occur at least once: zero skipping, a window where sorting shortens the
// slowest PE, pooling, normalisation, fully connected mode, bank/FIFO swap,
// several input chunks, input-stream rewind for several output chunks,
// piecewise run.
module tb_tbn_top;
  import tbn_pkg::*;
  logic clk = 0, rst_n = 0, start, busy, done;
  layer_cfg_t cfg;
  logic host_map_we, host_map_bank;
  logic [MAP_AW-1:0] host_map_addr;
  logic [31:0] host_map_wdata, host_map_rdata;
  logic host_val_clr, host_val_push, host_val_sel, host_val_bit, host_val_peek_data;
  logic [VAL_AW-1:0] host_val_peek_addr;
  logic [1:0][VAL_AW-1:0] val_count;
  logic [1:0] val_overflow;
  logic host_wgh_we;
  logic [WGH_AW-1:0] host_wgh_addr;
  logic [95:0] host_wgh_wdata;
  logic host_mis_we, host_mis_sel;
  logic [MIS_AW-1:0] host_mis_addr;
  mis_vec_t host_mis_wdata;
  logic [TMP_AW-1:0] host_tmp_addr;
  psum_vec_t host_tmp_rdata;
  logic [31:0] stat_load, stat_mac, stat_acc, stat_wgt, stat_write, stat_clear;
  int checks = 0, failures = 0;

  tbn_top dut (.*);
  always #5 clk = ~clk;

  `include "tbn_ref.svh"
  `include "tbn_tb_host.svh"

  // ---- mechanism monitors ----
  int n_win = 0, n_skip = 0, n_reorder = 0, exp_mac = 0;
  int m_pool = 0, m_bn = 0, m_fc = 0, m_swap = 0, m_multi_ic = 0, m_rewind = 0, m_piece = 0;
  always @(posedge clk) if (rst_n && dut.pcl_start) begin
    int gl [12], srt [12], sorted_max, plain_max;
    n_win++;
    if ($countones(dut.rma) < 96) n_skip++;
    for (int g = 0; g < 12; g++) gl[g] = $countones(dut.rma[95-8*g -: 8]);
    plain_max = 0;
    for (int i = 0; i < 6; i++) if (gl[2*i] + gl[2*i+1] > plain_max) plain_max = gl[2*i] + gl[2*i+1];
    srt = gl;
    srt.rsort();
    sorted_max = 0;
    for (int i = 0; i < 6; i++) if (srt[i] + srt[11-i] > sorted_max) sorted_max = srt[i] + srt[11-i];
    if (sorted_max < plain_max) n_reorder++;
    exp_mac += sorted_max + 4;
  end
  always @(posedge clk) if (rst_n && dut.vin_rewind && dut.u_fsm.oc != dut.u_fsm.c.oc_first) m_rewind++;

  task automatic run_layer(bit sel, bit fc, int noc, int pieces, string name);
    int cyc, w0, e0;
    w0 = n_win; e0 = exp_mac;
    ref_compute();
    host_load_input(sel);
    if (pieces == 1) begin
      host_load_params(0, noc);
      host_run(sel, 0, noc, cyc);
    end else begin
      int c2;
      cyc = 0;
      for (int p = 0; p < noc; p++) begin
        host_load_params(p, 1);
        host_run(sel, p, 1, c2);
        cyc += c2;
      end
      m_piece++;
    end
    $display("%s: %0dx%0d, %0d in-chunks, %0d out-chunks: %0d cycles (load %0d, mac %0d, acc %0d, wgt %0d, write %0d, clear %0d)",
             name, r_h, r_w, r_nic, noc, cyc, stat_load, stat_mac, stat_acc, stat_wgt, stat_write, stat_clear);
    host_check_output(sel);
    host_check_tmp(noc - 1);
    checks++;
    if (n_win - w0 != r_h * r_w * r_nic * noc) begin
      failures++; $display("%0d windows, expected %0d", n_win - w0, r_h * r_w * r_nic * noc);
    end
    if (pieces == 1) begin
      checks++;
      if (int'(stat_mac) != exp_mac - e0) begin
        failures++; $display("cluster cycles %0d, expected %0d", stat_mac, exp_mac - e0);
      end
    end
    if (r_pool) m_pool++;
    if (r_bn) m_bn++;
    if (fc) m_fc++;
    if (sel) m_swap++;
    if (r_nic > 1) m_multi_ic++;
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    host_idle();
    cfg = '0; host_map_bank = 0; host_map_addr = '0; host_map_wdata = '0;
    host_val_sel = 0; host_val_bit = 0; host_val_peek_addr = '0;
    host_wgh_addr = '0; host_wgh_wdata = '0; host_mis_sel = 0; host_mis_addr = '0;
    host_mis_wdata = '0; host_tmp_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // L1: sensor-like frame, 2 channels
    ref_gen_input(8, 8, 1, 2, 8);
    ref_gen_weights(2, 0, 0, 1);
    run_layer(0, 0, 2, 1, "L1 conv");
    // L2: pooling + BN, input from the other bank
    ref_chain(0);
    ref_gen_weights(2, 1, 1, 2);
    run_layer(1, 0, 2, 1, "L2 conv+pool+bn");
    // L3: fully connected
    ref_chain(1);
    ref_gen_weights(1, 0, 0, 2);
    run_layer(0, 1, 1, 1, "L3 fc");
    // L4: fully connected in two pieces
    ref_chain(1);
    ref_gen_weights(2, 0, 0, 1);
    run_layer(1, 1, 2, 2, "L4 fc, two runs");

    $display("windows %0d, with zeros skipped %0d, shortened by sorting %0d", n_win, n_skip, n_reorder);
    $display("pool %0d bn %0d fc %0d swap %0d multi-ic %0d rewind %0d piecewise %0d",
             m_pool, m_bn, m_fc, m_swap, m_multi_ic, m_rewind, m_piece);
    checks += 9;
    if (n_skip == 0)     begin failures++; $display("zero skipping never happened"); end
    if (n_reorder == 0)  begin failures++; $display("sorting never helped"); end
    if (m_pool == 0)     begin failures++; $display("no pooling"); end
    if (m_bn == 0)       begin failures++; $display("no BN"); end
    if (m_fc == 0)       begin failures++; $display("no FC"); end
    if (m_swap == 0)     begin failures++; $display("no bank swap"); end
    if (m_multi_ic == 0) begin failures++; $display("no multi-chunk input"); end
    if (m_rewind == 0)   begin failures++; $display("no input rewind"); end
    if (m_piece == 0)    begin failures++; $display("no piecewise run"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
