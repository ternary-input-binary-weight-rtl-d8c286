// tb_tbn_full: the accelerator at its full default size running the first
// two layers of the classification network on one random sensor frame:
//   CV1  32x32 frame, 2 input channels (the two event polarities)
//        -> 128 channels, quantise only; input in bank 0 / VAL1;
//   CV2  32x32x128 -> 128, 2x2 max pooling + ReLU + batch normalisation,
//        -> 16x16x128; input in bank 1 / VAL2.
// CV1 fills the 4096-word map bank exactly.  Every output map word, every
// output value bit and the raw sums of the last output chunk left in TMP are
// compared with the reference model, and the cycle count of each layer is
// printed with its breakdown (loading, cluster, accumulation, weight load,
// write-back, clear).  The top is instantiated without a parameter list.
module tb_tbn_full;
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

  task automatic run_layer(bit sel, string name);
    int cyc;
    ref_compute();
    host_load_input(sel);
    host_load_params(0, r_noc);
    host_run(sel, 0, r_noc, cyc);
    $display("%s: %0dx%0d, %0d in-chunks, %0d out-chunks: %0d cycles (load %0d, cluster %0d, acc %0d, weights %0d, write %0d, clear %0d)",
             name, r_h, r_w, r_nic, r_noc, cyc, stat_load, stat_mac, stat_acc, stat_wgt, stat_write, stat_clear);
    $display("%s: %0d output value bits (FIFO holds %0d)", name, e_val.size(), VAL_DEPTH);
    checks++;
    if (val_overflow != 2'b00) begin failures++; $display("value FIFO overflow"); end
    host_check_output(sel);
    host_check_tmp(r_noc - 1);
  endtask

  initial begin
    repeat (30000000) @(posedge clk);
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
    ref_gen_input(32, 32, 1, 2, 4);
    ref_gen_weights(4, 0, 0, 3);
    run_layer(0, "CV1");
    ref_chain(0);
    ref_gen_weights(4, 1, 1, 24);
    run_layer(1, "CV2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
