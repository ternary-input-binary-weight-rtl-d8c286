// tb_tbn_net: the whole classification network on one random two-channel
// sensor frame, at the accelerator's default size, layer after layer with
// the map banks and value FIFOs alternating:
//   CV1 32x32x2->128, CV2 ->128 + pool + BN, CV3 16x16->256,
//   CV4 ->256 + pool + BN, CV5 8x8->512, CV6 ->512 + pool + BN,
//   FC1 4x4x512->1024 (weights do not fit: 32 runs of one output chunk,
//   weights and thresholds reloaded before each), FC2 1024->10 (computed as
//   one chunk of 32 outputs, the last 22 unused).
// Weights, thresholds and BN factors are random; every output word and value
// bit of every layer is compared with the reference model.  The cycles of
// each layer and of the whole inference are printed.
module tb_tbn_net;
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

  int total = 0;
  task automatic run_layer(bit sel, int pieces, string name);
    int cyc, c2;
    ref_compute();
    host_load_input(sel);
    cyc = 0;
    if (pieces == 1) begin
      host_load_params(0, r_noc);
      host_run(sel, 0, r_noc, cyc);
    end else
      for (int p = 0; p < r_noc; p++) begin
        host_load_params(p, 1);
        host_run(sel, p, 1, c2);
        cyc += c2;
      end
    total += cyc;
    $display("%s: %0dx%0d, %0d in-chunks, %0d out-chunks, %0d run(s): %0d cycles, %0d output value bits",
             name, r_h, r_w, r_nic, r_noc, pieces == 1 ? 1 : r_noc, cyc, e_val.size());
    checks++;
    if (val_overflow != 2'b00) begin failures++; $display("value FIFO overflow"); end
    host_check_output(sel);
  endtask

  initial begin
    repeat (60000000) @(posedge clk);
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
    ref_gen_weights(4, 0, 0, 3);    run_layer(0, 1, "CV1");
    ref_chain(0);
    ref_gen_weights(4, 1, 1, 24);   run_layer(1, 1, "CV2");
    ref_chain(0);
    ref_gen_weights(8, 0, 0, 12);   run_layer(0, 1, "CV3");
    ref_chain(0);
    ref_gen_weights(8, 1, 1, 40);   run_layer(1, 1, "CV4");
    ref_chain(0);
    ref_gen_weights(16, 0, 0, 20);  run_layer(0, 1, "CV5");
    ref_chain(0);
    ref_gen_weights(16, 1, 1, 60);  run_layer(1, 1, "CV6");
    ref_chain(1);
    ref_gen_weights(32, 0, 0, 40);  run_layer(0, 32, "FC1");
    ref_chain(1);
    ref_gen_weights(1, 0, 0, 12);   run_layer(1, 1, "FC2");
    $display("inference: %0d cycles = %0d ms at 10 MHz", total, total / 10000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
