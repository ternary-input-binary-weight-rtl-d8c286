// tbn_top: ternary-input binary-weight CNN accelerator.
//
// Feature maps move through the chip as a 1-bit sparsity map (MAP, two
// banks) plus a value stream holding one bit per non-zero element (VAL1 /
// VAL2 FIFOs).  Weights are binary (WGH); partial sums live in TMP;
// thresholds and normalisation factors in MIS.  Three processing clusters,
// one per kernel row, each with a slicer, a sorting network and six
// zero-skipping PEs, convolve a 1x3 window; the controller adds their row
// results in TMP and sends the finished sums through pooling/ReLU (PLR),
// normalisation (BNM) and quantisation (QTN) back into the other MAP bank and
// value FIFO.  The block structure is the paper's.
//
// Use: while `busy` is low the host (or the image sensor) writes the input
// map into a MAP bank and pushes its value bits into VAL1/VAL2, and writes
// WGH and MIS; then it pulses `start` with the layer's `cfg`.  `done` pulses
// when the layer's output is in the other bank/FIFO.  Results are read back
// through the host read ports (MAP, TMP, value FIFO peek) while idle.  Host
// accesses during a layer are ignored.
module tbn_top
  import tbn_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  layer_cfg_t          cfg,
  output logic                busy,
  output logic                done,
  // host / sensor: map
  input  logic                host_map_we,
  input  logic                host_map_bank,
  input  logic [MAP_AW-1:0]   host_map_addr,
  input  logic [NCH-1:0]      host_map_wdata,
  output logic [NCH-1:0]      host_map_rdata,
  // host / sensor: value FIFOs (sel 0 = VAL1)
  input  logic                host_val_clr,
  input  logic                host_val_push,
  input  logic                host_val_sel,
  input  logic                host_val_bit,
  input  logic [VAL_AW-1:0]   host_val_peek_addr,
  output logic                host_val_peek_data,
  output logic [1:0][VAL_AW-1:0] val_count,
  output logic [1:0]          val_overflow,
  // host: weights and misc values
  input  logic                host_wgh_we,
  input  logic [WGH_AW-1:0]   host_wgh_addr,
  input  logic [WINB-1:0]     host_wgh_wdata,
  input  logic                host_mis_we,
  input  logic                host_mis_sel,
  input  logic [MIS_AW-1:0]   host_mis_addr,
  input  mis_vec_t            host_mis_wdata,
  // host: partial sums (e.g. final-layer scores)
  input  logic [TMP_AW-1:0]   host_tmp_addr,
  output psum_vec_t           host_tmp_rdata,
  // cycle statistics of the last layer
  output logic [31:0]         stat_load,
  output logic [31:0]         stat_mac,
  output logic [31:0]         stat_acc,
  output logic [31:0]         stat_wgt,
  output logic [31:0]         stat_write,
  output logic [31:0]         stat_clear
);

  // controller-side signals
  logic                c_map_rbank, c_map_we, c_map_wbank;
  logic [MAP_AW-1:0]   c_map_raddr, c_map_waddr;
  logic [NCH-1:0]      c_map_wdata, map_rdata;
  logic [WGH_AW-1:0]   c_wgh_raddr;
  logic [WINB-1:0]     wgh_rdata;
  logic                c_tmp_we;
  logic [TMP_AW-1:0]   c_tmp_waddr, c_tmp_raddr;
  psum_vec_t           c_tmp_wdata, tmp_rdata;
  logic [MIS_AW-1:0]   c_mis_raddr;
  mis_vec_t            mis_thr, mis_factor;
  logic                vin_pop, vin_rewind, vin_dout, vin_valid;
  logic                vout_clr, vout_push, vout_din;
  logic [NPCL-1:0]     wg_we, pcl_done;
  logic [$clog2(NCH)-1:0] wg_idx;
  logic                pcl_start;
  logic [WINB-1:0]     rma, rva;
  logic signed [NPCL-1:0][NCH-1:0][PCLW-1:0] pcl_psum;
  psum_vec_t [3:0]     pool_in;
  psum_vec_t           plr_out;
  dval_vec_t           bnm_out;
  logic [NCH-1:0]      q_map, q_vals;
  logic [$clog2(NCH+1)-1:0] q_nnz;
  logic                in_sel;

  tbn_ctrl u_fsm (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .map_rbank(c_map_rbank), .map_raddr(c_map_raddr), .map_rdata(map_rdata),
    .map_we(c_map_we), .map_wbank(c_map_wbank), .map_waddr(c_map_waddr),
    .map_wdata(c_map_wdata),
    .wgh_raddr(c_wgh_raddr),
    .tmp_we(c_tmp_we), .tmp_waddr(c_tmp_waddr), .tmp_wdata(c_tmp_wdata),
    .tmp_raddr(c_tmp_raddr), .tmp_rdata(tmp_rdata),
    .mis_raddr(c_mis_raddr),
    .vin_pop, .vin_rewind, .vin_dout, .vin_valid,
    .vout_clr, .vout_push, .vout_din,
    .wg_we, .wg_idx, .pcl_start, .rma, .rva, .pcl_done, .pcl_psum,
    .pool_in, .q_map, .q_vals, .q_nnz,
    .stat_load, .stat_mac, .stat_acc, .stat_wgt, .stat_write, .stat_clear
  );

  // ---------------- memories, host port when idle ----------------
  tbn_map_mem u_map (
    .clk,
    .we   (busy ? c_map_we    : host_map_we),
    .wbank(busy ? c_map_wbank : host_map_bank),
    .waddr(busy ? c_map_waddr : host_map_addr),
    .wdata(busy ? c_map_wdata : host_map_wdata),
    .rbank(busy ? c_map_rbank : host_map_bank),
    .raddr(busy ? c_map_raddr : host_map_addr),
    .rdata(map_rdata)
  );
  assign host_map_rdata = map_rdata;

  tbn_wgh_mem u_wgh (
    .clk,
    .we   (!busy && host_wgh_we),
    .waddr(host_wgh_addr),
    .wdata(host_wgh_wdata),
    .raddr(c_wgh_raddr),
    .rdata(wgh_rdata)
  );

  tbn_tmp_mem u_tmp (
    .clk,
    .we   (busy && c_tmp_we),
    .waddr(c_tmp_waddr),
    .wdata(c_tmp_wdata),
    .raddr(busy ? c_tmp_raddr : host_tmp_addr),
    .rdata(tmp_rdata)
  );
  assign host_tmp_rdata = tmp_rdata;

  tbn_mis_mem u_mis (
    .clk,
    .we    (!busy && host_mis_we),
    .wsel  (host_mis_sel),
    .waddr (host_mis_addr),
    .wdata (host_mis_wdata),
    .raddr (c_mis_raddr),
    .thr   (mis_thr),
    .factor(mis_factor)
  );

  // ---------------- value FIFO pair with input / output muxes ----------------
  // While busy, FIFO in_sel is the layer input and the other one its output.
  assign in_sel = cfg.in_sel;
  logic [1:0] f_clr, f_push, f_din, f_pop, f_rew, f_dout, f_valid, f_peek;

  always_comb begin
    for (int i = 0; i < 2; i++) begin
      logic is_in;
      is_in     = (i[0] == in_sel);
      f_clr[i]  = busy ? (!is_in && vout_clr) : (host_val_clr && host_val_sel == i[0]);
      f_push[i] = busy ? (!is_in && vout_push) : (host_val_push && host_val_sel == i[0]);
      f_din[i]  = busy ? vout_din : host_val_bit;
      f_pop[i]  = busy && is_in && vin_pop;
      f_rew[i]  = busy && is_in && vin_rewind;
    end
    // the output FIFO is cleared on the start pulse, before busy rises
    if (!busy && start && cfg.oc_first == '0) begin
      f_clr[0] = !in_sel ? 1'b0 : 1'b1;
      f_clr[1] =  in_sel ? 1'b0 : 1'b1;
    end
  end

  assign vin_dout  = f_dout[in_sel];
  assign vin_valid = f_valid[in_sel];
  assign host_val_peek_data = f_peek[host_val_sel];

  for (genvar i = 0; i < 2; i++) begin : g_val
    tbn_val_fifo u_val (
      .clk, .rst_n,
      .clr(f_clr[i]), .rewind(f_rew[i]), .push(f_push[i]), .din(f_din[i]),
      .pop(f_pop[i]), .dout(f_dout[i]), .dout_valid(f_valid[i]),
      .count(val_count[i]), .overflow(val_overflow[i]),
      .peek_addr(host_val_peek_addr), .peek_data(f_peek[i])
    );
  end

  // ---------------- processing clusters ----------------
  for (genvar p = 0; p < NPCL; p++) begin : g_pcl
    tbn_pcl u_pcl (
      .clk, .rst_n,
      .wg_we(wg_we[p]), .wg_idx(wg_idx), .wg_data(wgh_rdata),
      .start(pcl_start), .rma(rma), .rva(rva),
      .done(pcl_done[p]), .psum(pcl_psum[p]), .cycles()
    );
  end

  // ---------------- pooling, normalisation, quantisation ----------------
  tbn_plr u_plr (
    .pool_en(cfg.pool_en),
    .in0(pool_in[0]), .in1(pool_in[1]), .in2(pool_in[2]), .in3(pool_in[3]),
    .out(plr_out)
  );

  tbn_bnm u_bnm (
    .bn_en(cfg.bn_en), .in(plr_out), .factor(mis_factor), .out(bnm_out)
  );

  tbn_qtn u_qtn (
    .in(bnm_out), .thr(mis_thr), .map(q_map), .vals(q_vals), .nnz(q_nnz)
  );

endmodule
