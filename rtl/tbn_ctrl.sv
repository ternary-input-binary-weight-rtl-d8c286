// tbn_ctrl: layer controller (FSM).
//
// Runs one TBN layer per `start`, with the layer's shape and options in
// `cfg`.  For every chunk of 32 output channels (oc) it
//   1. clears the partial sums in TMP and rewinds the input value FIFO;
//   2. for every chunk of 32 input channels (ic): loads the 3 x 32 weight
//      words (kernel rows 0/1/2 to clusters 0/1/2), then walks the input
//      image row by row with a 1x3 window that moves one pixel right at a
//      time.  Each move reads one map word and then its value bits, one per
//      cycle, from the value FIFO.  The clusters convolve the window with
//      their kernel row, and the three results are added into TMP at output
//      rows y+1, y and y-1 (outside rows are dropped = zero padding);
//   3. reads TMP back pixel by pixel (four words for 2x2 pooling), lets the
//      PLR, BNM and QTN units (outside this module) turn it into a map word
//      and value bits, writes the word to the output map bank and pushes the
//      value bits, one per cycle, into the output FIFO.
// The 1x3 window, the three kernel rows on three clusters, the accumulation of
// row partial sums in TMP, the serial value reading and the order of layer
// stages follow the paper.  The loop order, the clearing of TMP, the FIFO
// rewind per output chunk and all cycle-level details are this design's.
// The paper's block diagram returns the stored partial sums to the clusters;
// here the addition of TMP and the three cluster results is done in the
// controller's accumulate step instead, with the same result.
// A fully connected layer is run as a 1x1 image with n_ic = number of input
// map words; only the centre weight column and kernel row 1 then matter.
// A layer whose weights do not fit WGH can be run in pieces: each run covers
// output chunks oc_first .. oc_first+n_oc-1, WGH and MIS are addressed
// relative to oc_first (the host reloads them between runs), output map words
// go to their absolute place, and the output FIFO is only cleared by the run
// with oc_first = 0, so the pieces append to one value stream.
//
// Memory read ports are synchronous (data one cycle after the address).
// `stat_*` count cycles spent loading map/values, in the clusters, adding
// into TMP, loading weights, writing outputs and clearing TMP.
module tbn_ctrl
  import tbn_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  layer_cfg_t           cfg,
  output logic                 busy,
  output logic                 done,
  // map memory
  output logic                 map_rbank,
  output logic [MAP_AW-1:0]    map_raddr,
  input  logic [NCH-1:0]       map_rdata,
  output logic                 map_we,
  output logic                 map_wbank,
  output logic [MAP_AW-1:0]    map_waddr,
  output logic [NCH-1:0]       map_wdata,
  // weight memory
  output logic [WGH_AW-1:0]    wgh_raddr,
  // partial-sum memory
  output logic                 tmp_we,
  output logic [TMP_AW-1:0]    tmp_waddr,
  output psum_vec_t            tmp_wdata,
  output logic [TMP_AW-1:0]    tmp_raddr,
  input  psum_vec_t            tmp_rdata,
  // miscellaneous memory
  output logic [MIS_AW-1:0]    mis_raddr,
  // value FIFOs (already muxed to input / output by cfg.in_sel)
  output logic                 vin_pop,
  output logic                 vin_rewind,
  input  logic                 vin_dout,
  input  logic                 vin_valid,
  output logic                 vout_clr,
  output logic                 vout_push,
  output logic                 vout_din,
  // clusters
  output logic [NPCL-1:0]      wg_we,
  output logic [$clog2(NCH)-1:0] wg_idx,
  output logic                 pcl_start,
  output logic [WINB-1:0]      rma,
  output logic [WINB-1:0]      rva,
  input  logic [NPCL-1:0]      pcl_done,
  input  logic signed [NPCL-1:0][NCH-1:0][PCLW-1:0] pcl_psum,
  // pooling / quantisation path
  output psum_vec_t [3:0]      pool_in,
  input  logic [NCH-1:0]       q_map,
  input  logic [NCH-1:0]       q_vals,
  input  logic [$clog2(NCH+1)-1:0] q_nnz,
  // statistics
  output logic [31:0]          stat_load,
  output logic [31:0]          stat_mac,
  output logic [31:0]          stat_acc,
  output logic [31:0]          stat_wgt,
  output logic [31:0]          stat_write,
  output logic [31:0]          stat_clear
);

  typedef enum logic [4:0] {
    S_IDLE, S_OC, S_CLR, S_WLOAD, S_ROW, S_LDREQ, S_LDMAP, S_LDVAL, S_SHIFT,
    S_COMP, S_WAIT, S_ACC, S_ACCRD, S_NEXT, S_POST, S_PRD, S_PWR,
    S_PUSH, S_DONE
  } state_t;

  state_t      st;
  layer_cfg_t  c;
  logic [5:0]  oc;
  logic [8:0]  ic;
  logic [5:0]  y, x, ld;            // row, window centre, pixels loaded in row
  logic [1:0]  r;                   // kernel row being accumulated
  logic [10:0] cnt;                 // general counter (TMP clear / output pixel)
  logic [6:0]  wj;                  // weight word counter
  logic        wv;                  // weight word in flight
  logic [6:0]  wjd;
  logic [5:0]  need, issued, got;   // value bits of the pixel being loaded
  logic [NCH-1:0] cur_map, cur_val;
  logic [2:0][NCH-1:0] wmap, wval;  // window: [2] = X0 (left) .. [0] = X2
  logic [2:0][5:0]     wcnt;
  logic [2:0]  pi, pg;              // pooling reads issued / received
  logic [NCH-1:0] o_vals;
  logic [5:0]  o_nnz, o_cnt;

  logic [31:0] hw, wo, ho, hwo, yo_i;
  always_comb begin
    hw  = c.width * c.height;
    wo  = c.pool_en ? c.width  >> 1 : c.width;
    ho  = c.pool_en ? c.height >> 1 : c.height;
    hwo = wo * ho;
    yo_i = y + 1 - r;               // output row fed by kernel row r
  end

  assign busy      = (st != S_IDLE);
  assign map_rbank = c.in_sel;
  assign map_wbank = ~c.in_sel;
  assign mis_raddr = MIS_AW'(oc - c.oc_first);
  assign wg_idx    = ($clog2(NCH))'(wjd / 3);
  always_comb
    for (int i = 0; i < NPCL; i++) wg_we[i] = wv && (wjd % 3 == 7'(i));
  assign rma       = {wmap[2], wmap[1], wmap[0]};
  assign rva       = WINB'(wval[2]) | (WINB'(wval[1]) << wcnt[2]) |
                     (WINB'(wval[0]) << (wcnt[2] + wcnt[1]));

  // combinational memory addresses
  always_comb begin
    map_raddr = MAP_AW'(ic * hw + y * c.width + ld);
    wgh_raddr = WGH_AW'(((oc - c.oc_first) * c.n_ic + ic) * (NCH * KW) + wj);
    tmp_raddr = '0;
    if (st == S_ACC)
      tmp_raddr = TMP_AW'(yo_i * c.width + x);
    else if (st == S_PRD)
      tmp_raddr = c.pool_en
        ? TMP_AW'(((cnt / wo) * 2 + pi[1]) * c.width + (cnt % wo) * 2 + pi[0])
        : TMP_AW'(cnt);
  end

  always_comb begin
    for (int k = 0; k < NCH; k++)
      tmp_wdata[k] = (st == S_CLR) ? '0
                   : psum_t'(tmp_rdata[k] + TMPW'($signed(pcl_psum[r][k])));
  end
  assign tmp_we    = (st == S_CLR) || (st == S_ACCRD);
  assign tmp_waddr = (st == S_CLR) ? TMP_AW'(cnt) : TMP_AW'(yo_i * c.width + x);

  assign map_we    = (st == S_PWR);
  assign map_waddr = MAP_AW'(oc * hwo + cnt);
  assign map_wdata = q_map;

  assign vout_push = (st == S_PUSH);
  assign vout_din  = o_vals[o_cnt];
  assign vout_clr  = (st == S_IDLE) && start && (cfg.oc_first == 0);
  assign vin_rewind = (st == S_OC);
  assign vin_pop   = (st == S_LDVAL) && (issued < need);
  assign pcl_start = (st == S_COMP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; oc <= '0; ic <= '0; y <= '0; x <= '0; ld <= '0;
      r <= '0; cnt <= '0; wj <= '0; wv <= 1'b0; wjd <= '0; need <= '0;
      issued <= '0; got <= '0; cur_map <= '0; cur_val <= '0; wmap <= '0;
      wval <= '0; wcnt <= '0; pi <= '0; pg <= '0; pool_in <= '0;
      o_vals <= '0; o_nnz <= '0; o_cnt <= '0; done <= 1'b0;
      stat_load <= '0; stat_mac <= '0; stat_acc <= '0; stat_wgt <= '0;
      stat_write <= '0; stat_clear <= '0;
    end else begin
      done  <= 1'b0;
      // weight words arrive one cycle after their address
      wv  <= (st == S_WLOAD) && (wj < NCH * KW);
      wjd <= wj;

      unique case (st)
        S_LDREQ, S_LDMAP, S_LDVAL, S_SHIFT: stat_load  <= stat_load + 1;
        S_COMP, S_WAIT:                     stat_mac   <= stat_mac + 1;
        S_ACC, S_ACCRD:                     stat_acc   <= stat_acc + 1;
        S_WLOAD:                            stat_wgt   <= stat_wgt + 1;
        S_POST, S_PRD, S_PWR, S_PUSH:       stat_write <= stat_write + 1;
        S_CLR:                              stat_clear <= stat_clear + 1;
        default: ;
      endcase

      unique case (st)
        S_IDLE: if (start) begin
          c  <= cfg;
          oc <= cfg.oc_first;
          stat_load <= '0; stat_mac <= '0; stat_acc <= '0; stat_wgt <= '0;
          stat_write <= '0; stat_clear <= '0;
          st <= S_OC;
        end
        S_OC: begin                       // new output chunk
          ic  <= '0;
          cnt <= '0;
          st  <= S_CLR;
        end
        S_CLR: begin                      // zero the partial sums
          cnt <= cnt + 1'b1;
          if (cnt == 11'(hw - 1)) begin
            wj <= '0;
            st <= S_WLOAD;
          end
        end
        S_WLOAD: begin                    // 96 weight words into the clusters
          if (wj < NCH * KW) wj <= wj + 1'b1;
          else if (!wv) begin
            y  <= '0;
            st <= S_ROW;
          end
        end
        S_ROW: begin
          wmap <= '0; wval <= '0; wcnt <= '0;
          ld   <= '0;
          x    <= '0;
          st   <= S_LDREQ;
        end
        S_LDREQ: begin
          cur_map <= '0;
          cur_val <= '0;
          if (ld < c.width) st <= S_LDMAP;  // address is on map_raddr
          else              st <= S_SHIFT;  // right padding
        end
        S_LDMAP: begin
          cur_map <= map_rdata;
          need    <= 6'($countones(map_rdata));
          issued  <= '0;
          got     <= '0;
          st      <= ($countones(map_rdata) == 0) ? S_SHIFT : S_LDVAL;
        end
        S_LDVAL: begin
          if (issued < need) issued <= issued + 1'b1;
          if (vin_valid) begin
            cur_val[got] <= vin_dout;
            got <= got + 1'b1;
            if (got + 1'b1 == need) st <= S_SHIFT;
          end
        end
        S_SHIFT: begin
          wmap <= {wmap[1], wmap[0], cur_map};
          wval <= {wval[1], wval[0], cur_val};
          wcnt <= {wcnt[1], wcnt[0], 6'($countones(cur_map))};
          ld   <= ld + 1'b1;
          st   <= (ld == 0) ? S_LDREQ : S_COMP;
        end
        S_COMP: st <= S_WAIT;
        S_WAIT: if (pcl_done[0]) begin
          r  <= '0;
          st <= S_ACC;
        end
        S_ACC: begin                      // read TMP for kernel row r
          if (yo_i < c.height) st <= S_ACCRD;
          else if (r == 2) st <= S_NEXT;
          else r <= r + 1'b1;
        end
        S_ACCRD: begin                    // write back the sum
          if (r == 2) st <= S_NEXT;
          else begin
            r  <= r + 1'b1;
            st <= S_ACC;
          end
        end
        S_NEXT: begin
          if (x + 1 < c.width) begin
            x  <= x + 1'b1;
            st <= S_LDREQ;
          end else if (y + 1 < c.height) begin
            y  <= y + 1'b1;
            st <= S_ROW;
          end else if (ic + 1 < c.n_ic) begin
            ic <= ic + 1'b1;
            wj <= '0;
            st <= S_WLOAD;
          end else begin
            cnt <= '0;
            st  <= S_POST;
          end
        end
        S_POST: begin                     // next output pixel
          pi <= '0;
          pg <= '0;
          st <= S_PRD;
        end
        S_PRD: begin                      // read 1 or 4 TMP words
          if (pi < (c.pool_en ? 3'd4 : 3'd1)) pi <= pi + 1'b1;
          if (pi != 0) begin
            pool_in[pg[1:0]] <= tmp_rdata;
            pg <= pg + 1'b1;
            if (pg + 1'b1 == (c.pool_en ? 3'd4 : 3'd1)) st <= S_PWR;
          end
        end
        S_PWR: begin                      // map word out, latch the values
          o_vals <= q_vals;
          o_nnz  <= 6'(q_nnz);
          o_cnt  <= '0;
          st     <= (q_nnz == 0) ? S_DONE : S_PUSH;
        end
        S_PUSH: begin
          o_cnt <= o_cnt + 1'b1;
          if (o_cnt + 1'b1 == o_nnz) st <= S_DONE;
        end
        S_DONE: begin                     // pixel finished
          if (cnt + 1 < hwo) begin
            cnt <= cnt + 1'b1;
            st  <= S_POST;
          end else if (oc + 1 < c.oc_first + c.n_oc) begin
            oc <= oc + 1'b1;
            st <= S_OC;
          end else begin
            done <= 1'b1;
            st   <= S_IDLE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // all clusters see the same window, so they finish together
  always_ff @(posedge clk)
    if (rst_n && st == S_WAIT)
      assert (pcl_done == '0 || pcl_done == '1) else $error("tbn_ctrl: clusters out of step");

endmodule
