// tbn_ref.svh: reference model of one TBN layer, shared by the accelerator
// testbenches (included inside a testbench module).
//
// A layer's input is a ternary tensor X[c][y][x] given as map words
// (address ic*H*W + y*W + x, bit b = channel 32*ic + b) and a value stream
// (address order, channel 31 first).  Weights are words of 96 bits at
// ((oc*NIC + ic)*32 + k)*3 + r, bit (2-col)*32 + c = weight of input channel
// 32*ic + c at kernel row r, column col, for output channel 32*oc + k.
// The reference computes the padded 3x3 convolution, optional 2x2 max
// pooling + ReLU, optional multiplication by factor/256 (floor), and the
// ternary quantisation against +/-threshold, and encodes the result the same
// way as the input.

int          r_h, r_w, r_nic, r_noc;
bit          r_pool, r_bn;
logic [31:0] r_map [];          // input map words
bit          r_val [$];         // input value stream
logic [95:0] r_wgt [];          // weight words
int          r_thr [], r_fac [];// per output channel
logic [31:0] e_map [];          // expected output map words
bit          e_val [$];         // expected output value stream
int          e_sum [];          // raw sums, [o][y][x]

// random input map with about density/16 of the elements non-zero
function automatic void ref_gen_input(int h, int w, int nic, int nch_used, int density);
  r_h = h; r_w = w; r_nic = nic;
  r_map = new[nic * h * w];
  r_val.delete();
  foreach (r_map[a]) begin
    logic [31:0] m;
    for (int b = 0; b < 32; b++)
      m[b] = ((a / (h * w)) * 32 + b < nch_used) && ($urandom_range(0, 15) < density);
    r_map[a] = m;
    for (int b = 31; b >= 0; b--) if (m[b]) r_val.push_back(1'($urandom));
  end
endfunction

function automatic void ref_gen_weights(int noc, bit pool, bit bn, int thr_max);
  r_noc = noc; r_pool = pool; r_bn = bn;
  r_wgt = new[noc * r_nic * 96];
  foreach (r_wgt[i]) r_wgt[i] = {$urandom, $urandom, $urandom};
  r_thr = new[noc * 32];
  r_fac = new[noc * 32];
  foreach (r_thr[i]) begin
    r_thr[i] = $urandom_range(0, thr_max);
    r_fac[i] = (($urandom_range(0, 1) == 1) ? 1 : -1) * $urandom_range(64, 512);
  end
endfunction

// ternary input element
function automatic int ref_x(int c, int y, int x, ref int xt []);
  if (y < 0 || y >= r_h || x < 0 || x >= r_w) return 0;
  return xt[(c * r_h + y) * r_w + x];
endfunction

function automatic void ref_compute();
  int xt [];
  int n, ho, wo;
  xt = new[r_nic * 32 * r_h * r_w];
  n = 0;
  foreach (r_map[a]) begin
    int ic, p;
    ic = a / (r_h * r_w);
    p  = a % (r_h * r_w);
    for (int b = 31; b >= 0; b--) begin
      int v;
      v = 0;
      if (r_map[a][b]) begin
        v = r_val[n] ? 1 : -1;
        n++;
      end
      xt[(ic * 32 + b) * r_h * r_w + p] = v;
    end
  end
  e_sum = new[r_noc * 32 * r_h * r_w];
  for (int o = 0; o < r_noc * 32; o++)
    for (int y = 0; y < r_h; y++)
      for (int x = 0; x < r_w; x++) begin
        int s;
        s = 0;
        for (int ic = 0; ic < r_nic; ic++)
          for (int r = 0; r < 3; r++) begin
            if (y - 1 + r < 0 || y - 1 + r >= r_h) continue;
            for (int col = 0; col < 3; col++) begin
              logic [95:0] wd;
              if (x - 1 + col < 0 || x - 1 + col >= r_w) continue;
              wd = r_wgt[(((o / 32) * r_nic + ic) * 32 + o % 32) * 3 + r];
              for (int c = 0; c < 32; c++) begin
                int xv;
                xv = xt[((ic * 32 + c) * r_h + y - 1 + r) * r_w + x - 1 + col];
                if (xv != 0) s += (wd[(2 - col) * 32 + c] ? 1 : -1) * xv;
              end
            end
          end
        e_sum[(o * r_h + y) * r_w + x] = s;
      end
  ho = r_pool ? r_h / 2 : r_h;
  wo = r_pool ? r_w / 2 : r_w;
  e_map = new[r_noc * ho * wo];
  e_val.delete();
  for (int oc = 0; oc < r_noc; oc++)
    for (int p = 0; p < ho * wo; p++) begin
      logic [31:0] m;
      bit vb [32];
      for (int k = 0; k < 32; k++) begin
        int o, v;
        longint t;
        o = oc * 32 + k;
        if (r_pool) begin
          v = 0;
          for (int d = 0; d < 4; d++) begin
            int s;
            s = e_sum[(o * r_h + (p / wo) * 2 + d / 2) * r_w + (p % wo) * 2 + d % 2];
            if (s > v) v = s;
          end
        end else v = e_sum[o * r_h * r_w + p];
        if (r_bn) begin
          t = longint'(v) * r_fac[o];
          v = int'((t >= 0) ? t / 256 : -((-t + 255) / 256));
        end
        m[k]  = (v > r_thr[o]) || (v < -r_thr[o]);
        vb[k] = (v > r_thr[o]);
      end
      e_map[oc * ho * wo + p] = m;
      for (int k = 31; k >= 0; k--) if (m[k]) e_val.push_back(vb[k]);
    end
endfunction

// the expected output becomes the next layer's input
function automatic void ref_chain(bit fc);
  int ho, wo;
  ho = r_pool ? r_h / 2 : r_h;
  wo = r_pool ? r_w / 2 : r_w;
  r_map = e_map;
  r_val = e_val;
  if (fc) begin
    r_nic = r_noc * ho * wo; r_h = 1; r_w = 1;
  end else begin
    r_nic = r_noc; r_h = ho; r_w = wo;
  end
endfunction
