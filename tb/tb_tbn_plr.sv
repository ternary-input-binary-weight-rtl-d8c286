// tb_tbn_plr: checks 2x2 max pooling with ReLU, and the bypass, against a
// direct per-channel computation on random signed partial sums.
module tb_tbn_plr;
  import tbn_pkg::*;
  logic pool_en;
  psum_vec_t in0, in1, in2, in3, out;
  int checks = 0, failures = 0;
  tbn_plr dut (.*);
  initial begin
    for (int t = 0; t < 500; t++) begin
      pool_en = t[0];
      for (int k = 0; k < NCH; k++) begin
        in0[k] = psum_t'($urandom_range(0, 2000) - 1000);
        in1[k] = psum_t'($urandom_range(0, 2000) - 1000);
        in2[k] = psum_t'($urandom_range(0, 2000) - 1000);
        in3[k] = psum_t'($urandom_range(0, 2000) - 1000);
      end
      #1;
      for (int k = 0; k < NCH; k++) begin
        int e, a [4];
        a[0] = $signed(in0[k]); a[1] = $signed(in1[k]); a[2] = $signed(in2[k]); a[3] = $signed(in3[k]);
        if (pool_en) begin
          e = 0;
          for (int i = 0; i < 4; i++) if (a[i] > e) e = a[i];
        end else e = a[0];
        checks++;
        if ($signed(out[k]) != e) begin
          failures++;
          if (failures < 10) $display("pool=%0d ch%0d: %0d expected %0d", pool_en, k, $signed(out[k]), e);
        end
      end
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
