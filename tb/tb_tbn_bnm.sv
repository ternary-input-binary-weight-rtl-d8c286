// tb_tbn_bnm: checks the batch-normalisation multiply (value x factor, then
// an arithmetic shift by the factor's fractional bits) and the bypass, on
// random signed values and factors.
module tb_tbn_bnm;
  import tbn_pkg::*;
  logic bn_en;
  psum_vec_t in;
  mis_vec_t factor;
  dval_vec_t out;
  int checks = 0, failures = 0;
  tbn_bnm dut (.*);
  initial begin
    for (int t = 0; t < 500; t++) begin
      bn_en = (t % 4 != 0);
      for (int k = 0; k < NCH; k++) begin
        in[k]     = psum_t'($urandom_range(0, 20000) - 10000);
        factor[k] = mis_t'($urandom_range(0, 2048) - 1024);
      end
      #1;
      for (int k = 0; k < NCH; k++) begin
        longint p, e;
        p = longint'($signed(in[k])) * longint'($signed(factor[k]));
        // floor division by 2^BN_FRAC
        e = bn_en ? ((p >= 0) ? p / 256 : -((-p + 255) / 256)) : longint'($signed(in[k]));
        checks++;
        if (longint'($signed(out[k])) != e) begin
          failures++;
          if (failures < 10) $display("ch%0d: %0d x %0d -> %0d expected %0d", k, $signed(in[k]), $signed(factor[k]), $signed(out[k]), e);
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
