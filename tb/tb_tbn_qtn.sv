// tb_tbn_qtn: checks the ternary quantiser.  For random values around random
// thresholds (including values equal to +/- threshold) it compares the map
// word, the packed value bits (channel 31 first) and the non-zero count with
// a direct encoding.
module tb_tbn_qtn;
  import tbn_pkg::*;
  dval_vec_t in;
  mis_vec_t thr;
  logic [NCH-1:0] map, vals;
  logic [5:0] nnz;
  int checks = 0, failures = 0;
  tbn_qtn dut (.*);
  initial begin
    for (int t = 0; t < 1000; t++) begin
      for (int k = 0; k < NCH; k++) begin
        int th;
        th = $urandom_range(0, 300);
        thr[k] = mis_t'(th);
        case ($urandom_range(0, 4))
          0: in[k] = dval_t'(th);
          1: in[k] = dval_t'(-th);
          default: in[k] = dval_t'($urandom_range(0, 1200) - 600);
        endcase
      end
      #1;
      begin
        logic [NCH-1:0] em, ev;
        int n;
        em = '0; ev = '0; n = 0;
        for (int k = NCH - 1; k >= 0; k--) begin
          int v, th;
          v = $signed(in[k]); th = $signed(thr[k]);
          if (v > th)       begin em[k] = 1; ev[n] = 1; n++; end
          else if (v < -th) begin em[k] = 1; ev[n] = 0; n++; end
        end
        checks += 3;
        if (map !== em) begin failures++; $display("map %h expected %h", map, em); end
        if (nnz != n) begin failures++; $display("nnz %0d expected %0d", nnz, n); end
        if ((vals & ((64'd1 << n) - 1)) != ev) begin failures++; $display("vals %h expected %h", vals, ev); end
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
