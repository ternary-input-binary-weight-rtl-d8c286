// tb_tbn_mis_mem: fills the threshold and factor arrays with different
// random words and reads every chunk back, checking that both arrays are read
// together with one-cycle latency and do not alias.
module tb_tbn_mis_mem;
  import tbn_pkg::*;
  logic clk = 0, we = 0, wsel = 0;
  logic [MIS_AW-1:0] waddr = '0, raddr = '0;
  mis_vec_t wdata = '0, thr, factor;
  mis_vec_t rt [MIS_DEPTH], rf [MIS_DEPTH];
  int checks = 0, failures = 0;
  tbn_mis_mem dut (.*);
  always #5 clk = ~clk;
  initial begin
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < MIS_DEPTH; i++) begin
        @(negedge clk);
        we = 1; wsel = s[0]; waddr = MIS_AW'(i);
        for (int k = 0; k < NCH; k++) wdata[k] = mis_t'($urandom);
        if (s == 0) rt[i] = wdata; else rf[i] = wdata;
      end
    @(negedge clk);
    we = 0;
    for (int i = MIS_DEPTH - 1; i >= 0; i--) begin
      raddr = MIS_AW'(i);
      @(negedge clk);
      checks += 2;
      if (thr != rt[i])    begin failures++; $display("thr[%0d] mismatch", i); end
      if (factor != rf[i]) begin failures++; $display("factor[%0d] mismatch", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
