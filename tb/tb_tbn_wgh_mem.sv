// tb_tbn_wgh_mem: random 96-bit writes over the whole weight memory (first
// and last word included), read back with one-cycle latency and compared
// with a reference model.
module tb_tbn_wgh_mem;
  import tbn_pkg::*;
  logic clk = 0, we = 0;
  logic [WGH_AW-1:0] waddr = '0, raddr = '0;
  logic [95:0] wdata = '0, rdata;
  logic [95:0] refm [int];
  int checks = 0, failures = 0;
  tbn_wgh_mem dut (.*);
  always #5 clk = ~clk;
  initial begin
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      we = 1;
      waddr = (i == 0) ? '0 : (i == 1) ? WGH_AW'(WGH_DEPTH - 1) : WGH_AW'($urandom_range(0, WGH_DEPTH - 1));
      wdata = {$urandom, $urandom, $urandom};
      refm[int'(waddr)] = wdata;
    end
    @(negedge clk);
    we = 0;
    foreach (refm[a]) begin
      raddr = WGH_AW'(a);
      @(negedge clk);
      checks++;
      if (rdata != refm[a]) begin failures++; if (failures < 10) $display("wgh[%0d]=%h expected %h", a, rdata, refm[a]); end
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
