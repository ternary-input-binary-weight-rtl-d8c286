// tb_tbn_map_mem: writes random words to random addresses of both banks,
// then reads them back, checking the bank separation and the one-cycle read
// latency against a reference model.
module tb_tbn_map_mem;
  import tbn_pkg::*;
  logic clk = 0, we = 0, wbank = 0, rbank = 0;
  logic [MAP_AW-1:0] waddr = '0, raddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] ref0 [int], ref1 [int];
  int checks = 0, failures = 0;
  tbn_map_mem dut (.*);
  always #5 clk = ~clk;
  initial begin
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      we = 1; wbank = 1'($urandom); waddr = MAP_AW'($urandom_range(0, MAP_DEPTH - 1)); wdata = $urandom;
      if (wbank) ref1[int'(waddr)] = wdata; else ref0[int'(waddr)] = wdata;
    end
    @(negedge clk);
    we = 0;
    foreach (ref0[a]) begin
      rbank = 0; raddr = MAP_AW'(a);
      @(negedge clk);
      checks++;
      if (rdata != ref0[a]) begin failures++; if (failures < 10) $display("bank0[%0d]=%h expected %h", a, rdata, ref0[a]); end
    end
    foreach (ref1[a]) begin
      rbank = 1; raddr = MAP_AW'(a);
      @(posedge clk);
      #1;
      checks++;
      if (rdata != ref1[a]) begin failures++; if (failures < 10) $display("bank1[%0d]=%h expected %h", a, rdata, ref1[a]); end
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
