// tb_tbn_tmp_mem: random partial-sum words written over the whole TMP
// memory, read back with one-cycle latency and compared with a reference,
// including a read of an address in the same cycle it is rewritten (old data
// expected).
module tb_tbn_tmp_mem;
  import tbn_pkg::*;
  logic clk = 0, we = 0;
  logic [TMP_AW-1:0] waddr = '0, raddr = '0;
  psum_vec_t wdata = '0, rdata;
  psum_vec_t refm [int];
  int checks = 0, failures = 0;
  tbn_tmp_mem dut (.*);
  always #5 clk = ~clk;
  initial begin
    for (int i = 0; i < TMP_DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = TMP_AW'(i);
      for (int k = 0; k < NCH; k++) wdata[k] = psum_t'($urandom);
      refm[i] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int i = 0; i < 2000; i++) begin
      int a;
      a = $urandom_range(0, TMP_DEPTH - 1);
      raddr = TMP_AW'(a);
      // read-during-write of the same word returns the old contents
      we = (i % 5 == 0); waddr = TMP_AW'(a);
      for (int k = 0; k < NCH; k++) wdata[k] = psum_t'($urandom);
      @(negedge clk);
      checks++;
      if (rdata != refm[a]) begin failures++; if (failures < 10) $display("tmp[%0d] mismatch", a); end
      if (we) refm[a] = wdata;
      we = 0;
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
