// tb_tbn_val_fifo: pushes a random bit stream, pops it back (one-cycle read
// latency), rewinds and pops it again, checks the count, then fills a small
// instance beyond its depth to see the overflow flag and the clear.
module tb_tbn_val_fifo;
  import tbn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic clr = 0, rewind = 0, push = 0, din = 0, pop = 0, dout, dout_valid, overflow;
  logic [VAL_AW-1:0] count, peek_addr = '0;
  logic peek_data;
  // small instance for overflow
  logic s_push = 0, s_clr = 0, s_dout, s_valid, s_ovf, s_peek;
  logic [4:0] s_count;
  int checks = 0, failures = 0;
  logic stream [$];

  tbn_val_fifo dut (.*);
  tbn_val_fifo #(.DEPTH(16)) u_small (
    .clk, .rst_n, .clr(s_clr), .rewind(1'b0), .push(s_push), .din(1'b1),
    .pop(1'b0), .dout(s_dout), .dout_valid(s_valid), .count(s_count),
    .overflow(s_ovf), .peek_addr(5'd0), .peek_data(s_peek));
  always #5 clk = ~clk;

  task automatic drain(input int n);
    int got;
    got = 0;
    for (int i = 0; i <= n; i++) begin
      @(negedge clk);
      if (dout_valid) begin
        checks++;
        if (dout != stream[got]) begin failures++; if (failures < 10) $display("bit %0d: %0d expected %0d", got, dout, stream[got]); end
        got++;
      end
      pop = (i < n - 1);
    end
    pop = 0;
    checks++;
    if (got != n) begin failures++; $display("popped %0d of %0d", got, n); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      push = 1; din = 1'($urandom);
      stream.push_back(din);
    end
    @(negedge clk);
    push = 0;
    checks++;
    if (count != 5000) begin failures++; $display("count %0d", count); end
    for (int i = 0; i < 50; i++) begin
      peek_addr = VAL_AW'(i * 97);
      #1;
      checks++;
      if (peek_data != stream[i * 97]) failures++;
    end
    pop = 1;
    drain(5000);
    checks++;
    if (count != 0) begin failures++; $display("count after drain %0d", count); end
    @(negedge clk);
    rewind = 1;
    @(negedge clk);
    rewind = 0;
    pop = 1;
    drain(5000);
    // overflow on the small instance
    for (int i = 0; i < 20; i++) begin
      @(negedge clk);
      s_push = 1;
    end
    @(negedge clk);
    s_push = 0;
    checks += 2;
    if (!s_ovf) begin failures++; $display("no overflow"); end
    if (s_count != 16) begin failures++; $display("small count %0d", s_count); end
    s_clr = 1;
    @(negedge clk);
    s_clr = 0;
    checks++;
    if (s_ovf || s_count != 0) begin failures++; $display("clear failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
