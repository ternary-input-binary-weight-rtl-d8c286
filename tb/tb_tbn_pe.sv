// tb_tbn_pe: self-checking test of the zero-skipping PE.
// Replays the worked example of the PE (map 0b01011010 over 8 positions)
// and then random loads; checks every PSUM against a direct sum of ternary
// products and that a load with k non-zero positions takes exactly k cycles.
module tb_tbn_pe;
  localparam int NB = 16, NOUT = 32, PSW = 8;
  logic clk = 0, rst_n = 0, start = 0;
  logic [NB-1:0] pma, pva;
  logic [NOUT-1:0][NB-1:0] pwg;
  logic busy;
  logic signed [NOUT-1:0][PSW-1:0] psum;
  int checks = 0, failures = 0;

  tbn_pe #(.NB(NB), .NOUT(NOUT), .PSW(PSW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one(input logic [NB-1:0] m, input logic [NB-1:0] v,
                         input logic [NOUT-1:0][NB-1:0] w);
    int exp [NOUT];
    int n, cyc;
    n = 0;
    for (int k = 0; k < NOUT; k++) exp[k] = 0;
    for (int i = NB - 1; i >= 0; i--)
      if (m[i]) begin
        for (int k = 0; k < NOUT; k++) exp[k] += (v[n] == w[k][i]) ? 1 : -1;
        n++;
      end
    @(negedge clk);
    pma = m; pva = v; pwg = w; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (busy) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != n) begin
      failures++;
      $display("cycle count %0d, expected %0d", cyc, n);
    end
    for (int k = 0; k < NOUT; k++) begin
      checks++;
      if ($signed(psum[k]) != exp[k]) begin
        failures++;
        if (failures < 10) $display("psum[%0d]=%0d expected %0d", k, $signed(psum[k]), exp[k]);
      end
    end
  endtask

  initial begin
    logic [NOUT-1:0][NB-1:0] w;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // worked example: 8 positions, weights of output channels 0..3
    // rows 7..0 of the weight table, columns = output channels 0..3
    begin
      logic [3:0] rows [8];
      rows = '{4'b1101, 4'b1000, 4'b0000, 4'b0111, 4'b1101, 4'b0101, 4'b1000, 4'b0110};
      w = '0;
      for (int i = 0; i < 8; i++)
        for (int k = 0; k < 4; k++) w[k][i] = rows[i][k];
    end
    // single non-zero at position 6, value +1: products -1,-1,-1,+1
    run_one(16'b0100_0000, 16'b1, w);
    checks++;
    if (!($signed(psum[0]) == -1 && $signed(psum[1]) == -1 &&
          $signed(psum[2]) == -1 && $signed(psum[3]) == 1)) begin
      failures++;
      $display("worked example first cycle mismatch");
    end
    run_one(16'b0000_0000_0101_1010, 16'b1101, w);
    for (int t = 0; t < 300; t++) begin
      for (int k = 0; k < NOUT; k++) w[k] = NB'($urandom);
      run_one(NB'($urandom) & NB'($urandom), NB'($urandom), w);
    end
    run_one('0, '0, w);
    run_one('1, NB'($urandom), w);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
