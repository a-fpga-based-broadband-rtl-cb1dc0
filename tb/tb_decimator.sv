// tb_decimator: feeds random samples with random gaps at every decimation
// factor and checks each output against the floor of the mean of the group,
// computed in the testbench, and the number of outputs per input.
module tb_decimator;
  logic clk = 0, rst_n = 0;
  logic [1:0] dec_log2;
  logic restart, in_valid, out_valid;
  logic signed [13:0] in_v, in_i, out_v, out_i;
  int checks = 0, failures = 0;
  decimator dut (.*);
  always #10 clk = ~clk;
  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int ev[$], ei[$];
  int nout;
  always @(posedge clk) if (rst_n && out_valid) begin
    int a, b;
    nout++;
    a = ev.pop_front(); b = ei.pop_front();
    checks++;
    if (int'(out_v) != a || int'(out_i) != b) begin
      failures++; $display("dec %0d: got %0d %0d expected %0d %0d", dec_log2, out_v, out_i, a, b);
    end
  end
  initial begin
    restart = 0; in_valid = 0; in_v = 0; in_i = 0; dec_log2 = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int k = 0; k < 4; k++) begin
      automatic int n = 1 << k;
      dec_log2 = 2'(k); nout = 0;
      restart = 1; @(posedge clk); #1 restart = 0;
      for (int g = 0; g < 64; g++) begin
        automatic int sv = 0, si = 0;
        int av[8], ai[8];
        for (int j = 0; j < n; j++) begin
          av[j] = int'($urandom_range(0, 16383)) - 8192;
          ai[j] = int'($urandom_range(0, 16383)) - 8192;
          if (g == 0 && j == 0) begin av[j] = -8192; ai[j] = 8191; end
          sv += av[j]; si += ai[j];
        end
        ev.push_back(sv >>> k); ei.push_back(si >>> k);
        for (int j = 0; j < n; j++) begin
          in_v = 14'(av[j]); in_i = 14'(ai[j]); in_valid = 1;
          @(posedge clk); #1 in_valid = 0;
          if ($urandom_range(0, 3) == 0) begin @(posedge clk); #1; end
        end
      end
      repeat (3) @(posedge clk); #1;
      checks++;
      if (nout != 64) begin failures++; $display("dec %0d: %0d outputs", k, nout); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
