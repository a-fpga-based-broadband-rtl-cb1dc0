// tb_frame_averager: averages 1, 4 and 8 records of random samples (with
// random input gaps and random output back-pressure) and checks every output
// against floor(sum / 2^m) computed here, the position of out_last, the
// `captured` pulse right after the last input, and that with out_ready held
// high the N outputs take exactly N clocks.
module tb_frame_averager;
  localparam int N = 1024;
  logic clk = 0, rst_n = 0;
  logic start, in_valid, out_valid, out_ready, out_last, captured, idle;
  logic [2:0] avg_log2;
  logic signed [13:0] in_v, in_i, out_v, out_i;
  int checks = 0, failures = 0;
  frame_averager #(.N(N)) dut (.*);
  always #10 clk = ~clk;
  initial begin
    #50_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int sv[N], si[N];
  task automatic run(int m, bit backpressure);
    int ncap = 0, k = 0, t0, t1;
    for (int j = 0; j < N; j++) begin sv[j] = 0; si[j] = 0; end
    avg_log2 = 3'(m); start = 1; @(posedge clk); #1 start = 0;
    for (int r = 0; r < (1 << m); r++)
      for (int j = 0; j < N; j++) begin
        automatic int a = int'($urandom_range(0, 16383)) - 8192;
        automatic int b = (j % 37) * 200 - 3000 + int'($urandom_range(0, 15));
        sv[j] += a; si[j] += b;
        in_v = 14'(a); in_i = 14'(b); in_valid = 1;
        @(posedge clk); #1 in_valid = 0;
        if (captured) ncap++;
        if ($urandom_range(0, 4) == 0) begin @(posedge clk); #1; if (captured) ncap++; end
      end
    checks++;
    if (ncap != 1) begin failures++; $display("captured pulses %0d", ncap); end
    t0 = $time;
    while (k < N) begin
      out_ready = backpressure ? ($urandom_range(0, 2) != 0) : 1'b1;
      #1;
      if (out_valid && out_ready) begin
        checks++;
        if (int'(out_v) != (sv[k] >>> m) || int'(out_i) != (si[k] >>> m) || out_last != (k == N - 1)) begin
          failures++;
          if (failures < 10) $display("m=%0d k=%0d got %0d %0d expected %0d %0d", m, k, out_v, out_i, sv[k] >>> m, si[k] >>> m);
        end
        k++;
      end
      @(posedge clk); #1;
    end
    t1 = $time;
    if (!backpressure) begin
      checks++;
      if ((t1 - t0) != N * 20) begin failures++; $display("output took %0d clocks", (t1 - t0) / 20); end
    end
    checks++;
    if (!idle) begin failures++; $display("not idle after output"); end
  endtask
  initial begin
    start = 0; in_valid = 0; out_ready = 0; in_v = 0; in_i = 0; avg_log2 = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    run(0, 0);
    run(2, 1);
    run(3, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
