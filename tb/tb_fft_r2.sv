// tb_fft_r2: transforms three 1024-sample records (a full-scale sine on bin
// 2 plus a cosine on bin 16, random noise, a single impulse) and compares
// bins 0..511 with a direct DFT computed in double precision here, allowing
// 64 LSB of rounding error (about 8e-6 of the largest possible bin). It also checks the bin indices and out_last, and
// that the butterflies take exactly 512 * 10 = 5120 clocks.
module tb_fft_r2;
  import eit_pkg::PI;
  localparam int N = 1024;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, out_last;
  logic signed [13:0] in_data;
  logic signed [31:0] out_re, out_im;
  logic [9:0] out_idx;
  int checks = 0, failures = 0;
  fft_r2 dut (.*);
  always #10 clk = ~clk;
  initial begin
    #100_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int x[N];
  real maxerr;
  task automatic run(int kind);
    int k = 0;
    longint t_last, t_first;
    real tol = 64.0;
    for (int n = 0; n < N; n++) begin
      case (kind)
        0: x[n] = int'($floor(8191.0 * $sin(2.0 * PI * 2.0 * n / N) * 0.7 + 2000.0 * $cos(2.0 * PI * 16.0 * n / N) + 0.5));
        1: x[n] = int'($urandom_range(0, 16383)) - 8192;
        default: x[n] = (n == 5) ? 8191 : 0;
      endcase
    end
    for (int n = 0; n < N; n++) begin
      in_data = 14'(x[n]); in_valid = 1;
      #1; while (!in_ready) begin @(posedge clk); #1; end
      @(posedge clk); #1;
    end
    in_valid = 0; t_last = $time;
    out_ready = 1;
    while (!out_valid) begin @(posedge clk); #1; end
    t_first = $time;
    checks++;
    if ((t_first - t_last) / 20 != 5120) begin failures++; $display("compute took %0d clocks", (t_first - t_last) / 20); end
    while (k < N / 2) begin
      if (out_valid && out_ready) begin
        real re = 0.0, im = 0.0, er, ei;
        for (int n = 0; n < N; n++) begin
          re += x[n] * $cos(2.0 * PI * k * n / N);
          im -= x[n] * $sin(2.0 * PI * k * n / N);
        end
        er = re - real'(out_re); ei = im - real'(out_im);
        if (er < 0) er = -er;
        if (ei < 0) ei = -ei;
        if (er > maxerr) maxerr = er;
        if (ei > maxerr) maxerr = ei;
        checks++;
        if (er > tol || ei > tol || int'(out_idx) != k || out_last != (k == N / 2 - 1)) begin
          failures++;
          if (failures < 10) $display("kind %0d bin %0d: got %0d %0d expected %f %f", kind, k, out_re, out_im, re, im);
        end
        k++;
      end
      @(posedge clk); #1;
      out_ready = ($urandom_range(0, 3) != 0);
    end
    out_ready = 0;
  endtask
  initial begin
    in_valid = 0; out_ready = 0; in_data = 0; maxerr = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    run(0); run(1); run(2);
    $display("largest error %f LSB", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
