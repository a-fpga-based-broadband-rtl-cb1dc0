// tb_dac_if: checks the two's complement to straight-binary conversion, the
// mid-scale reset value and the one-clock latency of the DAC register.
module tb_dac_if;
  logic clk = 0, rst_n = 0;
  logic signed [15:0] sample;
  logic [15:0] dac_data;
  logic dac_clk;
  int checks = 0, failures = 0;
  dac_if dut (.*);
  always #10 clk = ~clk;
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(logic [15:0] got, logic [15:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask
  initial begin
    int v, prev;
    sample = 16'sd1234;
    @(posedge clk); #1 check(dac_data, 16'h8000, "reset");
    check(16'(dac_clk), 16'(!clk), "dac_clk phase");
    @(posedge clk); #1 rst_n = 1;
    prev = 1234;
    // fixed corner values then random
    for (int k = 0; k < 300; k++) begin
      case (k)
        0: v = -32768; 1: v = 32767; 2: v = 0; 3: v = -1;
        default: v = int'($urandom_range(0, 65535)) - 32768;
      endcase
      sample = 16'(v);
      @(posedge clk); #1;
      // one clock of latency: the output is the value sampled at this edge
      check(dac_data, 16'(v + 32768), "conversion");
      @(negedge clk); check(16'(dac_clk), 16'd1, "dac_clk high at clk low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
