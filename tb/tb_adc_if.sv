// tb_adc_if: drives the two ADC buses with new random codes on every rising
// ADC clock edge and checks that each code appears once, in order and
// correctly converted, on s_v/s_i; checks the 25 MSPS rate (one sample per
// two system clocks) and the 50 % duty cycle of adc_clk.
module tb_adc_if;
  logic clk = 0, rst_n = 0, offset_binary;
  logic adc_clk;
  logic [13:0] adc_a, adc_b;
  logic s_valid;
  logic signed [13:0] s_v, s_i;
  int checks = 0, failures = 0;
  adc_if dut (.*);
  always #10 clk = ~clk;
  initial begin
    #2_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // ADC model: new data after each rising adc_clk edge
  logic [13:0] qa[$], qb[$];
  always @(posedge adc_clk) begin
    adc_a <= 14'($urandom); adc_b <= 14'($urandom);
  end
  always @(negedge adc_clk) begin qa.push_back(adc_a); qb.push_back(adc_b); end
  int nval = 0, ncyc = 0, nhigh = 0;
  always @(posedge clk) if (rst_n) begin
    ncyc++; if (adc_clk) nhigh++;
    if (s_valid) begin
      logic [13:0] ea, eb;
      nval++;
      ea = qa.pop_front(); eb = qb.pop_front();
      if (offset_binary) begin ea[13] = ~ea[13]; eb[13] = ~eb[13]; end
      checks++;
      if (s_v !== ea || s_i !== eb) begin
        failures++; $display("got %h %h expected %h %h", s_v, s_i, ea, eb);
      end
    end
  end
  initial begin
    adc_a = 0; adc_b = 0; offset_binary = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    repeat (400) @(posedge clk);
    offset_binary = 1;
    repeat (400) @(posedge clk);
    #1;
    checks++;
    if (nval < 399 || nval > 401) begin failures++; $display("rate: %0d samples in %0d clocks", nval, ncyc); end
    checks++;
    if (nhigh < 399 || nhigh > 401) begin failures++; $display("duty: %0d of %0d", nhigh, ncyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
