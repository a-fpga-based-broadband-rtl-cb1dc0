// tb_cmd_decoder: checks the reset configuration, then sends 400 random
// commands (random address, value and byte gaps, with stray bytes between
// commands) and after each one compares the whole configuration with a
// register model kept here. Also checks one cfg_write pulse per command.
module tb_cmd_decoder;
  import eit_pkg::*;
  logic clk = 0, rst_n = 0;
  logic rx_valid, cfg_write;
  logic [7:0] rx_data;
  eit_cfg_t cfg, m;
  int checks = 0, failures = 0, nwr = 0;
  cmd_decoder dut (.*);
  always #10 clk = ~clk;
  always @(posedge clk) if (rst_n && cfg_write) nwr++;
  initial begin
    #20_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic send(logic [7:0] b);
    rx_data = b; rx_valid = 1;
    @(posedge clk); #1 rx_valid = 0;
    repeat ($urandom_range(0, 2)) @(posedge clk);
    #0;
  endtask
  task automatic apply(int a, logic [31:0] v);
    case (a)
      0: begin m.run = v[0]; m.no_recip = v[1]; m.adc_offset_bin = v[2]; end
      1: m.wave = (v[1:0] == 2'd3) ? WAVE_SINE : wave_t'(v[1:0]);
      2: m.ftw = v;
      3: m.chirp_step = v;
      4: m.chirp_len = v[15:0];
      5: m.amplitude = v[15:0];
      6: begin m.pga_exc = v[1:0]; m.pga_v = v[3:2]; m.pga_i = v[5:4]; end
      7: begin m.avg_log2 = v[2:0]; m.dec_log2 = v[5:4]; end
      8: m.settle_cycles = v[23:0];
      9: begin m.i_skip = v[3:0]; m.v_skip = v[7:4]; end
      default: ;
    endcase
  endtask
  initial begin
    rx_valid = 0; rx_data = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // reset values
    m = '0;
    m.wave = WAVE_SINE; m.ftw = 32'h0040_0000; m.chirp_step = 32'd1007771126;
    m.chirp_len = 16'd2048; m.amplitude = 16'hFFFF; m.settle_cycles = 24'd50000;
    m.i_skip = 1; m.v_skip = 1;
    checks++;
    if (cfg !== m) begin failures++; $display("reset config %h expected %h", cfg, m); end
    for (int k = 0; k < 400; k++) begin
      automatic int a = int'($urandom_range(0, 11));
      automatic logic [31:0] v = $urandom;
      if ($urandom_range(0, 3) == 0) send(8'($urandom_range(0, 127)));   // stray byte
      send(8'h80 | 8'(a));
      for (int b = 3; b >= 0; b--) send(v[8*b +: 8]);
      apply(a, v);
      @(posedge clk); #1;
      checks++;
      if (cfg !== m) begin failures++; if (failures < 10) $display("cmd %0d addr %0d: cfg %h expected %h", k, a, cfg, m); end
    end
    checks++;
    if (nwr != 400) begin failures++; $display("%0d write pulses", nwr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
