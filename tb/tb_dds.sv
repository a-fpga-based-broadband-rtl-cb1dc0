// tb_dds: self-checking test of the DDS.
// A reference model with real-valued sin() tracks the phase accumulator and
// the chirp tuning word; every output sample of the sine, rectangular and
// chirp modes is compared with it (tolerance 1 LSB). It also checks the sine
// period for a tuning word of 2^22 (1024 clocks = 48.83 kHz at 50 MHz) and
// that the chirp repeats every chirp_len clocks.
module tb_dds;
  import eit_pkg::*;
  logic clk = 0, rst_n = 0;
  wave_t wave;
  logic [31:0] ftw, chirp_step;
  logic [15:0] chirp_len, amplitude;
  logic signed [15:0] sample;
  int checks = 0, failures = 0;

  dds dut (.*);
  always #10 clk = ~clk;

  initial begin
    #20_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model
  longint unsigned mph, mfx;
  int mcnt;
  int exp_hist[$];
  function automatic int ref_val(longint unsigned ph, wave_t w, int amp);
    real s; int raw;
    if (w == WAVE_RECT) raw = ph[31] ? -32767 : 32767;
    else begin
      s = 32767.0 * $sin(2.0 * PI * real'(ph >> 20) / 4096.0);
      raw = (s >= 0) ? int'($floor(s + 0.5)) : -int'($floor(-s + 0.5));
    end
    return (raw * amp) >>> 16;
  endfunction

  task automatic run_mode(wave_t w, int ncyc, int chk_from, output int samples[$]);
    int e; longint unsigned step;
    samples = {};
    rst_n = 0; wave = w;
    @(posedge clk); @(posedge clk); #1 rst_n = 1;
    mph = 0; mfx = 0; mcnt = 0; exp_hist = {};
    // after reset ftw_fx is 0 for one cycle in every mode
    for (int t = 0; t < ncyc; t++) begin
      exp_hist.push_back(ref_val(mph, w, int'(amplitude)));
      @(posedge clk);
      // model update (same edge as the design)
      if (w == WAVE_CHIRP) begin
        if (mcnt >= int'(chirp_len) - 1) begin mcnt = 0; mph = 0; mfx = {16'd0, ftw, 16'd0}; end
        else begin
          step = mfx >> 16; mcnt++; mph = (mph + step) & 64'hFFFF_FFFF;
          mfx = (mfx + 64'(chirp_step)) & 64'hFFFF_FFFF_FFFF;
        end
      end else begin
        mph = (mph + 64'(ftw)) & 64'hFFFF_FFFF;
      end
      #1;
      samples.push_back(int'(sample));
      if (t >= 1 && t >= chk_from) begin
        e = exp_hist[t-1];
        checks++;
        if (int'(sample) - e > 1 || e - int'(sample) > 1) begin
          failures++;
          if (failures < 10) $display("mode %0d t=%0d sample=%0d expected=%0d", w, t, sample, e);
        end
      end
    end
  endtask

  int s[$];
  int zc[$];
  initial begin
    ftw = 32'h0040_0000; chirp_step = 32'd1007771126 >> 8; chirp_len = 16'd2048; amplitude = 16'hFFFF;
    // chirp_step above is scaled so the TB runs quickly; start word = 12 kHz
    // sine: exact for every sample from the second on
    run_mode(WAVE_SINE, 3000, 2, s);
    zc = {};
    for (int t = 1; t < s.size(); t++) if (s[t-1] < 0 && s[t] >= 0) zc.push_back(t);
    checks++;
    if (zc.size() < 2 || zc[1] - zc[0] != 1024) begin failures++; $display("sine period wrong"); end
    amplitude = 16'd20000;
    run_mode(WAVE_SINE, 1500, 2, s);
    run_mode(WAVE_RECT, 1500, 2, s);
    // chirp: 12 kHz start word, real step for 12k -> 378.625k over 2048 clocks
    ftw = 32'd1030792; chirp_step = 32'd1007771126; amplitude = 16'hFFFF;
    run_mode(WAVE_CHIRP, 7000, 2, s);
    checks++;
    begin
      automatic int bad = 0;
      // the first period starts from tuning word 0 after reset: compare later ones
      for (int t = 2100; t < 2048 + 2100; t++) if (s[t] != s[t+2048]) bad++;
      if (bad != 0) begin failures++; $display("chirp not periodic: %0d", bad); end
    end
    // rising frequency: more zero crossings in the second half of a period
    checks++;
    begin
      automatic int z1 = 0, z2 = 0;
      for (int t = 2051; t < 3074; t++) if ((s[t-1] < 0) != (s[t] < 0)) z1++;
      for (int t = 3074; t < 4097; t++) if ((s[t-1] < 0) != (s[t] < 0)) z2++;
      if (!(z2 > 2 * z1)) begin failures++; $display("chirp zero crossings %0d %0d", z1, z2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
