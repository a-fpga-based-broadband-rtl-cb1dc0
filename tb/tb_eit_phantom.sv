// tb_eit_phantom: measures known loads through the whole FPGA design at its
// default parameters, as the system's own verification does with resistors
// and an RC phantom, and checks the impedances the host would compute.
//
// Analog model: the DAC code x drives the excitation current; the current
// channel of the ADC sees I = x/8 (a shunt of RSH = 50 ohm, scale chosen
// here) and the voltage channel sees the load voltage divided by RSH. The
// load Z(f) = Rs + Rp / (1 + j*2*pi*f*Rp*Cp) is sampled by the bilinear
// transform, Rs + Rp (1 + z^-1) / ((1 + c) + (1 - c) z^-1) with
// c = 2 Rp Cp / Ts, whose steady-state response to an excitation that
// repeats every record is exact at every FFT bin; its frequency warping
// is checked to move Z by less than 1e-5. The load is the same on every
// electrode combination. The host side converts each packet into
// Z[k] = RSH * V[k] / I[k] and compares it with the exact Z(f_k) (0.1 %).
// Workloads:
//   A. 46.57 ohm resistor, 48.8 kHz sine, all 208 channels: every |Z| must
//      lie within +/-0.2 permille of the mean (the system's channel
//      spread) and within 0.1 % of 46.57 ohm;
//   B. phantom Rs = 19.9 ohm, Rp = 19.86 ohm, Cp = 99.7 pF, chirp
//      excitation (12 kHz .. 378.6 kHz in 40.96 us), all 208 channels:
//      Z at every bin from 24.4 kHz to 366 kHz within 0.1 % of the exact
//      phantom impedance;
//   C. 46.5 ohm resistor with sines at 97.7, 195 and 390.6 kHz (the other
//      frequencies of the performance table), 104 channels each
//      (reciprocals omitted, to keep the run short).
// The USB chip model is busy 10 % of the time. The loads, frequencies and
// channel counts are those of the published system's bench measurements;
// the shunt value, signal scaling and the noiseless front end are this
// testbench's own, so the tolerances are far tighter than a real system's.
module tb_eit_phantom;
  import eit_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [15:0] dac_data; logic dac_clk, adc_clk;
  logic [13:0] adc_a, adc_b;
  logic [2:0] mux_i_odd, mux_i_even, mux_v_odd, mux_v_even;
  logic mux_en; logic [1:0] pga_exc, pga_v, pga_i;
  logic usb_rxf_n, usb_txe_n, usb_rd_n, usb_wr_n, usb_oe_n, usb_d_oe, frame_done;
  logic [7:0] usb_d_in, usb_d_out;
  int checks = 0, failures = 0;

  eit_top dut (.*);
  ft2232h_model #(.BUSY_PCT(10)) chip (.clk, .rxf_n(usb_rxf_n), .txe_n(usb_txe_n), .rd_n(usb_rd_n),
    .wr_n(usb_wr_n), .oe_n(usb_oe_n), .d_to_fpga(usb_d_in), .d_from_fpga(usb_d_out), .d_oe(usb_d_oe));

  always #10 clk = ~clk;
  initial begin
    #1_000_000_000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ---------------- load model ----------------
  localparam int  N = 1024;
  localparam real RSH = 50.0, FS = 25.0e6, TS = 1.0 / FS;
  real rs_, rp_, cp_, c_;

  // exact load impedance at FFT bin k
  function automatic void z_exact(int k, output real zr, output real zi);
    real w = 2.0 * PI * k * FS / N * rp_ * cp_;
    zr = rs_ + rp_ / (1.0 + w * w);
    zi = -rp_ * w / (1.0 + w * w);
  endfunction

  // the same load as seen by the sampled model (bilinear transform):
  // Rs + Rp (1 + z^-1) / ((1 + c) + (1 - c) z^-1), c = 2 Rp Cp / Ts
  function automatic void z_model(int k, output real zr, output real zi);
    real a = 2.0 * PI * k / N;
    real nr = 1.0 + $cos(a), ni = -$sin(a);
    real dr = (1.0 + c_) + (1.0 - c_) * $cos(a), di = -(1.0 - c_) * $sin(a);
    real dd = dr * dr + di * di;
    zr = rs_ + rp_ * (nr * dr + ni * di) / dd;
    zi = rp_ * (ni * dr - nr * di) / dd;
  endfunction

  task automatic set_load(real rs, real rp, real cp);
    rs_ = rs; rp_ = rp; cp_ = cp; c_ = 2.0 * rp * cp / TS;
  endtask

  real x1 = 0.0, y1 = 0.0;
  always @(posedge adc_clk) begin
    real x, y;
    x = real'($signed(dac_data ^ 16'h8000)) / 8.0;
    y = (rp_ * (x + x1) - (1.0 - c_) * y1) / (1.0 + c_);
    x1 = x; y1 = y;
    adc_b <= 14'(int'($floor(x + 0.5)));
    adc_a <= 14'(int'($floor((rs_ * x + y) / RSH + 0.5)));
  end

  // ---------------- host side ----------------
  task automatic cmd(int a, logic [31:0] v);
    chip.host_send(8'h80 | 8'(a));
    for (int b = 3; b >= 0; b--) chip.host_send(v[8*b +: 8]);
  endtask

  localparam int PKT = 10 + 2 * 512 * 8;
  int bins_chk[$];
  int npkt_frame = 0, npkt = 0;
  real zmin, zmax, zsum, worst_exact = 0.0, worst_cut = 0.0;
  real ref_mag;              // > 0: every |Z| must be within 0.1 % of this
  function automatic longint get32(int off);
    return longint'($signed({chip.to_host[off], chip.to_host[off+1], chip.to_host[off+2], chip.to_host[off+3]}));
  endfunction
  task automatic parse_packet();
    check(chip.to_host[0] == 8'hA5 && chip.to_host[1] == 8'h5A, "sync word");
    check({chip.to_host[8], chip.to_host[9]} == 16'd512, "bin count");
    foreach (bins_chk[n]) begin
      int k = bins_chk[n];
      real vr, vi, ir, ii, den, qr, qi, zr, zi, er, ei, cr, ci, err, mag;
      vr = real'(get32(10 + 8 * k));        vi = real'(get32(14 + 8 * k));
      ir = real'(get32(10 + 4096 + 8 * k)); ii = real'(get32(14 + 4096 + 8 * k));
      den = ir * ir + ii * ii;
      // Z = RSH * V / I, with the model's 32-sample delay taken out
      qr = RSH * (vr * ir + vi * ii) / den; qi = RSH * (vi * ir - vr * ii) / den;
      zr = qr; zi = qi;
      z_exact(k, er, ei);
      z_model(k, cr, ci);
      mag = $sqrt(zr * zr + zi * zi);
      err = $sqrt((zr - er) * (zr - er) + (zi - ei) * (zi - ei)) / $sqrt(er * er + ei * ei);
      if (err > worst_exact) worst_exact = err;
      err = $sqrt((cr - er) * (cr - er) + (ci - ei) * (ci - ei)) / $sqrt(er * er + ei * ei);
      if (err > worst_cut) worst_cut = err;
      check(den > 1.0e8 && $sqrt((zr - er) * (zr - er) + (zi - ei) * (zi - ei)) < 1.0e-3 * $sqrt(er * er + ei * ei),
            $sformatf("packet %0d, bin %0d: Z = (%f, %f), exact (%f, %f)", npkt_frame, k, zr, zi, er, ei));
      if (ref_mag > 0.0) check(mag - ref_mag < 1.0e-3 * ref_mag && ref_mag - mag < 1.0e-3 * ref_mag, $sformatf("|Z| %f against %f", mag, ref_mag));
      if (n == 0) begin
        if (mag < zmin) zmin = mag;
        if (mag > zmax) zmax = mag;
        zsum += mag;
      end
    end
    repeat (PKT) void'(chip.to_host.pop_front());
    npkt++; npkt_frame++;
  endtask
  always @(posedge clk) if (chip.to_host.size() >= PKT) parse_packet();

  task automatic run_frame(string name, int wave, logic [31:0] ftw, bit nr, int expect_n,
                           int kfirst, int klast, int settle);
    longint t0 = $time;
    bins_chk = {};
    for (int k = kfirst; k <= klast; k++) bins_chk.push_back(k);
    npkt_frame = 0; zmin = 1.0e30; zmax = 0.0; zsum = 0.0;
    cmd(2, ftw); cmd(1, 32'(wave)); cmd(8, 32'(settle));
    cmd(0, {30'd0, nr, 1'b1});            // run
    cmd(0, {30'd0, nr, 1'b0});            // stop after this frame
    do @(posedge clk); while (!frame_done);
    wait (npkt_frame == expect_n);
    repeat (100) @(posedge clk);
    check(npkt_frame == expect_n && chip.to_host.size() == 0, $sformatf("%s: %0d packets", name, npkt_frame));
    $display("%s: %0d channels in %0d clocks, |Z| at bin %0d from %f to %f ohm (spread %e)", name, npkt_frame,
             ($time - t0) / 20, kfirst, zmin, zmax, (zmax - zmin) / (zsum / npkt_frame));
  endtask

  initial begin
    real zr, zi;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    repeat (10) @(posedge clk);
    cmd(9, 32'h11);                       // adjacent pairs

    // A: resistor, 48.8 kHz sine, 208 channels, channel spread
    set_load(46.57, 0.0, 0.0);
    ref_mag = 46.57;
    run_frame("A resistor 48.8 kHz", 0, 32'h0040_0000, 0, 208, 2, 2, 200);
    check((zmax - zmin) / (zsum / npkt_frame) < 4.0e-4, "channel spread within +/-0.2 permille");

    // B: RC phantom, chirp, 208 channels, bins 1..15
    set_load(19.9, 19.86, 99.7e-12);
    ref_mag = 0.0;
    for (int k = 1; k <= 15; k++) begin
      z_exact(k, zr, zi);
      if (k == 1 || k == 15) $display("phantom at %f kHz: |Z| %f ohm, phase %f deg", k * FS / N / 1000.0,
                                      $sqrt(zr * zr + zi * zi), $atan2(zi, zr) * 180.0 / PI);
    end
    run_frame("B phantom chirp", 2, 32'd1_030_792, 0, 208, 1, 15, 2048);

    // C: resistor at the other sine frequencies
    set_load(46.5, 0.0, 0.0);
    ref_mag = 46.5;
    run_frame("C resistor 97.7 kHz", 0, 32'h0080_0000, 1, 104, 4, 4, 2048);
    run_frame("C resistor 195.3 kHz", 0, 32'h0100_0000, 1, 104, 8, 8, 200);
    run_frame("C resistor 390.6 kHz", 0, 32'h0200_0000, 1, 104, 16, 16, 200);

    $display("packets %0d, largest deviation from the exact load %e (sampled model alone %e)", npkt, worst_exact, worst_cut);
    check(worst_cut < 1.0e-5, "sampled model close to the exact load");
    check(chip.errors == 0, "USB protocol");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
