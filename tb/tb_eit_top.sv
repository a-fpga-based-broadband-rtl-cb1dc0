// tb_eit_top: end-to-end test of the whole FPGA design at its default
// parameters (1024-point FFTs, 512 bins per spectrum, 4096-byte USB FIFO).
//
// Analog model: the DAC code x drives the "current"; the current channel of
// the ADC sees x/8 and the voltage channel sees R * x/8 delayed by D = 4 ADC
// samples, where R = (4 + sum of the four multiplexer selects) / 16 depends
// on the electrodes currently switched in. Every transferred pair of
// spectra must therefore give V[k]/I[k] = R * exp(-j*2*pi*k*D/(1024*2^dec))
// at the excited bins, with R computed from the electrode numbers in the
// packet header. The FT2232H model stands for the USB chip, and the host
// side here writes the configuration with binary commands and parses the
// packets.
// Three frames are measured:
//   1. sine at bin 2, adjacent protocol, 208 measurements;
//   2. rectangular wave, 2 records averaged, reciprocals omitted: 104;
//   3. chirp (12 kHz .. 378.6 kHz over 40.96 us), decimation by 2, voltage
//      pairs 7 electrodes apart: 192 measurements.
// In frame 2 the USB chip model is busy 60 % of the time (a slow host).
// Checked per packet: sync word, order and electrode numbers against a list
// built here, frame number, flags, bin count, and the impedance ratio at
// the excited bins (0.1 % of R), and the rate of frame 1 (at least 3400
// spectrum pairs per second). Counted mechanisms (each must occur):
// multiplexer switching with settling, averaging, decimation, the three
// waveforms, omitted reciprocals, averager stalled by busy FFTs, sequencer
// waiting for the acquisition path, packetizer stalled by a full USB FIFO,
// USB chip not ready, host commands.
module tb_eit_top;
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

  // ---------------- analog front end + ADC model ----------------
  localparam int D = 4;
  real hist[$];
  function automatic real ratio_of(int io, int ie, int vo, int ve);
    return real'(4 + io + ie + vo + ve) / 16.0;
  endfunction
  always @(posedge adc_clk) begin
    real x, r;
    x = real'($signed(dac_data ^ 16'h8000)) / 8.0;
    hist.push_back(x);
    if (hist.size() > D + 1) void'(hist.pop_front());
    r = ratio_of(int'(mux_i_odd), int'(mux_i_even), int'(mux_v_odd), int'(mux_v_even));
    adc_b <= 14'(int'($floor(x + 0.5)));
    adc_a <= 14'(int'($floor(r * hist[0] + 0.5)));
  end

  // ---------------- host side ----------------
  task automatic cmd(int a, logic [31:0] v);
    chip.host_send(8'h80 | 8'(a));
    for (int b = 3; b >= 0; b--) chip.host_send(v[8*b +: 8]);
  endtask

  // expected measurement list of the running frame
  int ec[$], ev[$];
  int is_, vs_, dec_, wave_, avg_;
  int bins_chk[$];
  function automatic bit in_pair(int e, int a, int b); return e == a || e == b; endfunction
  task automatic build_list(int is, int vs, bit nr);
    ec = {}; ev = {};
    for (int c = 0; c < 16; c++)
      for (int v = 0; v < 16; v++) begin
        automatic int c2 = (c + is) % 16, v2 = (v + vs) % 16;
        if (!in_pair(v, c, c2) && !in_pair(v2, c, c2) && (!nr || v > c)) begin ec.push_back(c); ev.push_back(v); end
      end
  endtask

  int npkt = 0, npkt_frame = 0, last_frame = -1;
  real worst = 0.0;
  localparam int PKT = 10 + 2 * 512 * 8;
  function automatic longint get32(int off);
    return longint'($signed({chip.to_host[off], chip.to_host[off+1], chip.to_host[off+2], chip.to_host[off+3]}));
  endfunction
  task automatic parse_packet();
    int c, v, fr, c2, v2, io, ie, vo, ve;
    real r;
    check(chip.to_host[0] == 8'hA5 && chip.to_host[1] == 8'h5A, "sync word");
    fr = int'({chip.to_host[2], chip.to_host[3]});
    c = int'(chip.to_host[4]); v = int'(chip.to_host[5]);
    check(npkt_frame < ec.size() && c == ec[npkt_frame] && v == ev[npkt_frame],
          $sformatf("packet %0d: electrodes %0d/%0d", npkt_frame, c, v));
    if (npkt_frame == 0) last_frame = fr;
    check(fr == last_frame, "frame number");
    check(chip.to_host[6][3:2] == 2'(wave_), "wave flag");
    check(chip.to_host[7] == {1'b0, 3'(avg_), 2'b0, 2'(dec_)}, "avg/dec byte");
    check({chip.to_host[8], chip.to_host[9]} == 16'd512, "bin count");
    c2 = (c + is_) % 16; v2 = (v + vs_) % 16;
    io = (c % 2 == 0) ? c / 2 : c2 / 2;  ie = (c % 2 == 1) ? c / 2 : c2 / 2;
    vo = (v % 2 == 0) ? v / 2 : v2 / 2;  ve = (v % 2 == 1) ? v / 2 : v2 / 2;
    check(int'(chip.to_host[6][0]) == (c % 2) && int'(chip.to_host[6][1]) == (v % 2), "polarity flags");
    r = ratio_of(io, ie, vo, ve);
    foreach (bins_chk[n]) begin
      int k = bins_chk[n];
      real vr, vi, ir, ii, den, qr, qi, ph, er, ei, err;
      vr = real'(get32(10 + 8 * k));        vi = real'(get32(14 + 8 * k));
      ir = real'(get32(10 + 4096 + 8 * k)); ii = real'(get32(14 + 4096 + 8 * k));
      den = ir * ir + ii * ii;
      qr = (vr * ir + vi * ii) / den; qi = (vi * ir - vr * ii) / den;
      ph = -2.0 * PI * k * D / (1024.0 * (1 << dec_));
      er = qr - r * $cos(ph); ei = qi - r * $sin(ph);
      err = $sqrt(er * er + ei * ei) / r;
      if (err > worst) worst = err;
      check(den > 1.0e8 && err < 1.0e-3,
            $sformatf("bin %0d ratio %f,%f expected %f,%f (c=%0d v=%0d)", k, qr, qi, r * $cos(ph), r * $sin(ph), c, v));
    end
    repeat (PKT) void'(chip.to_host.pop_front());
    npkt++; npkt_frame++;
  endtask
  always @(posedge clk) if (chip.to_host.size() >= PKT) parse_packet();

  // ---------------- mechanism counters ----------------
  int n_settle_ok = 0, n_avg_stall = 0, n_seq_wait = 0, n_pkt_stall = 0, n_usb_busy = 0;
  int n_sine = 0, n_rect = 0, n_chirp = 0, n_avg = 0, n_dec = 0, n_norecip = 0, n_vskip = 0, n_cmd = 0;
  longint t_switch;
  logic [11:0] last_sel;
  always @(posedge clk) if (rst_n) begin
    if ({mux_i_odd, mux_i_even, mux_v_odd, mux_v_even} != last_sel) begin
      last_sel <= {mux_i_odd, mux_i_even, mux_v_odd, mux_v_even};
      t_switch <= $time;
    end
    if (dut.acq_start) begin
      check(($time - t_switch) / 20 >= longint'(dut.cfg.settle_cycles), "settling time");
      n_settle_ok++;
      unique case (dut.cfg.wave) WAVE_SINE: n_sine++; WAVE_RECT: n_rect++; default: n_chirp++; endcase
      if (dut.cfg.avg_log2 != 0) n_avg++;
      if (dut.cfg.dec_log2 != 0) n_dec++;
      if (dut.cfg.no_recip) n_norecip++;
      if (dut.cfg.v_skip != dut.cfg.i_skip) n_vskip++;
    end
    if (dut.avg_valid && !dut.avg_ready) n_avg_stall++;
    if (dut.u_seq.state == dut.u_seq.S_WAIT_IDLE && !dut.acq_idle) n_seq_wait++;
    if (dut.pk_valid && !dut.pk_ready) n_pkt_stall++;
    if (dut.tx_valid && usb_txe_n) n_usb_busy++;
    if (dut.cfg_write) n_cmd++;
  end

  task automatic run_frame(int wave, logic [31:0] ftw, int avg, int dec, bit nr, int is, int vs, int expect_n,
                          int kfirst, int kstep, int klast, int settle, int busy);
    wave_ = wave; avg_ = avg; dec_ = dec; is_ = is; vs_ = vs;
    bins_chk = {};
    for (int k = kfirst; k <= klast; k += kstep) bins_chk.push_back(k);
    build_list(is, vs, nr);
    check(ec.size() == expect_n, "reference list size");
    npkt_frame = 0;
    chip.busy_pct = busy;
    cmd(2, ftw); cmd(1, 32'(wave)); cmd(7, 32'((dec << 4) | avg)); cmd(9, 32'((vs << 4) | is));
    cmd(8, 32'(settle));
    cmd(0, {30'd0, nr, 1'b1});            // run
    cmd(0, {30'd0, nr, 1'b0});            // stop after this frame
    do @(posedge clk); while (!frame_done);
    wait (npkt_frame == expect_n);
    repeat (100) @(posedge clk);
    check(npkt_frame == expect_n && chip.to_host.size() == 0, $sformatf("frame: %0d packets", npkt_frame));
  endtask

  initial begin
    longint t0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    repeat (10) @(posedge clk);
    t0 = $time;
    run_frame(0, 32'h0040_0000, 0, 0, 0, 1, 1, 208, 2, 1, 2, 200, 10);
    $display("frame 1 (sine): %0d clocks, %0d impedance spectra per second", ($time - t0) / 20,
             longint'(208) * 50_000_000 / (($time - t0) / 20));
    // throughput with a 200-clock settling time and a USB chip ready 90 % of
    // the time: at least 3400 spectrum pairs per second
    check(longint'(208) * 50_000_000 / (($time - t0) / 20) >= 3400, "spectra per second");
    // a slow host: the USB chip is busy 60 % of the time
    run_frame(1, 32'h0040_0000, 1, 0, 1, 1, 1, 104, 2, 1, 2, 200, 60);
    // the first chirp period after the waveform switch is not a full one:
    // settle for one chirp period (2048 clocks)
    run_frame(2, 32'd1_030_792, 0, 1, 0, 1, 7, 192, 2, 2, 28, 2048, 10);
    $display("packets %0d, worst relative ratio error %e", npkt, worst);
    $display("switch+settle %0d, sine %0d, rect %0d, chirp %0d, averaged %0d, decimated %0d, no-reciprocal %0d, wide voltage pairs %0d",
             n_settle_ok, n_sine, n_rect, n_chirp, n_avg, n_dec, n_norecip, n_vskip);
    $display("averager stalled %0d, sequencer waited %0d, packetizer stalled %0d, USB chip busy %0d, commands %0d",
             n_avg_stall, n_seq_wait, n_pkt_stall, n_usb_busy, n_cmd);
    check(n_settle_ok > 0 && n_sine > 0 && n_rect > 0 && n_chirp > 0 && n_avg > 0 && n_dec > 0 && n_norecip > 0 && n_vskip > 0, "every mode used");
    check(n_avg_stall > 0 && n_seq_wait > 0 && n_pkt_stall > 0 && n_usb_busy > 0 && n_cmd == 3 * 7, "every stall and the commands seen");
    check(chip.errors == 0, "USB protocol");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
