// tb_meas_sequencer: runs frames with the adjacent protocol (208
// measurements), without reciprocals (104) and with a voltage spacing of 7
// electrodes, against a list of electrode pairs built here by brute force.
// A small model of the acquisition path answers each acq_start after a
// random delay. For every measurement it checks the order, the electrodes
// selected on the four multiplexers, the polarity flags, that at least
// settle_cycles clocks pass between a switch and the start, and that
// frame_done comes once per frame with a rising frame number.
module tb_meas_sequencer;
  import eit_pkg::*;
  logic clk = 0, rst_n = 0;
  logic run, no_recip, mux_en, acq_idle, acq_start, acq_captured, frame_done;
  logic [3:0] i_skip, v_skip;
  logic [23:0] settle_cycles;
  logic [2:0] mux_i_odd, mux_i_even, mux_v_odd, mux_v_even;
  chan_t chan;
  int checks = 0, failures = 0;
  meas_sequencer dut (.*);
  always #10 clk = ~clk;
  initial begin
    #100_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  // acquisition model
  int busy_cnt;
  always @(posedge clk) begin
    acq_captured <= 0;
    if (!rst_n) begin busy_cnt <= 0; acq_idle <= 1; end
    else if (acq_start) begin busy_cnt <= 5 + int'($urandom_range(0, 20)); acq_idle <= 0; end
    else if (busy_cnt > 1) busy_cnt <= busy_cnt - 1;
    else if (busy_cnt == 1) begin busy_cnt <= 0; acq_captured <= 1; acq_idle <= ($urandom_range(0, 1) == 1); end
    else if (!acq_idle && $urandom_range(0, 3) == 0) acq_idle <= 1;
  end
  // watch multiplexer changes
  longint t_switch;
  logic [11:0] last_sel;
  always @(posedge clk) if ({mux_i_odd, mux_i_even, mux_v_odd, mux_v_even} != last_sel) begin
    last_sel <= {mux_i_odd, mux_i_even, mux_v_odd, mux_v_even};
    t_switch <= $time;
  end
  int ec[$], ev[$];
  function automatic bit in_pair(int e, int a, int b); return e == a || e == b; endfunction
  task automatic frame_test(int is, int vs, bit nr, int settle, int expect_n);
    int n = 0, nf = 0, f0;
    ec = {}; ev = {};
    for (int c = 0; c < 16; c++)
      for (int v = 0; v < 16; v++) begin
        int c2 = (c + is) % 16, v2 = (v + vs) % 16;
        if (!in_pair(v, c, c2) && !in_pair(v2, c, c2) && (!nr || v > c)) begin ec.push_back(c); ev.push_back(v); end
      end
    check(ec.size() == expect_n, $sformatf("reference list size %0d", ec.size()));
    i_skip = 4'(is); v_skip = 4'(vs); no_recip = nr; settle_cycles = 24'(settle);
    f0 = -1;
    run = 1;
    while (nf < 2) begin
      @(posedge clk); #1;
      if (acq_start) begin
        int c, v, c2, v2, eo, ee;
        c = ec[n % ec.size()]; v = ev[n % ec.size()];
        c2 = (c + is) % 16; v2 = (v + vs) % 16;
        check(int'(chan.i_elec) == c && int'(chan.v_elec) == v, $sformatf("order n=%0d got %0d/%0d expected %0d/%0d", n, chan.i_elec, chan.v_elec, c, v));
        eo = 2 * int'(mux_i_odd); ee = 2 * int'(mux_i_even) + 1;
        check(in_pair(eo, c, c2) && in_pair(ee, c, c2) && mux_en, "current multiplexers");
        check(chan.i_pol == (ee == c), "current polarity");
        eo = 2 * int'(mux_v_odd); ee = 2 * int'(mux_v_even) + 1;
        check(in_pair(eo, v, v2) && in_pair(ee, v, v2), "voltage multiplexers");
        check(chan.v_pol == (ee == v), "voltage polarity");
        check(($time - t_switch) / 20 >= settle, $sformatf("settling %0d clocks", ($time - t_switch) / 20));
        n++;
      end
      if (frame_done) begin
        check(n == (nf + 1) * expect_n, $sformatf("frame %0d ended after %0d measurements", nf, n));
        check(f0 < 0 || int'(chan.frame) == f0 + 1, "frame number");
        f0 = int'(chan.frame);
        nf++;
      end
    end
    // clearing run lets the frame in progress finish
    run = 0;
    do begin @(posedge clk); #1; end while (!frame_done);
    repeat (20) @(posedge clk);
    check(!mux_en && dut.state == dut.S_IDLE, "stopped after the frame");
  endtask
  initial begin
    run = 0; i_skip = 1; v_skip = 1; no_recip = 0; settle_cycles = 10;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    frame_test(1, 1, 0, 10, 208);
    frame_test(1, 1, 1, 3, 104);
    frame_test(1, 7, 0, 0, 192);
    frame_test(3, 3, 0, 20, 208);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
