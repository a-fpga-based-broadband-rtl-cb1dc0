// eit_top: FPGA logic of a serial multi-frequency EIT system.
//
// Excitation: the DDS makes a sine, rectangular or chirp waveform at 50 MHz
// which the DAC turns into the drive of a voltage-controlled current source.
// Acquisition: a dual ADC at 25 MSPS samples the voltage across the selected
// voltage electrodes and the voltage across the current shunt; both streams
// are decimated, optionally averaged over several records, and transformed
// by two 1024-point FFTs. Each pair of spectra is sent to the host with a
// header naming the electrodes; the host divides them to obtain the
// transfer impedance over frequency. Sequencing: the measurement sequencer
// steps four 8-to-1 analog multiplexers through the 208 current/voltage
// electrode combinations of a frame, waiting for the analog chain to settle
// after each switch. Control: the host writes configuration registers with
// binary commands over the same USB FIFO link.
// Flow control: acquisition of the next channel starts only when the
// averager is idle, and the averager waits (stalls) until both FFTs can load
// a record; the FFTs hold their output until the packetizer has sent it, and
// the packetizer waits while the USB transmit FIFO is full. A tag queue
// carries each measurement's electrode numbers from the sequencer to the
// packetizer. The analog parts (multiplexers, PGAs, filters, current source,
// converters, USB chip) are outside; their control and data pins are ports.
// The block structure follows the published system; the connections,
// buffering and flow control are this design's.
module eit_top
  import eit_pkg::*;
(
  input  logic              clk,          // 50 MHz
  input  logic              rst_n,
  // DAC (LTC1668)
  output logic [DAC_W-1:0]  dac_data,
  output logic              dac_clk,
  // ADC (LTC2296): A = voltage channel, B = current (shunt) channel
  output logic              adc_clk,
  input  logic [ADC_W-1:0]  adc_a,
  input  logic [ADC_W-1:0]  adc_b,
  // analog multiplexers: odd- and even-numbered electrodes, current and voltage
  output logic [SEL_W-1:0]  mux_i_odd,
  output logic [SEL_W-1:0]  mux_i_even,
  output logic [SEL_W-1:0]  mux_v_odd,
  output logic [SEL_W-1:0]  mux_v_even,
  output logic              mux_en,
  // AD8251 gain codes (G = 2^code)
  output logic [1:0]        pga_exc,
  output logic [1:0]        pga_v,
  output logic [1:0]        pga_i,
  // FT2232H synchronous FIFO
  input  logic              usb_rxf_n,
  input  logic              usb_txe_n,
  output logic              usb_rd_n,
  output logic              usb_wr_n,
  output logic              usb_oe_n,
  input  logic [7:0]        usb_d_in,
  output logic [7:0]        usb_d_out,
  output logic              usb_d_oe,
  // status
  output logic              frame_done
);

  localparam int unsigned NOUT   = FFT_N / 2;
  localparam int unsigned FFT_DW = 32;
  localparam int unsigned TAG_W  = $bits(chan_t);

  // ---------------- control ----------------
  eit_cfg_t   cfg;
  logic       rx_valid, cfg_write;
  logic [7:0] rx_data;

  cmd_decoder u_cmd (
    .clk, .rst_n, .rx_valid, .rx_data, .cfg, .cfg_write
  );

  assign pga_exc = cfg.pga_exc;
  assign pga_v   = cfg.pga_v;
  assign pga_i   = cfg.pga_i;

  // ---------------- excitation ----------------
  logic signed [DAC_W-1:0] exc_sample;

  dds u_dds (
    .clk, .rst_n, .wave(cfg.wave), .ftw(cfg.ftw), .chirp_step(cfg.chirp_step),
    .chirp_len(cfg.chirp_len), .amplitude(cfg.amplitude), .sample(exc_sample)
  );

  dac_if #(.W(DAC_W)) u_dac (
    .clk, .rst_n, .sample(exc_sample), .dac_data, .dac_clk
  );

  // ---------------- acquisition ----------------
  logic                    s_valid, d_valid;
  logic signed [ADC_W-1:0] s_v, s_i, d_v, d_i;
  logic                    acq_start, acq_captured, acq_idle;
  chan_t                   chan;

  adc_if #(.W(ADC_W), .CLK_DIV(2)) u_adc (
    .clk, .rst_n, .offset_binary(cfg.adc_offset_bin), .adc_clk, .adc_a, .adc_b,
    .s_valid, .s_v, .s_i
  );

  decimator #(.W(ADC_W)) u_dec (
    .clk, .rst_n, .dec_log2(cfg.dec_log2), .restart(acq_start),
    .in_valid(s_valid), .in_v(s_v), .in_i(s_i),
    .out_valid(d_valid), .out_v(d_v), .out_i(d_i)
  );

  logic                    avg_valid, avg_ready, avg_last;
  logic signed [ADC_W-1:0] avg_v, avg_i;

  frame_averager #(.N(FFT_N), .W(ADC_W)) u_avg (
    .clk, .rst_n, .start(acq_start), .avg_log2(cfg.avg_log2),
    .in_valid(d_valid), .in_v(d_v), .in_i(d_i),
    .out_valid(avg_valid), .out_ready(avg_ready), .out_v(avg_v), .out_i(avg_i),
    .out_last(avg_last), .captured(acq_captured), .idle(acq_idle)
  );

  // ---------------- two FFTs, fed in lock step ----------------
  logic                     fv_in_ready, fi_in_ready;
  logic                     fv_valid, fv_ready, fv_last, fi_valid, fi_ready, fi_last;
  logic signed [FFT_DW-1:0] fv_re, fv_im, fi_re, fi_im;
  logic [$clog2(FFT_N)-1:0] fv_idx, fi_idx;

  assign avg_ready = fv_in_ready && fi_in_ready;

  fft_r2 #(.N(FFT_N), .IN_W(ADC_W), .DW(FFT_DW), .NOUT(NOUT)) u_fft_v (
    .clk, .rst_n, .in_valid(avg_valid && avg_ready), .in_ready(fv_in_ready), .in_data(avg_v),
    .out_valid(fv_valid), .out_ready(fv_ready), .out_re(fv_re), .out_im(fv_im),
    .out_idx(fv_idx), .out_last(fv_last)
  );

  fft_r2 #(.N(FFT_N), .IN_W(ADC_W), .DW(FFT_DW), .NOUT(NOUT)) u_fft_i (
    .clk, .rst_n, .in_valid(avg_valid && avg_ready), .in_ready(fi_in_ready), .in_data(avg_i),
    .out_valid(fi_valid), .out_ready(fi_ready), .out_re(fi_re), .out_im(fi_im),
    .out_idx(fi_idx), .out_last(fi_last)
  );

  // ---------------- sequencing ----------------
  meas_sequencer u_seq (
    .clk, .rst_n, .run(cfg.run), .i_skip(cfg.i_skip), .v_skip(cfg.v_skip),
    .no_recip(cfg.no_recip), .settle_cycles(cfg.settle_cycles),
    .mux_i_odd, .mux_i_even, .mux_v_odd, .mux_v_even, .mux_en,
    .acq_idle, .acq_start, .acq_captured, .chan, .frame_done
  );

  // measurement tags travel from the sequencer to the packetizer
  logic             tag_in_ready, tag_valid, tag_ready;
  logic [TAG_W-1:0] tag_bits;
  logic [2:0]       tag_level;

  sync_fifo #(.W(TAG_W), .DEPTH(4)) u_tags (
    .clk, .rst_n, .in_valid(acq_start), .in_ready(tag_in_ready), .in_data(TAG_W'(chan)),
    .out_valid(tag_valid), .out_ready(tag_ready), .out_data(tag_bits), .level(tag_level)
  );

  // ---------------- output ----------------
  logic       pk_valid, pk_ready, tx_valid, tx_ready;
  logic [7:0] pk_data, tx_data;
  logic [12:0] tx_level;

  packetizer #(.NOUT(NOUT), .DW(FFT_DW)) u_pkt (
    .clk, .rst_n, .wave(cfg.wave), .avg_log2(cfg.avg_log2), .dec_log2(cfg.dec_log2),
    .tag_valid, .tag_ready, .tag(chan_t'(tag_bits)),
    .v_valid(fv_valid), .v_ready(fv_ready), .v_re(fv_re), .v_im(fv_im), .v_last(fv_last),
    .i_valid(fi_valid), .i_ready(fi_ready), .i_re(fi_re), .i_im(fi_im), .i_last(fi_last),
    .tx_valid(pk_valid), .tx_ready(pk_ready), .tx_data(pk_data)
  );

  sync_fifo #(.W(8), .DEPTH(4096)) u_txfifo (
    .clk, .rst_n, .in_valid(pk_valid), .in_ready(pk_ready), .in_data(pk_data),
    .out_valid(tx_valid), .out_ready(tx_ready), .out_data(tx_data), .level(tx_level)
  );

  usb_fifo_if u_usb (
    .clk, .rst_n, .rxf_n(usb_rxf_n), .txe_n(usb_txe_n), .rd_n(usb_rd_n), .wr_n(usb_wr_n),
    .oe_n(usb_oe_n), .d_in(usb_d_in), .d_out(usb_d_out), .d_oe(usb_d_oe),
    .rx_valid, .rx_data, .tx_valid, .tx_ready, .tx_data
  );

  // The tag queue never overflows: a new measurement starts only after the
  // previous record has left the averager, and at most one record waits in
  // each FFT.
  a_tag_room: assert property (@(posedge clk) disable iff (!rst_n) acq_start |-> tag_in_ready);
  // Both FFTs load the same record together; the voltage spectrum is sent
  // first, so its FFT is free to load whenever the current FFT is.
  a_fft_lockstep: assert property (@(posedge clk) disable iff (!rst_n) fi_in_ready |-> fv_in_ready);

endmodule
