// eit_pkg: constants, types and table functions shared by the EIT FPGA logic.
//
// The system runs from one 50 MHz clock that also clocks the DAC; the dual
// 14-bit ADC samples at 25 MSPS, derived from the same clock. Voltage and
// current records of 1024 samples are transformed by two FFTs. These numbers
// are the published system's. The configuration register layout (eit_cfg_t),
// the channel tag (chan_t) and the waveform encoding are this design's own.
// The sine and twiddle tables are computed at elaboration by the constant
// functions below, so no table file is needed.
package eit_pkg;

  localparam int unsigned CLK_HZ  = 50_000_000;
  localparam int unsigned DAC_W   = 16;
  localparam int unsigned ADC_W   = 14;
  localparam int unsigned FFT_N   = 1024;
  localparam int unsigned N_ELEC  = 16;
  localparam int unsigned SEL_W   = 3;    // 8-to-1 multiplexers

  typedef enum logic [1:0] {
    WAVE_SINE  = 2'd0,
    WAVE_RECT  = 2'd1,
    WAVE_CHIRP = 2'd2
  } wave_t;

  // Configuration written by the host (see cmd_decoder for addresses).
  typedef struct packed {
    logic        run;            // measure frames continuously
    logic        no_recip;       // omit reciprocal measurements
    logic        adc_offset_bin; // ADC delivers offset-binary codes
    wave_t       wave;
    logic [31:0] ftw;            // DDS tuning word / chirp start word
    logic [31:0] chirp_step;     // tuning word increment per clock, 16 fraction bits
    logic [15:0] chirp_len;      // chirp period in clocks
    logic [15:0] amplitude;      // DDS amplitude, 65535 = full scale
    logic [1:0]  pga_exc;        // AD8251 gain code, G = 2^code
    logic [1:0]  pga_v;
    logic [1:0]  pga_i;
    logic [2:0]  avg_log2;       // 2^avg_log2 records are averaged
    logic [1:0]  dec_log2;       // decimation by 2^dec_log2
    logic [23:0] settle_cycles;  // wait after each multiplexer switch
    logic [3:0]  i_skip;         // electrode distance of the current pair
    logic [3:0]  v_skip;         // electrode distance of the voltage pair
  } eit_cfg_t;

  // Tag of one measurement: which electrodes were used.
  typedef struct packed {
    logic [15:0] frame;          // frame number
    logic [3:0]  i_elec;         // first electrode (0-based) of the current pair
    logic [3:0]  v_elec;         // first electrode (0-based) of the voltage pair
    logic        i_pol;          // 1: current pair runs even->odd electrode
    logic        v_pol;          // 1: voltage pair runs even->odd electrode
  } chan_t;

  localparam real PI = 3.14159265358979323846;

  // round(scale * sin(2*pi*k/n))
  function automatic int sin_q(input int k, input int n, input real scale);
    real v;
    v = scale * $sin(2.0 * PI * real'(k) / real'(n));
    return (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

  // round(scale * cos(2*pi*k/n))
  function automatic int cos_q(input int k, input int n, input real scale);
    real v;
    v = scale * $cos(2.0 * PI * real'(k) / real'(n));
    return (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

endpackage
