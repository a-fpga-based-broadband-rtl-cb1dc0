// dds: direct digital synthesis of the excitation signal.
//
// A 32-bit phase accumulator advances by a tuning word every 50 MHz clock;
// its top LUT_AW bits address a full-wave sine table (computed at
// elaboration, peak 32767). Three waveforms are selected by `wave`:
//   sine        - table output;
//   rectangular - +/-32767 from the phase MSB (same frequency as the sine);
//   chirp       - the tuning word starts at `ftw` and grows by `chirp_step`
//                 (16 fraction bits) each clock; after `chirp_len` clocks the
//                 tuning word and the phase restart, so the chirp repeats with
//                 a period of chirp_len clocks.
// The result is scaled by `amplitude` (65535 = full scale) and registered.
// Latency: the accumulator value of cycle t reaches `sample` at cycle t+2.
// The 50 MHz DDS, the 16-bit output and the sine/rectangle/chirp choice are
// from the published system (its chirp: 12 kHz to 378.625 kHz in 40.96 us,
// i.e. chirp_len = 2048). Accumulator width, table size, the linear chirp and
// the digital amplitude multiplier are this design's choices.
module dds
  import eit_pkg::*;
#(
  parameter int unsigned PHASE_W      = 32,
  parameter int unsigned LUT_AW       = 12,
  parameter int unsigned OUT_W        = 16,
  parameter int unsigned CHIRP_FRAC_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  wave_t                   wave,
  input  logic [PHASE_W-1:0]      ftw,
  input  logic [31:0]             chirp_step,
  input  logic [15:0]             chirp_len,
  input  logic [15:0]             amplitude,
  output logic signed [OUT_W-1:0] sample
);

  localparam int unsigned LUT_N = 1 << LUT_AW;
  localparam int          PEAK  = (1 << (OUT_W - 1)) - 1;
  localparam int unsigned FW    = PHASE_W + CHIRP_FRAC_W;

  typedef logic signed [OUT_W-1:0] lut_t [LUT_N];

  function automatic lut_t make_lut();
    lut_t t;
    for (int k = 0; k < int'(LUT_N); k++) t[k] = OUT_W'(sin_q(k, int'(LUT_N), real'(PEAK)));
    return t;
  endfunction

  localparam lut_t SINE = make_lut();

  logic [PHASE_W-1:0] phase;
  logic [FW-1:0]      ftw_fx;     // tuning word with chirp fraction bits
  logic [15:0]        chirp_cnt;
  logic [PHASE_W-1:0] step;

  assign step = (wave == WAVE_CHIRP) ? ftw_fx[FW-1:CHIRP_FRAC_W] : ftw;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= '0;
      ftw_fx    <= '0;
      chirp_cnt <= '0;
    end else if (wave == WAVE_CHIRP) begin
      if (chirp_cnt >= chirp_len - 16'd1) begin
        chirp_cnt <= '0;
        phase     <= '0;
        ftw_fx    <= {ftw, {CHIRP_FRAC_W{1'b0}}};
      end else begin
        chirp_cnt <= chirp_cnt + 16'd1;
        phase     <= phase + step;
        ftw_fx    <= ftw_fx + FW'(chirp_step);
      end
    end else begin
      chirp_cnt <= '0;
      phase     <= phase + step;
      ftw_fx    <= {ftw, {CHIRP_FRAC_W{1'b0}}};
    end
  end

  // Stage 1: table or rectangle.
  logic signed [OUT_W-1:0] raw;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) raw <= '0;
    else if (wave == WAVE_RECT) raw <= phase[PHASE_W-1] ? OUT_W'(-PEAK) : OUT_W'(PEAK);
    else raw <= SINE[phase[PHASE_W-1 -: LUT_AW]];
  end

  // Stage 2: amplitude scaling.
  logic signed [OUT_W+16:0] prod;
  assign prod = raw * $signed({1'b0, amplitude});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sample <= '0;
    else        sample <= OUT_W'(prod >>> 16);
  end

endmodule
