// cmd_decoder: host command parser and configuration registers.
//
// The host configures the system with binary commands over USB. A command
// is five bytes: 0x80 | address, then a 32-bit value, most significant byte
// first. Bytes with bit 7 clear are ignored while no command is open, so the
// parser resynchronises on the next address byte. Registers (unused high
// bits ignored):
//   0 CTRL      [0] run, [1] omit reciprocal measurements, [2] ADC offset binary
//   1 WAVE      [1:0] 0 sine, 1 rectangular, 2 chirp
//   2 FTW       DDS tuning word, f = FTW * 50 MHz / 2^32 (chirp start)
//   3 CHIRP     chirp tuning-word increment per clock, 16 fraction bits
//   4 CHIRP_LEN [15:0] chirp period in clocks
//   5 AMPL      [15:0] DDS amplitude, 65535 = full scale
//   6 PGA       [1:0] excitation, [3:2] voltage, [5:4] current gain code (G = 2^code)
//   7 AVG       [2:0] log2 of records averaged, [5:4] log2 of decimation factor
//   8 SETTLE    [23:0] clocks to wait after each multiplexer switch
//   9 PATTERN   [3:0] current-pair spacing, [7:4] voltage-pair spacing
// One byte is accepted every clock in which rx_valid is high (there is no
// back-pressure). A register takes its new value in the clock after the
// last data byte.
// Reset values give a 48.83 kHz sine (FFT bin 2), the published chirp
// (12 kHz to 378.6 kHz over 2048 clocks = 40.96 us) once selected, full
// amplitude, gain 1, no averaging or decimation, 1 ms settling, adjacent
// pairs, stopped. That the waveform, PGA gains and measurement parameters
// are set from the host follows the published system; the command format
// and register map are this design's own (the published firmware also uses
// an 8-bit soft processor whose role is not described).
module cmd_decoder
  import eit_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     rx_valid,
  input  logic [7:0] rx_data,
  output eit_cfg_t cfg,
  output logic     cfg_write     // pulses when a register is written
);

  localparam logic [31:0] FTW_48K8        = 32'h0040_0000;
  localparam logic [31:0] CHIRP_STEP_DEF  = 32'd1_007_771_126;

  logic [3:0]  addr;
  logic [2:0]  nbytes;     // data bytes still expected, 0 = no command open
  logic [31:0] shreg;
  logic [31:0] value;

  assign value    = {shreg[23:0], rx_data};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr      <= '0;
      nbytes    <= '0;
      shreg     <= '0;
      cfg_write <= 1'b0;
      cfg       <= '{run: 1'b0, no_recip: 1'b0, adc_offset_bin: 1'b0, wave: WAVE_SINE,
                     ftw: FTW_48K8, chirp_step: CHIRP_STEP_DEF, chirp_len: 16'd2048,
                     amplitude: 16'hFFFF, pga_exc: 2'd0, pga_v: 2'd0, pga_i: 2'd0,
                     avg_log2: 3'd0, dec_log2: 2'd0, settle_cycles: 24'd50_000,
                     i_skip: 4'd1, v_skip: 4'd1};
    end else begin
      cfg_write <= 1'b0;
      if (rx_valid) begin
        if (nbytes == '0) begin
          if (rx_data[7]) begin
            addr   <= rx_data[3:0];
            nbytes <= 3'd4;
          end
        end else begin
          shreg  <= value;
          nbytes <= nbytes - 3'd1;
          if (nbytes == 3'd1) begin
            cfg_write <= 1'b1;
            unique case (addr)
              4'd0: begin
                cfg.run            <= value[0];
                cfg.no_recip       <= value[1];
                cfg.adc_offset_bin <= value[2];
              end
              4'd1: cfg.wave <= (value[1:0] == 2'd3) ? WAVE_SINE : wave_t'(value[1:0]);
              4'd2: cfg.ftw        <= value;
              4'd3: cfg.chirp_step <= value;
              4'd4: cfg.chirp_len  <= value[15:0];
              4'd5: cfg.amplitude  <= value[15:0];
              4'd6: begin
                cfg.pga_exc <= value[1:0];
                cfg.pga_v   <= value[3:2];
                cfg.pga_i   <= value[5:4];
              end
              4'd7: begin
                cfg.avg_log2 <= value[2:0];
                cfg.dec_log2 <= value[5:4];
              end
              4'd8: cfg.settle_cycles <= value[23:0];
              4'd9: begin
                cfg.i_skip <= value[3:0];
                cfg.v_skip <= value[7:4];
              end
              default: ;
            endcase
          end
        end
      end
    end
  end

endmodule
