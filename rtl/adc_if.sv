// adc_if: receiver for the dual-channel 14-bit ADC (LTC2296).
//
// The ADC clock is made by dividing the 50 MHz system clock by CLK_DIV
// (2 -> 25 MSPS), so converter, DAC and DDS stay coherent. Channel A carries
// the voltage across the impedance, channel B the voltage across the current
// shunt. Both data buses are registered in the system clock cycle in which
// the ADC clock is driven low (the converter's outputs are stable then);
// offset-binary codes are turned into two's complement by inverting the MSB
// when `offset_binary` is set. One s_valid pulse per ADC clock period, one
// clock after the capture edge. The coherent 25 MSPS clock and the 14-bit
// dual converter follow the published system; capture phase and the format
// switch are this design's choices.
module adc_if #(
  parameter int unsigned W       = 14,
  parameter int unsigned CLK_DIV = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                offset_binary,
  output logic                adc_clk,
  input  logic [W-1:0]        adc_a,
  input  logic [W-1:0]        adc_b,
  output logic                s_valid,
  output logic signed [W-1:0] s_v,
  output logic signed [W-1:0] s_i
);

  localparam int unsigned CW = (CLK_DIV > 1) ? $clog2(CLK_DIV) : 1;
  logic [CW-1:0] div;
  logic          capture;

  // adc_clk is high for the second half of each divided period and falls
  // at the capture edge
  assign capture = (div == CW'(CLK_DIV - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div     <= '0;
      adc_clk <= 1'b0;
    end else begin
      div     <= capture ? '0 : div + CW'(1);
      adc_clk <= !capture && (div + CW'(1) >= CW'(CLK_DIV / 2));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_valid <= 1'b0;
      s_v     <= '0;
      s_i     <= '0;
    end else begin
      s_valid <= capture;
      if (capture) begin
        s_v <= {adc_a[W-1] ^ offset_binary, adc_a[W-2:0]};
        s_i <= {adc_b[W-1] ^ offset_binary, adc_b[W-2:0]};
      end
    end
  end

endmodule
