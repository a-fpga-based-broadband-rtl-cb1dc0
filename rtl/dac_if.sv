// dac_if: output register for the 16-bit current-excitation DAC (LTC1668).
//
// The DDS produces two's complement samples; the DAC takes straight binary,
// so the sign bit is inverted (0x8000 = mid scale). The code is registered
// on the rising system clock edge and the DAC latch clock is the inverted
// system clock, so the DAC latches half a cycle later, in the middle of the
// stable data window. Latency: one clock. Running the DAC on the same 50 MHz
// clock as the DDS follows the published system; the data format (from the
// converter's data sheet) and the clock phase are this design's choices.
module dac_if #(
  parameter int unsigned W = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [W-1:0] sample,
  output logic        [W-1:0] dac_data,
  output logic                dac_clk
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dac_data <= {1'b1, {(W-1){1'b0}}};   // mid scale
    else        dac_data <= {~sample[W-1], sample[W-2:0]};
  end

  assign dac_clk = ~clk;

endmodule
