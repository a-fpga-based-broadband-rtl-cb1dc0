// decimator: down-sampling of the voltage and current sample streams.
//
// Each channel sums 2^dec_log2 consecutive input samples and emits their
// mean (sum arithmetically shifted right, i.e. rounded toward minus
// infinity): a boxcar filter followed by down-sampling, which is a
// first-order CIC decimator. dec_log2 = 0 passes samples through with one
// clock of latency. `restart` clears a partly filled sum so that the next
// output covers the next 2^dec_log2 inputs; it is pulsed at the start of an
// acquisition. Output: one out_valid pulse, one clock after the input that
// completes a group. That the digitised signals are decimated is from the
// published system; the filter type and the factor range (1, 2, 4, 8) are
// this design's choices. At the default factor 1, a 1024-sample record spans
// 40.96 us, the published chirp period.
module decimator #(
  parameter int unsigned W        = 14,
  parameter int unsigned MAX_LOG2 = 3
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [1:0]          dec_log2,
  input  logic                restart,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_v,
  input  logic signed [W-1:0] in_i,
  output logic                out_valid,
  output logic signed [W-1:0] out_v,
  output logic signed [W-1:0] out_i
);

  localparam int unsigned SW = W + MAX_LOG2;

  logic [MAX_LOG2-1:0]   cnt;
  logic signed [SW-1:0]  sum_v, sum_i;
  logic signed [SW-1:0]  nsum_v, nsum_i;
  logic                  last;

  assign nsum_v = sum_v + SW'(in_v);
  assign nsum_i = sum_i + SW'(in_i);
  assign last   = (cnt == MAX_LOG2'((1 << dec_log2) - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      sum_v     <= '0;
      sum_i     <= '0;
      out_valid <= 1'b0;
      out_v     <= '0;
      out_i     <= '0;
    end else begin
      out_valid <= 1'b0;
      if (restart) begin
        cnt   <= '0;
        sum_v <= '0;
        sum_i <= '0;
      end else if (in_valid) begin
        if (last) begin
          cnt       <= '0;
          sum_v     <= '0;
          sum_i     <= '0;
          out_valid <= 1'b1;
          out_v     <= W'(nsum_v >>> dec_log2);
          out_i     <= W'(nsum_i >>> dec_log2);
        end else begin
          cnt   <= cnt + MAX_LOG2'(1);
          sum_v <= nsum_v;
          sum_i <= nsum_i;
        end
      end
    end
  end

endmodule
