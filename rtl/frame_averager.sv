// frame_averager: optional coherent averaging of whole records before the FFT.
//
// After `start`, 2^avg_log2 consecutive records of N samples of both
// channels are added point by point into an accumulator memory (the first
// record overwrites, the others add). The excitation repeats with the record
// length, so this averages out noise that is not locked to it. When the last
// record is complete `captured` pulses (the input may change channel from
// then on) and the mean, sum >>> avg_log2, is streamed out in sample order
// on a valid/ready interface, one sample of each channel per beat, with
// out_last on the N-th. `idle` is high when a new `start` is accepted.
// avg_log2 = 0 simply buffers one record. Timing: accumulation follows the
// input rate; output takes N beats if out_ready stays high. Averaging ahead
// of the two FFTs is the published system's; that it is coherent and uses a
// power-of-two count up to 2^MAX_AVG_LOG2 is this design's choice.
module frame_averager #(
  parameter int unsigned N            = 1024,
  parameter int unsigned W            = 14,
  parameter int unsigned MAX_AVG_LOG2 = 7
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [2:0]          avg_log2,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_v,
  input  logic signed [W-1:0] in_i,
  output logic                out_valid,
  input  logic                out_ready,
  output logic signed [W-1:0] out_v,
  output logic signed [W-1:0] out_i,
  output logic                out_last,
  output logic                captured,
  output logic                idle
);

  localparam int unsigned AW = $clog2(N);
  localparam int unsigned SW = W + MAX_AVG_LOG2;

  typedef enum logic [1:0] {S_IDLE, S_ACCUM, S_OUT} state_t;
  state_t state;

  logic signed [SW-1:0] acc_v [N];
  logic signed [SW-1:0] acc_i [N];
  logic [AW-1:0]           idx;
  logic [MAX_AVG_LOG2-1:0] rec;
  logic [2:0]              navg;   // avg_log2 latched at start
  logic [2:0]              avg_lim;

  // Requests above MAX_AVG_LOG2 are clamped; with the default of 7 every
  // 3-bit request is in range and no comparison is needed.
  if (MAX_AVG_LOG2 >= 7) begin : g_no_clamp
    assign avg_lim = avg_log2;
  end else begin : g_clamp
    assign avg_lim = (avg_log2 > 3'(MAX_AVG_LOG2)) ? 3'(MAX_AVG_LOG2) : avg_log2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      idx      <= '0;
      rec      <= '0;
      navg     <= '0;
      captured <= 1'b0;
    end else begin
      captured <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_ACCUM;
          idx   <= '0;
          rec   <= '0;
          navg  <= avg_lim;
        end
        S_ACCUM: if (in_valid) begin
          idx <= idx + AW'(1);
          if (idx == AW'(N - 1)) begin
            rec <= rec + MAX_AVG_LOG2'(1);
            if (rec == MAX_AVG_LOG2'((1 << navg) - 1)) begin
              state    <= S_OUT;
              captured <= 1'b1;
            end
          end
        end
        S_OUT: if (out_ready) begin
          idx <= idx + AW'(1);
          if (idx == AW'(N - 1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Accumulator memory: one read-modify-write per input sample.
  always_ff @(posedge clk) begin
    if (state == S_ACCUM && in_valid) begin
      acc_v[idx] <= (rec == '0) ? SW'(in_v) : acc_v[idx] + SW'(in_v);
      acc_i[idx] <= (rec == '0) ? SW'(in_i) : acc_i[idx] + SW'(in_i);
    end
  end

  logic signed [SW-1:0] mean_v, mean_i;
  assign mean_v    = acc_v[idx] >>> navg;
  assign mean_i    = acc_i[idx] >>> navg;
  assign out_v     = W'(mean_v);
  assign out_i     = W'(mean_i);
  assign out_valid = (state == S_OUT);
  assign out_last  = (state == S_OUT) && (idx == AW'(N - 1));
  assign idle      = (state == S_IDLE);

endmodule
