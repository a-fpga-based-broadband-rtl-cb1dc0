// fft_r2: N-point FFT (default 1024) of a real sample record.
//
// Samples arrive on a valid/ready stream in time order and are written to
// an in-place memory at bit-reversed addresses (N clocks at full rate). Then
// log2(N) radix-2 decimation-in-time stages run with one butterfly per clock,
//   X[i] = A + W*B,  X[j] = A - W*B,  W = exp(-2*pi*i*k/N),
// i.e. N/2*log2(N) clocks (5120 for N = 1024). Finally bins 0..NOUT-1 are
// streamed out in natural order with their index, out_last on the last one;
// for a real input the other bins are the complex conjugates. No scaling is
// applied: DW = 32 bits hold a 14-bit input plus the log2(N) = 10 bits of
// growth. Twiddles have TW_W = 18 bits with TW_W-2 fraction bits (computed
// at elaboration) and each product is rounded to nearest. The record length
// and the use of two such transforms (voltage and current) follow the
// published system; the architecture, word widths and output range are this
// design's choices. in_ready is high only while a record is being loaded.
module fft_r2
  import eit_pkg::*;
#(
  parameter int unsigned N     = 1024,
  parameter int unsigned IN_W  = 14,
  parameter int unsigned DW    = 32,
  parameter int unsigned TW_W  = 18,
  parameter int unsigned NOUT  = N / 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [IN_W-1:0]   in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic signed [DW-1:0]     out_re,
  output logic signed [DW-1:0]     out_im,
  output logic [$clog2(N)-1:0]     out_idx,
  output logic                     out_last
);

  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned TF   = TW_W - 2;          // twiddle fraction bits
  localparam int unsigned PW   = DW + TW_W;         // product width

  typedef logic signed [TW_W-1:0] tw_t [N/2];

  function automatic tw_t make_cos();
    tw_t t;
    for (int k = 0; k < int'(N / 2); k++) t[k] = TW_W'(cos_q(k, int'(N), real'(1 << TF)));
    return t;
  endfunction
  function automatic tw_t make_sin();
    tw_t t;
    for (int k = 0; k < int'(N / 2); k++) t[k] = TW_W'(sin_q(k, int'(N), real'(1 << TF)));
    return t;
  endfunction

  localparam tw_t TW_COS = make_cos();
  localparam tw_t TW_SIN = make_sin();

  function automatic logic [LOGN-1:0] bitrev(input logic [LOGN-1:0] a);
    for (int b = 0; b < int'(LOGN); b++) bitrev[b] = a[LOGN-1-b];
  endfunction

  typedef enum logic [1:0] {S_LOAD, S_CALC, S_OUT} state_t;
  state_t state;

  logic signed [DW-1:0] mem_re [N];
  logic signed [DW-1:0] mem_im [N];

  logic [LOGN-1:0]         cnt;     // load / output index
  logic [$clog2(LOGN)-1:0] stage;
  logic [LOGN-2:0]         bf;      // butterfly within the stage

  // Butterfly addressing for the current stage (span h = 2^stage).
  logic [LOGN-1:0] ia, ib, pos, grp;
  logic [LOGN-2:0] tk;
  always_comb begin
    pos = LOGN'(bf) & ((LOGN'(1) << stage) - LOGN'(1));
    grp = LOGN'(bf) >> stage;
    ia  = (grp << (stage + 1)) | pos;
    ib  = ia | (LOGN'(1) << stage);
    tk  = (LOGN-1)'(pos << (LOGN - 1 - int'(stage)));
  end

  logic signed [DW-1:0] ar, ai, br, bi;
  logic signed [TW_W-1:0] wc, ws;
  logic signed [PW:0]   tr_full, ti_full;
  logic signed [DW-1:0] tr, ti;
  always_comb begin
    ar = mem_re[ia];
    ai = mem_im[ia];
    br = mem_re[ib];
    bi = mem_im[ib];
    wc = TW_COS[tk];
    ws = TW_SIN[tk];
    // (br + j bi)(wc - j ws)
    tr_full = (PW+1)'(br * wc) + (PW+1)'(bi * ws) + (PW+1)'(1 << (TF - 1));
    ti_full = (PW+1)'(bi * wc) - (PW+1)'(br * ws) + (PW+1)'(1 << (TF - 1));
    tr = DW'(tr_full >>> TF);
    ti = DW'(ti_full >>> TF);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      cnt   <= '0;
      stage <= '0;
      bf    <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          cnt <= cnt + LOGN'(1);
          if (cnt == LOGN'(N - 1)) begin
            state <= S_CALC;
            stage <= '0;
            bf    <= '0;
          end
        end
        S_CALC: begin
          bf <= bf + (LOGN-1)'(1);
          if (bf == (LOGN-1)'(N / 2 - 1)) begin
            stage <= stage + 1'b1;
            if (stage == $bits(stage)'(LOGN - 1)) begin
              state <= S_OUT;
              cnt   <= '0;
            end
          end
        end
        S_OUT: if (out_ready) begin
          cnt <= cnt + LOGN'(1);
          if (cnt == LOGN'(NOUT - 1)) begin
            state <= S_LOAD;
            cnt   <= '0;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) begin
      mem_re[bitrev(cnt)] <= DW'(in_data);
      mem_im[bitrev(cnt)] <= '0;
    end else if (state == S_CALC) begin
      mem_re[ia] <= ar + tr;
      mem_im[ia] <= ai + ti;
      mem_re[ib] <= ar - tr;
      mem_im[ib] <= ai - ti;
    end
  end

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_OUT);
  assign out_re    = mem_re[cnt];
  assign out_im    = mem_im[cnt];
  assign out_idx   = cnt;
  assign out_last  = (state == S_OUT) && (cnt == LOGN'(NOUT - 1));

endmodule
