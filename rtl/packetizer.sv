// packetizer: turns the two spectra of one measurement into a USB byte stream.
//
// For each measurement tag taken from the tag queue it sends
//   header (10 bytes): 0xA5 0x5A, frame number (2 bytes), first current
//     electrode, first voltage electrode, flags {4'b0, wave, v_pol, i_pol},
//     {1'b0, avg_log2, 2'b0, dec_log2}, number of bins per spectrum (2 bytes);
//   the voltage spectrum: NOUT bins, each as real part then imaginary part,
//     32-bit two's complement, most significant byte first (8 bytes/bin);
//   the current spectrum in the same form.
// Multi-byte fields are big-endian. A packet starts when a tag and the first
// voltage bin are both available; each FFT bin is taken from its stream
// after its eighth byte has been accepted (tx_valid && tx_ready). One byte
// per clock at most. The transfer of both complex spectra to the host, which
// divides them to get the impedance, follows the published system; the
// packet layout is this design's own.
module packetizer
  import eit_pkg::*;
#(
  parameter int unsigned NOUT = 512,
  parameter int unsigned DW   = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  wave_t                wave,
  input  logic [2:0]           avg_log2,
  input  logic [1:0]           dec_log2,
  // measurement tags
  input  logic                 tag_valid,
  output logic                 tag_ready,
  input  chan_t                tag,
  // voltage spectrum
  input  logic                 v_valid,
  output logic                 v_ready,
  input  logic signed [DW-1:0] v_re,
  input  logic signed [DW-1:0] v_im,
  input  logic                 v_last,
  // current spectrum
  input  logic                 i_valid,
  output logic                 i_ready,
  input  logic signed [DW-1:0] i_re,
  input  logic signed [DW-1:0] i_im,
  input  logic                 i_last,
  // byte stream to the USB interface
  output logic                 tx_valid,
  input  logic                 tx_ready,
  output logic [7:0]           tx_data
);

  localparam int unsigned HDR_LEN = 10;
  localparam int unsigned BB      = 2 * DW / 8;    // bytes per bin

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_V, S_I} state_t;
  state_t state;

  logic [3:0]              hcnt;
  logic [$clog2(BB)-1:0]   bcnt;
  logic [2*DW-1:0]         word;
  logic [7:0]              hdr_byte;
  logic                    beat, bin_done;

  always_comb begin
    unique case (hcnt)
      4'd0: hdr_byte = 8'hA5;
      4'd1: hdr_byte = 8'h5A;
      4'd2: hdr_byte = tag.frame[15:8];
      4'd3: hdr_byte = tag.frame[7:0];
      4'd4: hdr_byte = 8'(tag.i_elec);
      4'd5: hdr_byte = 8'(tag.v_elec);
      4'd6: hdr_byte = {4'b0, wave, tag.v_pol, tag.i_pol};
      4'd7: hdr_byte = {1'b0, avg_log2, 2'b0, dec_log2};
      4'd8: hdr_byte = 8'(NOUT >> 8);
      4'd9: hdr_byte = 8'(NOUT);
      default: hdr_byte = 8'h00;
    endcase
  end

  assign word     = (state == S_I) ? {i_re, i_im} : {v_re, v_im};
  assign tx_data  = (state == S_HDR) ? hdr_byte : word[2*DW-1 - 8*bcnt -: 8];
  assign tx_valid = (state == S_HDR) || (state == S_V && v_valid) || (state == S_I && i_valid);
  assign beat     = tx_valid && tx_ready;
  assign bin_done = beat && (bcnt == $bits(bcnt)'(BB - 1));
  assign v_ready  = (state == S_V) && bin_done;
  assign i_ready  = (state == S_I) && bin_done;
  assign tag_ready = (state == S_I) && bin_done && i_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      hcnt  <= '0;
      bcnt  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (tag_valid && v_valid) begin
          state <= S_HDR;
          hcnt  <= '0;
        end
        S_HDR: if (beat) begin
          hcnt <= hcnt + 4'd1;
          if (hcnt == 4'(HDR_LEN - 1)) begin
            state <= S_V;
            bcnt  <= '0;
          end
        end
        S_V: if (beat) begin
          bcnt <= bcnt + 1'b1;
          if (bin_done && v_last) state <= S_I;
        end
        S_I: if (beat) begin
          bcnt <= bcnt + 1'b1;
          if (bin_done && i_last) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
