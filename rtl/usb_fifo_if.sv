// usb_fifo_if: FPGA side of the FT2232H USB chip in synchronous FIFO mode.
//
// The chip signals RXF# low while it holds bytes from the host and TXE# low
// while it can take bytes for the host. A byte moves on a clock edge at
// which RD# and RXF# (read) or WR# and TXE# (write) are both low. Reading
// needs OE# low one clock before RD#, so that the chip, not the FPGA, drives
// the shared data bus. The interface
//   - goes to READ whenever RXF# is low (host commands take priority):
//     one clock with OE# low (bus turnaround), then RD# low while RXF# stays
//     low; every byte read is presented for one clock on rx_valid/rx_data
//     (the command decoder takes a byte every clock, so there is no ready);
//   - otherwise goes to WRITE while bytes wait on the tx stream and TXE# is
//     low, driving the bus (d_oe) and taking one byte per clock (tx_ready);
//     it leaves WRITE when RXF# falls or no byte is waiting.
// RD#, WR# and tx_ready are combinational from RXF#/TXE# so a byte is never
// offered to a chip that has just become full. The bidirectional bus is
// split into d_in, d_out and d_oe for the I/O pad; d_out is the head byte
// of the tx stream itself (first-word fall-through), so it is already valid
// when WR# falls and needs no register of its own. The FT2232HL and the
// 40 MB/s USB link are the published system's; the interface logic is this
// design's, and it assumes the chip's 60 MHz output clock is used as (or
// synchronised to) the system clock, which the paper does not discuss.
module usb_fifo_if (
  input  logic       clk,
  input  logic       rst_n,
  // FT2232H FIFO pins
  input  logic       rxf_n,
  input  logic       txe_n,
  output logic       rd_n,
  output logic       wr_n,
  output logic       oe_n,
  input  logic [7:0] d_in,
  output logic [7:0] d_out,
  output logic       d_oe,
  // received bytes
  output logic       rx_valid,
  output logic [7:0] rx_data,
  // bytes to send
  input  logic       tx_valid,
  output logic       tx_ready,
  input  logic [7:0] tx_data
);

  typedef enum logic [1:0] {S_IDLE, S_RD_OE, S_RD, S_WR} state_t;
  state_t state;

  assign oe_n     = !(state == S_RD_OE || state == S_RD);
  assign rd_n     = !(state == S_RD && !rxf_n);
  assign d_oe     = (state == S_WR);
  assign d_out    = tx_data;
  assign tx_ready = (state == S_WR) && !txe_n && rxf_n;
  assign wr_n     = !(tx_valid && tx_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      rx_valid <= 1'b0;
      rx_data  <= '0;
    end else begin
      rx_valid <= !rd_n && !rxf_n;
      if (!rd_n && !rxf_n) rx_data <= d_in;
      unique case (state)
        S_IDLE: begin
          if (!rxf_n)                 state <= S_RD_OE;
          else if (tx_valid && !txe_n) state <= S_WR;
        end
        S_RD_OE: state <= S_RD;
        S_RD:    if (rxf_n) state <= S_IDLE;
        S_WR:    if (!rxf_n || !tx_valid || txe_n) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // The FPGA never drives the bus while the chip's output is enabled.
  a_bus: assert property (@(posedge clk) disable iff (!rst_n) !(d_oe && !oe_n));
  a_rd_after_oe: assert property (@(posedge clk) disable iff (!rst_n) !rd_n |-> $past(!oe_n));

endmodule
