// ft2232h_model: behavioural model of the FIFO side of an FT2232H USB chip
// in synchronous FIFO mode, for testbenches only.
// Pins change 1 time unit after the clock edge. Bytes queued with
// host_send() are offered to the FPGA (RXF# low while any
// remain, data on d_to_fpga); a byte is consumed at a clock edge with RD#
// and RXF# low, and counted as a protocol error if OE# was not low in the
// previous clock. Bytes written by the FPGA (WR# and TXE# low at an edge)
// are collected in `to_host`. TXE# goes high at random (about one clock in
// `busy_pct` percent, BUSY_PCT at start) to model a full transmit buffer; a write while the FPGA
// does not drive the bus is counted as an error.
module ft2232h_model #(
  parameter int BUSY_PCT = 10
) (
  input  logic       clk,
  output logic       rxf_n,
  output logic       txe_n,
  input  logic       rd_n,
  input  logic       wr_n,
  input  logic       oe_n,
  output logic [7:0] d_to_fpga,
  input  logic [7:0] d_from_fpga,
  input  logic       d_oe
);
  logic [7:0] from_host[$];
  logic [7:0] to_host[$];
  int busy_pct = BUSY_PCT;   // may be changed by the testbench
  int errors = 0, nread = 0, nwritten = 0, nbusy = 0;
  logic oe_prev = 1'b1;

  task automatic host_send(logic [7:0] b);
    from_host.push_back(b);
  endtask

  initial begin rxf_n = 1'b1; txe_n = 1'b1; d_to_fpga = 8'h00; end

  always @(posedge clk) begin
    if (!rd_n && !rxf_n) begin
      if (oe_prev) errors++;
      void'(from_host.pop_front());
      nread++;
    end
    if (!wr_n && !txe_n) begin
      if (!d_oe || !oe_n) errors++;
      to_host.push_back(d_from_fpga);
      nwritten++;
    end
    oe_prev = oe_n;
    #1;
    rxf_n = (from_host.size() == 0);
    d_to_fpga = rxf_n ? 8'h00 : from_host[0];
    txe_n = ($urandom_range(0, 99) < busy_pct);
    if (txe_n) nbusy++;
  end
endmodule
