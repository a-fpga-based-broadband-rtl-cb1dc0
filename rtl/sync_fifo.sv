// sync_fifo: single-clock first-in first-out buffer with valid/ready ports.
//
// DEPTH words of W bits (DEPTH a power of two) in a memory array with
// separate read and write pointers one bit wider than the address, so full
// and empty are told apart. A word is written when in_valid && in_ready and
// removed when out_valid && out_ready; both may happen in the same clock.
// out_data shows the oldest word while out_valid is high (first-word
// fall-through, zero latency from a write to out_valid in the next cycle).
// `level` is the number of stored words. Used for the USB receive and
// transmit paths and for the queue of measurement tags; the paper does not
// describe buffering, so depth and style are this design's choices.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [W-1:0]             in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [W-1:0]             out_data,
  output logic [$clog2(DEPTH):0]   level
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wr_ptr, rd_ptr;
  logic         push, pop;

  assign level     = wr_ptr - rd_ptr;
  assign in_ready  = (level != (AW+1)'(DEPTH));
  assign out_valid = (level != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + (AW+1)'(1);
      if (pop)  rd_ptr <= rd_ptr + (AW+1)'(1);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr[AW-1:0]] <= in_data;
  end

  a_level: assert property (@(posedge clk) disable iff (!rst_n) level <= (AW+1)'(DEPTH));

endmodule
