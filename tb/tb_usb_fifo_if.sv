// tb_usb_fifo_if: connects the interface to the FT2232H model. The host
// sends 300 bytes at random times while the FPGA side streams 3000 bytes
// with random gaps. Checks that both byte sequences arrive complete and in
// order, that the model saw no protocol error (RD# without OE# a clock
// earlier, a write without the FPGA driving the bus), and that a burst with
// no host traffic moves at least 0.8 bytes per clock while the chip is
// ready 90 % of the time (0.8 x 60 MHz = 48 MB/s, above the 40 MB/s link).
module tb_usb_fifo_if;
  logic clk = 0, rst_n = 0;
  logic rxf_n, txe_n, rd_n, wr_n, oe_n, d_oe, rx_valid, tx_valid, tx_ready;
  logic [7:0] d_in, d_out, rx_data, tx_data;
  int checks = 0, failures = 0;
  usb_fifo_if dut (.*);
  ft2232h_model #(.BUSY_PCT(10)) chip (.clk, .rxf_n, .txe_n, .rd_n, .wr_n, .oe_n,
                                       .d_to_fpga(d_in), .d_from_fpga(d_out), .d_oe);
  always #10 clk = ~clk;
  initial begin
    #10_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [7:0] sent_host[$], got_fpga[$], sent_fpga[$];
  always @(posedge clk) if (rst_n && rx_valid) got_fpga.push_back(rx_data);
  // FPGA transmit source
  int ntx = 0, ntx_total = 3000;
  bit gaps = 1;
  always @(posedge clk) begin
    if (rst_n && tx_valid && tx_ready) begin sent_fpga.push_back(tx_data); ntx++; end
  end
  always_comb tx_data = 8'(ntx * 7 + 3);
  always @(posedge clk) tx_valid <= rst_n && (ntx < ntx_total) && (!gaps || $urandom_range(0, 4) != 0);
  initial begin
    int t0, n0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      automatic logic [7:0] b = 8'($urandom);
      sent_host.push_back(b); chip.host_send(b);
      repeat ($urandom_range(0, 15)) @(posedge clk);
    end
    wait (ntx == ntx_total);
    repeat (20) @(posedge clk);
    checks++;
    if (got_fpga != sent_host) begin failures++; $display("host->fpga mismatch: %0d of %0d bytes", got_fpga.size(), sent_host.size()); end
    checks++;
    if (chip.to_host.size() != ntx_total) begin failures++; $display("fpga->host %0d bytes", chip.to_host.size()); end
    for (int k = 0; k < chip.to_host.size() && k < ntx_total; k++) begin
      checks++;
      if (chip.to_host[k] != 8'(k * 7 + 3)) begin failures++; if (failures < 10) $display("byte %0d: %h", k, chip.to_host[k]); end
    end
    checks++;
    if (chip.errors != 0) begin failures++; $display("protocol errors: %0d", chip.errors); end
    // throughput burst
    gaps = 0; ntx_total = ntx + 2000; n0 = chip.nwritten; t0 = int'($time);
    wait (ntx == ntx_total);
    checks++;
    if (real'(chip.nwritten - n0) / (real'(int'($time) - t0) / 20.0) < 0.8) begin
      failures++; $display("throughput %f bytes/clock", real'(chip.nwritten - n0) / (real'(int'($time) - t0) / 20.0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
