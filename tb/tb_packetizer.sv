// tb_packetizer: feeds three measurements (tags and two random spectra of
// 8 bins each, with random gaps on the spectrum streams and random
// back-pressure on the byte stream) and compares every byte with a packet
// assembled here from the documented layout. Checks the total byte count,
// that each tag is released once, after its packet.
module tb_packetizer;
  import eit_pkg::*;
  localparam int NB = 8;
  logic clk = 0, rst_n = 0;
  wave_t wave;
  logic [2:0] avg_log2; logic [1:0] dec_log2;
  logic tag_valid, tag_ready, v_valid, v_ready, v_last, i_valid, i_ready, i_last, tx_valid, tx_ready;
  chan_t tag;
  logic signed [31:0] v_re, v_im, i_re, i_im;
  logic [7:0] tx_data;
  int checks = 0, failures = 0;
  packetizer #(.NOUT(NB)) dut (.*);
  always #10 clk = ~clk;
  initial begin
    #10_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [7:0] exp_q[$];
  chan_t tags[3];
  logic [31:0] vr[3][NB], vi[3][NB], ir[3][NB], ii[3][NB];
  // spectrum sources
  int vm = 0, vb = 0, im_ = 0, ib = 0;
  assign tag_valid = 1'b1;
  assign tag = tags[vm < 3 ? vm : 2];
  always @(posedge clk) if (rst_n) begin
    if (v_valid && v_ready) begin
      if (vb == NB - 1) begin vb <= 0; vm <= vm + 1; end else vb <= vb + 1;
    end
    if (i_valid && i_ready) begin
      if (ib == NB - 1) begin ib <= 0; im_ <= im_ + 1; end else ib <= ib + 1;
    end
  end
  always_comb begin
    v_re = vr[vm < 3 ? vm : 0][vb]; v_im = vi[vm < 3 ? vm : 0][vb]; v_last = (vb == NB - 1);
    i_re = ir[im_ < 3 ? im_ : 0][ib]; i_im = ii[im_ < 3 ? im_ : 0][ib]; i_last = (ib == NB - 1);
  end
  always @(posedge clk) begin
    v_valid <= rst_n && vm < 3 && ($urandom_range(0, 3) != 0);
    i_valid <= rst_n && im_ < 3 && ($urandom_range(0, 3) != 0);
    tx_ready <= ($urandom_range(0, 4) != 0);
  end
  int ntags = 0, nbytes = 0;
  always @(posedge clk) if (rst_n) begin
    if (tag_ready) ntags++;
    if (tx_valid && tx_ready) begin
      logic [7:0] e;
      e = exp_q.pop_front();
      nbytes++;
      checks++;
      if (tx_data !== e) begin failures++; if (failures < 10) $display("byte %0d: %h expected %h", nbytes - 1, tx_data, e); end
    end
  end
  task automatic push32(logic [31:0] w);
    for (int b = 3; b >= 0; b--) exp_q.push_back(w[8*b +: 8]);
  endtask
  initial begin
    wave = WAVE_CHIRP; avg_log2 = 3'd5; dec_log2 = 2'd1;
    v_valid = 0; i_valid = 0; tx_ready = 0;
    for (int m = 0; m < 3; m++) begin
      tags[m] = '{frame: 16'(300 + m), i_elec: 4'(m), v_elec: 4'(m + 2), i_pol: m[0], v_pol: !m[0]};
      for (int k = 0; k < NB; k++) begin vr[m][k] = $urandom; vi[m][k] = $urandom; ir[m][k] = $urandom; ii[m][k] = $urandom; end
      exp_q.push_back(8'hA5); exp_q.push_back(8'h5A);
      exp_q.push_back(tags[m].frame[15:8]); exp_q.push_back(tags[m].frame[7:0]);
      exp_q.push_back(8'(m)); exp_q.push_back(8'(m + 2));
      exp_q.push_back({4'b0, 2'd2, !m[0], m[0]});
      exp_q.push_back({1'b0, 3'd5, 2'b0, 2'd1});
      exp_q.push_back(8'(NB >> 8)); exp_q.push_back(8'(NB));
      for (int k = 0; k < NB; k++) begin push32(vr[m][k]); push32(vi[m][k]); end
      for (int k = 0; k < NB; k++) begin push32(ir[m][k]); push32(ii[m][k]); end
    end
    repeat (2) @(posedge clk); #1 rst_n = 1;
    repeat (3000) @(posedge clk);
    checks++;
    if (nbytes != 3 * (10 + 16 * NB) || ntags != 3) begin failures++; $display("%0d bytes, %0d tags", nbytes, ntags); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
