// tb_sync_fifo: pushes and pops random words with random valid/ready
// patterns on a 16-word FIFO and compares every output with a queue kept
// here; checks that it fills to exactly DEPTH words (in_ready low) and
// reports the right level and empty state.
module tb_sync_fifo;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [7:0] in_data, out_data;
  logic [4:0] level;
  int checks = 0, failures = 0;
  sync_fifo #(.W(8), .DEPTH(D)) dut (.*);
  always #10 clk = ~clk;
  initial begin
    #10_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [7:0] q[$];
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  task automatic step(int pin, int pout);
    in_valid = ($urandom_range(0, 99) < pin); in_data = 8'($urandom);
    out_ready = ($urandom_range(0, 99) < pout);
    #1;
    check(int'(level) == q.size(), $sformatf("level %0d vs %0d", level, q.size()));
    check(out_valid == (q.size() != 0), "out_valid");
    check(in_ready == (q.size() < D), "in_ready");
    if (out_valid && out_ready) begin
      check(out_data == q[0], $sformatf("data %h expected %h", out_data, q[0]));
      void'(q.pop_front());
    end
    if (in_valid && in_ready) q.push_back(in_data);
    @(posedge clk); #1;
  endtask
  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    repeat (2000) step(50, 50);
    repeat (200) step(90, 10);   // fill up
    check(q.size() == D && !in_ready, "full");
    repeat (300) step(10, 90);   // drain
    check(q.size() == 0 && !out_valid, "empty");
    repeat (2000) step(70, 70);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
