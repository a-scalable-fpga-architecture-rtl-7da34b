// tb_pingpong_buf: checks one-cycle latency, full throughput (one word in
// and one out every cycle), the two-word capacity, and order under random
// back-pressure.
`timescale 1ns/1ps
module tb_pingpong_buf;
  localparam int W = 12;
  logic clk = 0, rst = 1;
  always #5 clk = !clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] din = '0, dout;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  pingpong_buf #(.WIDTH(W)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk); #1;
    // streaming: word i in at cycle i must come out at cycle i+1
    out_ready = 1;
    for (int i = 0; i < 20; i++) begin
      in_valid = 1; din = W'(i + 100);
      if (i > 0) check(out_valid && dout == W'(i + 99), "streaming at full rate");
      check(in_ready, "ready while streaming");
      @(posedge clk); #1;
    end
    in_valid = 0;
    @(posedge clk); #1;
    out_ready = 0;
    check(!out_valid, "drained");
    // capacity: two words then not ready
    in_valid = 1; din = 1; @(posedge clk); #1;
    din = 2; @(posedge clk); #1;
    check(!in_ready, "full after two words");
    in_valid = 0; out_ready = 1;
    check(dout == 1, "first of two"); @(posedge clk); #1;
    check(dout == 2, "second of two"); @(posedge clk); #1;
    check(!out_valid, "empty");
    model.delete();
    for (int n = 0; n < 2000; n++) begin
      logic push, pop;
      push = ($urandom % 2 == 0) && in_ready;
      pop = ($urandom % 2 == 0);
      in_valid = push; din = W'($urandom); out_ready = pop;
      if (out_valid && pop) begin
        check(model.size() > 0 && dout == model[0], "random order");
        void'(model.pop_front());
      end
      if (push) model.push_back(din);
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
