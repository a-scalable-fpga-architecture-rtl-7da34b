// tb_sync_fifo: random push/pop traffic against a queue model. Checks data
// order, that in_ready drops exactly at DEPTH words, the count output, and
// the one-cycle bypass latency of a word pushed into an empty FIFO.
`timescale 1ns/1ps
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst = 1;
  always #5 clk = !clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] din = '0, dout;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [W-1:0] model [$];

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    // bypass latency: push into empty, visible next cycle
    #1 in_valid = 1; din = 16'hBEEF;
    @(posedge clk); #1 in_valid = 0;
    check(out_valid && dout == 16'hBEEF, "bypass word after one cycle");
    out_ready = 1; @(posedge clk); #1 out_ready = 0;
    check(!out_valid, "empty after pop");
    // fill to DEPTH
    for (int i = 0; i < D; i++) begin
      check(in_ready, "ready while not full");
      in_valid = 1; din = W'(i);
      @(posedge clk); #1;
    end
    in_valid = 0;
    check(!in_ready, "not ready when full");
    check(count == D, "count at full");
    for (int i = 0; i < D; i++) begin
      check(out_valid && dout == W'(i), $sformatf("fill order %0d", i));
      out_ready = 1; @(posedge clk); #1 out_ready = 0;
    end
    // random traffic
    for (int n = 0; n < 2000; n++) begin
      logic push, pop;
      push = ($urandom % 3 != 0) && in_ready;
      pop  = ($urandom % 2 == 0);
      in_valid = push; din = W'($urandom);
      out_ready = pop;
      if (out_valid && pop) begin
        check(model.size() > 0 && dout == model[0], "random order");
        void'(model.pop_front());
      end
      if (push) model.push_back(din);
      @(posedge clk); #1;
      check(32'(count) == model.size(), "count tracks contents");
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
