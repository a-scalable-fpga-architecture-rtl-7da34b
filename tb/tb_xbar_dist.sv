// tb_xbar_dist: drives both inputs with random messages and random output
// back-pressure; checks that each output only carries messages whose tag bit
// selects it, that an input is accepted exactly when its output takes it,
// that no message is lost or duplicated, and that conflicts alternate.
`timescale 1ns/1ps
module tb_xbar_dist;
  import gari_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = !clk;
  logic [1:0] in_valid, in_ready, out_valid, out_ready;
  xb_item_t in_data [2];
  xb_item_t out_data [2];
  int checks = 0, failures = 0;
  int conflicts = 0, wins [2] = '{0, 0};

  xbar_dist #(.BIT(2)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0;
    in_data[0] = '0; in_data[1] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int i = 0; i < 2; i++) begin
        in_valid[i] = $urandom % 4 != 0;
        in_data[i].dest = DEST_W'($urandom % 8);
        in_data[i].addr = ADDR_W'(i);
        in_data[i].value = var_t'(n);
      end
      out_ready = 2'($urandom);
      #1;
      for (int o = 0; o < 2; o++) begin
        if (out_valid[o]) check(out_data[o].dest[2] == 1'(o), "output carries its tag bit");
      end
      for (int i = 0; i < 2; i++) begin
        logic o;
        o = in_data[i].dest[2];
        if (in_valid[i] && in_ready[i])
          check(out_valid[o] && out_ready[o] && out_data[o].addr == ADDR_W'(i), "accepted input appears on its output");
        if (in_valid[i] && out_ready[o] && !in_ready[i])
          check(in_valid[1-i] && in_data[1-i].dest[2] == o && in_ready[1-i], "held input lost a conflict");
      end
      if (in_valid == 2'b11 && in_data[0].dest[2] == in_data[1].dest[2] && out_ready[in_data[0].dest[2]]) begin
        conflicts++;
        if (in_ready[0]) wins[0]++; else wins[1]++;
      end
    end
    check(conflicts > 100, "conflicts exercised");
    check(wins[0] > conflicts / 4 && wins[1] > conflicts / 4, "round-robin fairness");
    $display("conflicts=%0d wins=%0d/%0d", conflicts, wins[0], wins[1]);
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
