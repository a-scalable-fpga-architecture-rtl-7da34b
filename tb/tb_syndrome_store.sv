// tb_syndrome_store: loads random syndromes through the load bus, then reads
// the queue for two and a half rounds of checks (checking the wrap-around
// from the last D_Z check to the first D_X one, one bit per adv, registered)
// and compares the parallel D_Z view; clr must rewind the queue.
`timescale 1ns/1ps
module tb_syndrome_store;
  import gari_pkg::*;
  localparam int NX = 13, NZ = 17;
  logic clk = 0, rst = 1;
  always #5 clk = !clk;
  load_t ld;
  logic clr = 0, adv = 0, syn_out;
  logic [NZ-1:0] syn_z;
  int checks = 0, failures = 0;
  bit ref_bits [NX + NZ];

  syndrome_store #(.NCHK_X(NX), .NCHK_Z(NZ)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    ld = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < NX + NZ; i++) begin
      ref_bits[i] = 1'($urandom);
      @(negedge clk);
      ld = '{valid: 1, target: LD_SYN, tile: 0, lane: 0, addr: 12'(i), data: 32'(ref_bits[i])};
    end
    @(negedge clk); ld.valid = 0;
    @(negedge clk);
    for (int c = 0; c < NZ; c++) check(syn_z[c] == ref_bits[NX + c], "parallel D_Z view");
    for (int n = 0; n < 5 * (NX + NZ) / 2; n++) begin
      @(negedge clk); adv = 1;
      @(negedge clk); adv = 0;
      check(syn_out == ref_bits[n % (NX + NZ)], $sformatf("queue order %0d", n));
    end
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    adv = 1; @(negedge clk); adv = 0;
    check(syn_out == ref_bits[0], "rewind on clr");
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
