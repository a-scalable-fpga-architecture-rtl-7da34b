// tb_conv_check: loads a random parity table (5 tiles, 9 checks) and random
// syndromes, writes random hard decisions through the tile write ports, and
// compares the result (two cycles after check_start) with a model; also
// constructs a hard-decision pattern that satisfies every check, so both
// outcomes are seen, and checks the registers and their reset.
`timescale 1ns/1ps
module tb_conv_check;
  import gari_pkg::*;
  localparam int NT = 5, D = 12, NC = 9;
  logic clk = 0, rst = 1;
  always #5 clk = !clk;
  load_t ld;
  logic [NT-1:0] hd_we = '0, hd_bit = '0;
  logic [8:0] hd_addr [NT];
  logic [NC-1:0] syn;
  logic check_start = 0, res_valid, res_fail;
  logic [NT-1:0][D-1:0] hd;
  int checks = 0, failures = 0, n_pass = 0, n_fail = 0;
  int tab [NC][NT];
  bit h [NT][D];

  conv_check #(.N_TILES(NT), .DEPTH(D), .NCHK(NC)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit model_fail();
    for (int c = 0; c < NC; c++) begin
      bit p = syn[c];
      for (int t = 0; t < NT; t++) if (tab[c][t] >= 0) p ^= h[t][tab[c][t]];
      if (p) return 1;
    end
    return 0;
  endfunction

  initial begin
    ld = '0;
    foreach (hd_addr[i]) hd_addr[i] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    check(hd == '0, "hard decisions reset");
    for (int c = 0; c < NC; c++)
      for (int t = 0; t < NT; t++) begin
        tab[c][t] = ($urandom % 2) ? int'($urandom % D) : -1;
        ld = '{valid: 1, target: LD_CONV, tile: 8'(t), lane: 0, addr: 12'(c),
               data: (tab[c][t] >= 0) ? (32'h200 | 32'(tab[c][t])) : 32'h0};
        @(negedge clk);
      end
    ld.valid = 0;
    for (int trial = 0; trial < 60; trial++) begin
      for (int t = 0; t < NT; t++)
        for (int a = 0; a < D; a++) begin
          h[t][a] = 1'($urandom);
          hd_we = '0; hd_we[t] = 1; hd_addr[t] = 9'(a); hd_bit[t] = h[t][a];
          @(negedge clk);
        end
      hd_we = '0;
      for (int c = 0; c < NC; c++) begin
        automatic bit p = 0;
        for (int t = 0; t < NT; t++) if (tab[c][t] >= 0) p ^= h[t][tab[c][t]];
        syn[c] = (trial % 2) ? p : 1'($urandom);   // odd trials: all satisfied
      end
      for (int t = 0; t < NT; t++)
        for (int a = 0; a < D; a++) check(hd[t][a] == h[t][a], "register contents");
      check_start = 1; @(negedge clk); check_start = 0;
      check(!res_valid, "no result after one cycle");
      @(negedge clk);
      check(res_valid, "result after two cycles");
      check(res_fail == model_fail(), "parity result");
      if (res_fail) n_fail++; else n_pass++;
      @(negedge clk);
    end
    check(n_pass > 0 && n_fail > 0, "both outcomes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
