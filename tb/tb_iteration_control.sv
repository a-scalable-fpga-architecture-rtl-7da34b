// tb_iteration_control: loads a random control ROM (3 tiles, 5 D_X and 7
// D_Z checks), runs decodes with step lengths 11 and 13 and a stand-in
// parity checker that answers two cycles after conv_start. Checks, cycle by
// cycle: which check row appears on ctl one cycle after issue, the step
// flag, step_end in the last cycle of each step, the first-iteration flag,
// conv_start after each D_Z step, early termination when the parity check
// passes, termination at max_iter when it never does, and the cycle count.
`timescale 1ns/1ps
module tb_iteration_control;
  import gari_pkg::*;
  localparam int NT = 3, NX = 5, NZ = 7, LX = 11, LZ = 13;
  logic clk = 0, rst = 1;
  always #5 clk = !clk;
  load_t ld;
  logic start = 0;
  logic [7:0] max_iter;
  logic issue, ctl_en, ctl_iter0, step, step_end, conv_start, conv_valid = 0, conv_fail = 0;
  ctrl_t ctl [NT];
  logic busy, done, converged;
  logic [7:0] iterations;
  logic [31:0] cycles;
  int checks = 0, failures = 0;
  int rom [NT][NX + NZ];
  int pass_at;          // iteration whose parity check passes (1-based), 0 = never
  int n_conv_start;

  iteration_control #(.N_TILES(NT), .NCHK_X(NX), .NCHK_Z(NZ)) dut (
    .clk, .rst, .ld, .start, .max_iter, .step_len_x(12'(LX)), .step_len_z(12'(LZ)),
    .issue, .ctl_en, .ctl_iter0, .ctl, .step, .step_end, .conv_start,
    .conv_valid, .conv_fail, .busy, .done, .converged, .iterations, .cycles);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // stand-in parity checker
  logic [1:0] cs_d;
  always @(posedge clk) begin
    cs_d <= {cs_d[0], conv_start};
    if (conv_start) n_conv_start++;
    conv_valid <= cs_d[0];
    conv_fail  <= !(pass_at != 0 && n_conv_start >= pass_at);
  end

  task automatic run(int mi, int pa, int exp_iter, bit exp_conv);
    int t0;
    int c = 0;
    pass_at = pa; n_conv_start = 0;
    @(negedge clk);
    max_iter = 8'(mi); start = 1;
    @(negedge clk); start = 0;
    // cycle c counts from the first RUN cycle
    while (!done) begin
      int it = c / (LX + LZ), ph = c % (LX + LZ);
      bit st = ph >= LX;
      int k = st ? ph - LX : ph;
      bit exp_issue = (it < exp_iter) && (k < (st ? NZ : NX));
      bit exp_end = (it < exp_iter) && (st ? (k == LZ - 1) : (k == LX - 1));
      if (it < exp_iter) begin
        check(step == st, $sformatf("step flag at cycle %0d", c));
        check(issue == exp_issue, $sformatf("issue at cycle %0d", c));
        check(step_end == exp_end, $sformatf("step_end at cycle %0d", c));
      end
      @(negedge clk);
      if (exp_issue) begin
        check(ctl_en, "ctl_en one cycle after issue");
        check(ctl_iter0 == (it == 0), "first-iteration flag");
        for (int t = 0; t < NT; t++)
          check(32'(ctl[t]) == rom[t][st ? NX + k : k], $sformatf("rom row %0d tile %0d", k, t));
      end
      c++;
      if (c > 1000) break;
    end
    check(converged == exp_conv, "converged flag");
    check(32'(iterations) == exp_iter, $sformatf("iterations %0d expected %0d", iterations, exp_iter));
    check(cycles == 32'(exp_iter * (LX + LZ) + 3), $sformatf("cycles %0d", cycles));
    check(n_conv_start == exp_iter, "one parity check per iteration");
  endtask

  initial begin
    ld = '0;
    max_iter = 4;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < NT; t++)
      for (int c = 0; c < NX + NZ; c++) begin
        rom[t][c] = int'($urandom % (1 << $bits(ctrl_t)));
        @(negedge clk);
        ld = '{valid: 1, target: LD_CTRL, tile: 8'(t), lane: 0, addr: 12'(c), data: 32'(rom[t][c])};
      end
    @(negedge clk); ld.valid = 0;
    run(4, 2, 2, 1);    // passes after the second iteration
    run(3, 0, 3, 0);    // never passes: stops at max_iter
    run(5, 1, 1, 1);    // passes at once
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
