// tb_gari_scaled: the end-to-end test of tb_gari_core at a larger size, one
// core with 16 serial tiles of depth 40, 120 D_X and 140 D_Z checks, and 6
// U,V tiles with 5, 3, 3, 1, 1, 1 e_Y lanes and 256 slots (about 107 checks
// per U,V tile and half). A random GARI-structured code is loaded and
// decoded four times with rising noise; every decode is compared with the
// reference decoder (convergence, iterations, exact cycle count
// iterations * (step_len_x + step_len_z) + 3, every D_Z hard decision), and
// the same mechanisms as in tb_gari_core are counted and must all occur.
//
// The step lengths are the check counts plus 100 cycles. This margin is set
// by the U,V exchange, which must finish inside the following step. At this
// size checks + 60 is not enough: the return assertion in dxdz_tile fires,
// because routing about 107 totals per U,V tile through the 16->6 and 6->16
// crossbars and back takes more than 180 cycles.
`timescale 1ns/1ps
module tb_gari_scaled;
  import gari_pkg::*;
  import gari_tb_pkg::*;

  localparam int NT = 16, VXD = 40, VZD = 40, NCX = 120, NCZ = 140, NU = 6, SLOTS = 256;
  localparam int unsigned LN [NU] = '{5, 3, 3, 1, 1, 1};
  localparam int LX = NCX + 100, LZ = NCZ + 100;

  logic clk = 0, rst = 1;
  always #5 clk = !clk;

  load_t ld;
  logic start = 0;
  logic [7:0] max_iter;
  logic busy, done, converged;
  logic [7:0] iterations;
  logic [31:0] cycles;
  logic [NT-1:0][VZD-1:0] hd;

  gari_core #(.N_DX_TILES(NT), .VX_DEPTH(VXD), .VZ_DEPTH(VZD), .NCHK_X(NCX), .NCHK_Z(NCZ),
              .N_UV_TILES(NU), .LANES(LN), .SLOTS(SLOTS), .QDEPTH(256)) dut (
    .clk, .rst, .ld, .start, .max_iter, .step_len_x(12'(LX)), .step_len_z(12'(LZ)),
    .busy, .done, .converged, .iterations, .cycles, .hd);

  int checks = 0, failures = 0;
  int n_conv = 0, n_maxit = 0, n_calib = 0, n_masked = 0, n_stall = 0, n_release = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load_all(ld_rec_t q[$]);
    foreach (q[i]) begin
      ld.valid  <= 1'b1;
      ld.target <= ld_target_e'(q[i].target);
      ld.tile   <= 8'(q[i].tile);
      ld.lane   <= 8'(q[i].lane);
      ld.addr   <= 12'(q[i].addr);
      ld.data   <= 32'(q[i].data);
      @(posedge clk);
    end
    ld.valid <= 1'b0;
    @(posedge clk);
  endtask

  // crossbar stalls and releases, counted while decoding
  always @(posedge clk) if (!rst && busy) begin
    if ((dut.u_xb_dx2uv.v[0] & ~dut.u_xb_dx2uv.rdy[0]) != 0) n_stall++;
    if ((dut.u_uv.u_xbar.v[0] & ~dut.u_uv.u_xbar.rdy[0]) != 0) n_stall++;
    if (dut.u_dxdz.step_end && dut.u_dxdz.g_tile[0].u_tile.pending != 0) n_release++;
  end

  task automatic run(gari_code_model mdl, int mi, bit full_load);
    ld_rec_t q[$];
    bit conv;
    int it;
    mdl.loads(q, !full_load);
    load_all(q);
    it = mdl.decode(mi, conv);
    max_iter <= 8'(mi);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    while (!done) @(posedge clk);
    check(converged == conv, $sformatf("converged %0d expected %0d", converged, conv));
    check(32'(iterations) == it, $sformatf("iterations %0d expected %0d", iterations, it));
    check(cycles == 32'(it * (LX + LZ) + 3), $sformatf("cycles %0d expected %0d", cycles, it * (LX + LZ) + 3));
    for (int t = 0; t < NT; t++)
      for (int a = 0; a < VZD; a++)
        check(hd[t][a] == mdl.hd[t][a], $sformatf("hd[%0d][%0d]", t, a));
    if (conv) n_conv++; else n_maxit++;
    n_calib += mdl.stat_calib_reads;
    n_masked += mdl.stat_masked;
    $display("decode: conv=%0d iterations=%0d cycles=%0d", converged, iterations, cycles);
    repeat (5) @(posedge clk);
  endtask

  initial begin
    gari_code_model mdl;
    ld = '0;
    max_iter = 8'd4;
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    mdl = new(NT, VXD, VZD, NCX, NCZ, NU, SLOTS, '{5, 3, 3, 1, 1, 1});
    mdl.build(60, 70);
    mdl.noise(10, 5);
    run(mdl, 6, 1);
    for (int trial = 0; trial < 3; trial++) begin
      mdl.noise(8 + 8 * trial, 3 + 6 * trial);
      run(mdl, (trial == 2) ? 1 : 6, 0);
    end
    check(n_conv > 0, "no decode stopped on convergence");
    check(n_maxit > 0, "no decode stopped at the iteration limit");
    check(n_calib > 0, "no calibration-memory reads");
    check(n_masked > 0, "no masked CNU inputs");
    check(n_stall > 0, "no crossbar stalls");
    check(n_release > 0, "no step-end releases");
    $display("mechanisms: conv=%0d maxit=%0d calib=%0d masked=%0d stall=%0d release=%0d",
             n_conv, n_maxit, n_calib, n_masked, n_stall, n_release);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
