// tb_gari_ensemble: end-to-end test of the three-core ensemble, reduced size.
//
// Each of the N_CORES cores gets its own random GARI code and noise (the
// cores are independent), all are started together and run concurrently,
// and each result is compared with the reference decoder of gari_tb_pkg:
// convergence flag, iteration count, exact cycle count and every D_Z hard
// decision. The mechanisms counted in tb_gari_core (early stop, iteration
// limit, calibration reads, masking, crossbar stalls, step-end releases)
// must each occur at least once across the cores.
`timescale 1ns/1ps
module tb_gari_ensemble;
  import gari_pkg::*;
  import gari_tb_pkg::*;

  localparam int NC = 3;
  localparam int NT = 4, VXD = 16, VZD = 16, NCX = 20, NCZ = 24, NU = 3, SLOTS = 64;
  localparam int unsigned LN [NU] = '{3, 2, 1};
  localparam int LX = NCX + 40, LZ = NCZ + 40;

  logic clk = 0, rst = 1;
  always #5 clk = !clk;

  load_t ld [NC];
  logic [NC-1:0] start = '0;
  logic [7:0]  max_iter [NC];
  logic [11:0] lx [NC], lz [NC];
  logic [NC-1:0] busy, done, converged;
  logic [7:0]  iterations [NC];
  logic [31:0] cycles [NC];
  logic [NT-1:0][VZD-1:0] hd [NC];

  gari_ensemble #(.N_CORES(NC), .N_DX_TILES(NT), .VX_DEPTH(VXD), .VZ_DEPTH(VZD),
                  .NCHK_X(NCX), .NCHK_Z(NCZ), .N_UV_TILES(NU), .LANES(LN),
                  .SLOTS(SLOTS), .QDEPTH(64)) dut (
    .clk, .rst, .ld, .start, .max_iter, .step_len_x(lx), .step_len_z(lz),
    .busy, .done, .converged, .iterations, .cycles, .hd);

  int checks = 0, failures = 0;
  int n_conv = 0, n_maxit = 0, n_calib = 0, n_masked = 0, n_stall = 0, n_release = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load_core(int c, ld_rec_t q[$]);
    foreach (q[i]) begin
      ld[c].valid  <= 1'b1;
      ld[c].target <= ld_target_e'(q[i].target);
      ld[c].tile   <= 8'(q[i].tile);
      ld[c].lane   <= 8'(q[i].lane);
      ld[c].addr   <= 12'(q[i].addr);
      ld[c].data   <= 32'(q[i].data);
      @(posedge clk);
    end
    ld[c].valid <= 1'b0;
    @(posedge clk);
  endtask

  always @(posedge clk) if (!rst) begin
    if (busy[0] && (dut.g_core[0].u_core.u_xb_dx2uv.v[0] & ~dut.g_core[0].u_core.u_xb_dx2uv.rdy[0]) != 0) n_stall++;
    if (busy[1] && (dut.g_core[1].u_core.u_xb_dx2uv.v[0] & ~dut.g_core[1].u_core.u_xb_dx2uv.rdy[0]) != 0) n_stall++;
    if (busy[2] && (dut.g_core[2].u_core.u_xb_dx2uv.v[0] & ~dut.g_core[2].u_core.u_xb_dx2uv.rdy[0]) != 0) n_stall++;
    if (busy[0] && dut.g_core[0].u_core.u_dxdz.step_end && dut.g_core[0].u_core.u_dxdz.g_tile[0].u_tile.pending != 0) n_release++;
  end

  initial begin
    gari_code_model mdl [NC];
    int it [NC];
    bit conv [NC];
    for (int c = 0; c < NC; c++) begin
      ld[c] = '0; max_iter[c] = 8'd6; lx[c] = 12'(LX); lz[c] = 12'(LZ);
    end
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    for (int c = 0; c < NC; c++) begin
      mdl[c] = new(NT, VXD, VZD, NCX, NCZ, NU, SLOTS, '{3, 2, 1});
      mdl[c].build(60, 70);
    end
    for (int round = 0; round < 3; round++) begin
      ld_rec_t qs [NC][$];
      for (int c = 0; c < NC; c++) begin
        mdl[c].noise(8 + 6 * c + 4 * round, 3 + 3 * round);
        mdl[c].loads(qs[c], round != 0);
        max_iter[c] <= (round == 2 && c == 2) ? 8'd1 : 8'd6;
        it[c] = mdl[c].decode((round == 2 && c == 2) ? 1 : 6, conv[c]);
      end
      for (int c = 0; c < NC; c++) begin
        fork
          automatic int cc = c;
          load_core(cc, qs[cc]);
        join_none
      end
      wait fork;
      start <= '1;
      @(posedge clk);
      start <= '0;
      @(posedge clk);
      while (busy != 0) @(posedge clk);
      for (int c = 0; c < NC; c++) begin
        check(converged[c] == conv[c], $sformatf("core %0d converged", c));
        check(32'(iterations[c]) == it[c], $sformatf("core %0d iterations %0d expected %0d", c, iterations[c], it[c]));
        check(cycles[c] == 32'(it[c] * (LX + LZ) + 3), $sformatf("core %0d cycles", c));
        for (int t = 0; t < NT; t++)
          for (int a = 0; a < VZD; a++)
            check(hd[c][t][a] == mdl[c].hd[t][a], $sformatf("core %0d hd[%0d][%0d]", c, t, a));
        if (conv[c]) n_conv++; else n_maxit++;
        n_calib += mdl[c].stat_calib_reads;
        n_masked += mdl[c].stat_masked;
        $display("core %0d: conv=%0d iterations=%0d cycles=%0d", c, converged[c], iterations[c], cycles[c]);
      end
      repeat (5) @(posedge clk);
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
