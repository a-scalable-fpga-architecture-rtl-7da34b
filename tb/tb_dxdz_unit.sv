// tb_dxdz_unit: the serial D_X,D_Z unit on its own, at reduced size
// (4 tiles, 16-entry value memories, 20 D_X and 24 D_Z checks).
//
// The testbench stands in for the U,V unit and the two crossbars: every
// total a tile releases (dest = U,V tile, addr = slot) is looked up in the
// code tables and returned, unchanged and after a random delay, to the
// owning tile with addr = {matrix, variable}. The output ready is random, so
// the release queues see backpressure. With the U,V steps reduced to the
// identity, the reference decoder is the layered min-sum over D_X and D_Z
// alone; each decode is compared on convergence, iteration count, exact
// cycle count and every hard decision. A second code with max_iter = 1 and
// heavy noise covers the stop at the iteration limit.
`timescale 1ns/1ps
module tb_dxdz_unit;
  import gari_pkg::*;
  import gari_tb_pkg::*;

  localparam int NT = 4, VXD = 16, VZD = 16, NCX = 20, NCZ = 24, NU = 3, SLOTS = 64;
  localparam int LX = NCX + 40, LZ = NCZ + 40;

  logic clk = 0, rst = 1;
  always #5 clk = !clk;

  load_t ld;
  logic start = 0;
  logic [7:0] max_iter;
  logic [NT-1:0] uv_valid, out_valid, out_ready;
  xb_item_t uv_data [NT], out_data [NT];
  logic busy, done, converged;
  logic [7:0] iterations;
  logic [31:0] cycles;
  logic [NT-1:0][VZD-1:0] hd;

  dxdz_unit #(.N_TILES(NT), .VX_DEPTH(VXD), .VZ_DEPTH(VZD), .NCHK_X(NCX), .NCHK_Z(NCZ),
              .OQ_DEPTH(64)) dut (
    .clk, .rst, .ld, .start, .max_iter, .step_len_x(12'(LX)), .step_len_z(12'(LZ)),
    .uv_valid, .uv_data, .out_valid, .out_ready, .out_data,
    .busy, .done, .converged, .iterations, .cycles, .hd);

  int checks = 0, failures = 0, n_returned = 0, n_backpressure = 0;
  gari_code_model mdl;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // loopback standing in for the U,V unit
  xb_item_t retq [NT][$];
  int       retd [NT][$];
  always @(posedge clk) begin
    for (int t = 0; t < NT; t++) begin
      if (out_valid[t] && out_ready[t]) begin
        automatic int k = int'(out_data[t].dest), s = int'(out_data[t].addr);
        automatic int tt = mdl.uv_t[k][s];
        automatic xb_item_t it;
        it.dest = DEST_W'(tt);
        it.addr = ADDR_W'((mdl.uv_m[k][s] << 9) | mdl.uv_a[k][s]);
        it.value = out_data[t].value;
        retq[tt].push_back(it);
        retd[tt].push_back(int'($urandom_range(2, 8)));
      end
      if (out_valid[t] && !out_ready[t]) n_backpressure++;
    end
  end
  always @(negedge clk) begin
    for (int t = 0; t < NT; t++) begin
      uv_valid[t] = 0;
      uv_data[t] = '0;
      foreach (retd[t][i]) if (retd[t][i] > 0) retd[t][i]--;
      if (retq[t].size() > 0 && retd[t][0] == 0) begin
        uv_valid[t] = 1;
        uv_data[t] = retq[t].pop_front();
        void'(retd[t].pop_front());
        n_returned++;
      end
      out_ready[t] = ($urandom_range(0, 99) < 70);
    end
  end

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

  task automatic run(int mi, bit full_load);
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
    check(cycles == 32'(it * (LX + LZ) + 3), $sformatf("cycles %0d", cycles));
    for (int t = 0; t < NT; t++)
      for (int a = 0; a < VZD; a++)
        check(hd[t][a] == mdl.hd[t][a], $sformatf("hd[%0d][%0d]", t, a));
    $display("decode: conv=%0d iterations=%0d cycles=%0d", converged, iterations, cycles);
    repeat (20) @(posedge clk);
  endtask

  initial begin
    ld = '0;
    max_iter = 8'd4;
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    mdl = new(NT, VXD, VZD, NCX, NCZ, NU, SLOTS, '{3, 2, 1});
    mdl.uv_bypass = 1;
    mdl.build(60, 0);
    mdl.noise(6, 3);
    run(6, 1);
    for (int trial = 0; trial < 4; trial++) begin
      mdl.noise(12 + 8 * trial, 8 + 6 * trial);
      run((trial == 3) ? 1 : 6, 0);
    end
    check(n_returned > 0, "no totals returned");
    check(n_backpressure > 0, "no backpressure on the release queues");
    $display("returned=%0d backpressure=%0d", n_returned, n_backpressure);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
