// tb_uv_unit: the U,V unit on its own at reduced size (3 tiles with 3, 2
// and 1 e_Y lanes, 64 slots per tile), including its 6x6 lane crossbar.
//
// A random code is generated and its U,V tables loaded. The testbench then
// plays four steps, U, V, U, V: before each step the totals of all
// variables owned by that half are set to random values, fed to the tiles
// (all tiles at once, honouring in_ready), and the new totals that come
// back on the b ports are compared, by (tile, address), with the reference
// U/V check update. Each U step sends e_Y messages to the V half and each V
// step back, so the later steps also check that those messages were routed
// through the crossbar to the right lane and slot, and that the per-slot
// message memory holds the previous message of the same check.
`timescale 1ns/1ps
module tb_uv_unit;
  import gari_pkg::*;
  import gari_tb_pkg::*;

  localparam int NT = 4, VXD = 16, VZD = 16, NCX = 20, NCZ = 24, NU = 3, SLOTS = 64;
  localparam int unsigned LN [NU] = '{3, 2, 1};

  logic clk = 0, rst = 1;
  always #5 clk = !clk;

  load_t ld;
  logic [NU-1:0] in_valid, in_ready, b_valid;
  xb_item_t in_data [NU], b_data [NU];

  uv_unit #(.N_TILES(NU), .LANES(LN), .SLOTS(SLOTS), .QDEPTH(64),
            .XB_IN_DEPTH(64), .XB_OUT_DEPTH(16)) dut (
    .clk, .rst, .ld, .in_valid, .in_ready, .in_data, .b_valid, .b_data);

  int checks = 0, failures = 0, n_ymsg = 0, n_stall = 0;
  gari_code_model mdl;
  int expv [int];     // key dest*4096+addr
  int n_got;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (!rst) begin
    for (int k = 0; k < NU; k++) if (b_valid[k]) begin
      automatic int key = int'(b_data[k].dest) * 4096 + int'(b_data[k].addr);
      n_got++;
      check(expv.exists(key), $sformatf("unexpected total dest %0d addr %0h", b_data[k].dest, b_data[k].addr));
      if (expv.exists(key)) begin
        check(int'(b_data[k].value) == expv[key],
              $sformatf("total dest %0d addr %0h: %0d expected %0d", b_data[k].dest, b_data[k].addr,
                        b_data[k].value, expv[key]));
        expv.delete(key);
      end
    end
    if ((dut.u_xbar.v[0] & ~dut.u_xbar.rdy[0]) != 0) n_stall++;
    n_ymsg += $countones(dut.y_valid);
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

  task automatic step(int m);
    xb_item_t fq [NU][$];
    int n_exp;
    for (int k = 0; k < NU; k++)
      for (int s = m * (SLOTS / 2); s < (m + 1) * (SLOTS / 2); s++) if (mdl.uv_t[k][s] >= 0) begin
        automatic int t = mdl.uv_t[k][s], a = mdl.uv_a[k][s];
        automatic xb_item_t it;
        mdl.L[m][t][a] = $urandom_range(0, 400) - 200;
        it.dest = DEST_W'(k); it.addr = ADDR_W'(s); it.value = var_t'(mdl.L[m][t][a]);
        fq[k].push_back(it);
      end
    mdl.uv_step(m);
    for (int k = 0; k < NU; k++)
      for (int s = m * (SLOTS / 2); s < (m + 1) * (SLOTS / 2); s++) if (mdl.uv_t[k][s] >= 0) begin
        automatic int t = mdl.uv_t[k][s], a = mdl.uv_a[k][s];
        expv[t * 4096 + ((m << 9) | a)] = mdl.L[m][t][a];
      end
    n_exp = expv.size();
    n_got = 0;
    while (1) begin
      bit any = 0;
      @(negedge clk);
      for (int k = 0; k < NU; k++) begin
        in_valid[k] = fq[k].size() > 0;
        in_data[k] = in_valid[k] ? fq[k][0] : '0;
        any |= in_valid[k];
      end
      @(posedge clk);
      for (int k = 0; k < NU; k++) if (in_valid[k] && in_ready[k]) void'(fq[k].pop_front());
      if (!any) break;
    end
    @(negedge clk); in_valid = '0;
    repeat (60) @(posedge clk);
    check(expv.size() == 0, $sformatf("%0d totals missing after step %0d", expv.size(), m));
    check(n_got == n_exp, "one total per check");
    expv.delete();
  endtask

  initial begin
    ld_rec_t q[$];
    ld = '0; in_valid = '0;
    foreach (in_data[k]) in_data[k] = '0;
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    mdl = new(NT, VXD, VZD, NCX, NCZ, NU, SLOTS, '{3, 2, 1});
    mdl.build(60, 80);
    mdl.noise(10, 5);
    mdl.loads(q, 0);
    load_all(q);
    for (int k = 0; k < NU; k++)
      for (int s = 0; s < SLOTS; s++) begin
        mdl.rb[k][s] = 0;
        for (int l = 0; l < mdl.lanes[k]; l++) mdl.ym[k][l][s] = 0;
      end
    step(0); step(1); step(0); step(1);
    check(n_ymsg > 0, "no e_Y messages");
    $display("e_Y vars=%0d y messages=%0d xbar stalls=%0d", mdl.n_ey, n_ymsg, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
