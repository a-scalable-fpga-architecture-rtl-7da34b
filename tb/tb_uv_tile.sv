// tb_uv_tile: one U,V tile (2 e_Y lanes, 16 slots) against a behavioural
// model built on the reference CNU of gari_tb_pkg.
//
// Random priors and tags are loaded (some e_Y lanes and one ebar tag left
// invalid, so masking and suppressed outputs are covered). Opposite-matrix
// messages are written to random slots and lanes, then three rounds of
// ebar totals are fed to the tile in random order with random gaps. Every
// output, in order, is compared with the model: the e_Y messages per lane
// (value, tag) and the new ebar total (value, tag). The second and third
// rounds check that the message buffer returns the message of the previous
// visit of the same slot.
`timescale 1ns/1ps
module tb_uv_tile;
  import gari_pkg::*;
  import gari_tb_pkg::*;

  localparam int NL = 2, SL = 16;
  logic clk = 0, rst = 1;
  always #5 clk = !clk;

  load_t ld;
  logic in_valid = 0, in_ready;
  xb_item_t in_data;
  logic [NL-1:0] m_valid = '0, y_valid;
  xb_item_t m_data [NL], y_data [NL];
  logic b_valid;
  xb_item_t b_data;

  uv_tile #(.TILE_ID(0), .NLANE(NL), .SLOTS(SL), .QDEPTH(16)) dut (
    .clk, .rst, .ld, .in_valid, .in_ready, .in_data, .m_valid, .m_data,
    .y_valid, .y_data, .b_valid, .b_data);

  int checks = 0, failures = 0;
  int xz [SL], yc [NL][SL], ym [NL][SL], mb [SL];
  bit ytv [NL][SL], btv [SL];
  int ytd [NL][SL], yta [NL][SL], btd [SL], bta [SL];
  xb_item_t exp_y [NL][$], exp_b [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load1(ld_target_e tg, int lane, int addr, int data);
    @(negedge clk);
    ld = '{valid: 1, target: tg, tile: 0, lane: 8'(lane), addr: 12'(addr), data: 32'(data)};
    @(negedge clk);
    ld.valid = 0;
  endtask

  // model of one check
  function automatic void model(int s, int lin);
    int qv[], rv[]; bit mk[];
    qv = new[NL + 2]; mk = new[NL + 2];
    qv[0] = xz[s]; mk[0] = 1;
    for (int l = 0; l < NL; l++) begin
      qv[l+1] = gari_code_model::satv(yc[l][s] + ym[l][s]); mk[l+1] = ytv[l][s];
    end
    qv[NL+1] = gari_code_model::satv(lin - mb[s]); mk[NL+1] = 1;
    gari_code_model::cnu(qv, mk, 0, rv);
    mb[s] = rv[NL+1];
    for (int l = 0; l < NL; l++) if (ytv[l][s])
      exp_y[l].push_back('{dest: DEST_W'(ytd[l][s]), addr: ADDR_W'(yta[l][s]), value: var_t'(rv[l+1])});
    if (btv[s])
      exp_b.push_back('{dest: DEST_W'(btd[s]), addr: ADDR_W'(bta[s]),
                        value: var_t'(gari_code_model::satv(qv[NL+1] + rv[NL+1]))});
  endfunction

  always @(posedge clk) if (!rst) begin
    for (int l = 0; l < NL; l++) if (y_valid[l]) begin
      check(exp_y[l].size() > 0, "unexpected e_Y message");
      if (exp_y[l].size() > 0) check(y_data[l] == exp_y[l].pop_front(),
                                     $sformatf("lane %0d message %p", l, y_data[l]));
    end
    if (b_valid) begin
      check(exp_b.size() > 0, "unexpected ebar total");
      if (exp_b.size() > 0) check(b_data == exp_b.pop_front(), $sformatf("ebar total %p", b_data));
    end
  end

  initial begin
    ld = '0; in_data = '0;
    foreach (m_data[l]) m_data[l] = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int s = 0; s < SL; s++) begin
      xz[s] = $urandom_range(0, 62) - 31; mb[s] = 0;
      btv[s] = (s != 5); btd[s] = $urandom_range(0, 44); bta[s] = $urandom_range(0, 1023);
      load1(LD_UV_XZ, 0, s, xz[s] & 63);
      load1(LD_UV_BTAG, 0, s, btv[s] ? int'((1 << 31) | (btd[s] << 23) | bta[s]) : 0);
      for (int l = 0; l < NL; l++) begin
        yc[l][s] = $urandom_range(0, 62) - 31; ym[l][s] = 0;
        ytv[l][s] = ($urandom_range(0, 3) != 0);
        ytd[l][s] = $urandom_range(0, 121); yta[l][s] = $urandom_range(0, 999);
        load1(LD_UV_YLLR, l, s, yc[l][s] & 63);
        load1(LD_UV_YTAG, l, s, ytv[l][s] ? int'((1 << 31) | (ytd[l][s] << 23) | yta[l][s]) : 0);
      end
    end
    // opposite-matrix messages
    for (int i = 0; i < 20; i++) begin
      @(negedge clk);
      for (int l = 0; l < NL; l++) begin
        m_valid[l] = $urandom_range(0, 1);
        m_data[l] = '{dest: 0, addr: ADDR_W'($urandom_range(0, SL - 1)),
                      value: var_t'(int'($urandom_range(0, 254)) - 127)};
        if (m_valid[l]) ym[l][m_data[l].addr] = int'(msg_t'(m_data[l].value));
      end
    end
    @(negedge clk); m_valid = '0;
    // three rounds of ebar totals
    for (int round = 0; round < 3; round++) begin
      int order[SL];
      foreach (order[i]) order[i] = i;
      order.shuffle();
      foreach (order[i]) begin
        automatic int lin = int'($urandom_range(0, 1000)) - 500;
        @(negedge clk);
        while ($urandom_range(0, 2) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        in_data = '{dest: 0, addr: ADDR_W'(order[i]), value: var_t'(lin)};
        model(order[i], lin);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk); in_valid = 0;
      repeat (10) @(posedge clk);
      check(exp_b.size() == 0 && exp_y[0].size() == 0 && exp_y[1].size() == 0, "missing outputs");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
