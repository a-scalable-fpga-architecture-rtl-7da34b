// uv_unit: the U,V unit - N_TILES U,V tiles plus the U->V / V->U crossbar.
//
// Tile k has LANES[k] e_Y lanes (its CNU degree is LANES[k] + 2). The lanes
// of all tiles are numbered consecutively (tile 0 first) and form the J
// ports of one fifo_xbar: the message a lane emits carries the global lane
// number of the receiving e_Y memory as its destination, so the crossbar
// delivers it to the right tile and lane, where it is stored as e^M. With
// the paper's 18 tiles of degrees 23, 17, 13, 11, 11, 11, 7 (x8), 5, 5, 3, 3
// this gives J = 122 lanes, the paper's 122->122 crossbar.
// Interface: per tile, an input stream of ebar totals (addr = slot) and an
// output stream of new ebar totals towards the D_X,D_Z unit.
module uv_unit
  import gari_pkg::*;
#(
  parameter int unsigned N_TILES = 18,
  parameter int unsigned LANES [N_TILES] = '{21, 15, 11, 9, 9, 9, 5, 5, 5, 5, 5, 5, 5, 5, 3, 3, 1, 1},
  parameter int unsigned SLOTS   = 1000,
  parameter int unsigned QDEPTH  = 512,
  parameter int unsigned XB_IN_DEPTH  = 512,
  parameter int unsigned XB_OUT_DEPTH = 64
) (
  input  logic     clk,
  input  logic     rst,
  input  load_t    ld,
  input  logic     [N_TILES-1:0] in_valid,
  output logic     [N_TILES-1:0] in_ready,
  input  xb_item_t in_data [N_TILES],
  output logic     [N_TILES-1:0] b_valid,
  output xb_item_t b_data [N_TILES]
);
  function automatic int unsigned lane_base(input int unsigned k);
    int unsigned s = 0;
    for (int unsigned i = 0; i < k; i++) s += LANES[i];
    return s;
  endfunction

  localparam int unsigned J = lane_base(N_TILES);

  logic     [J-1:0] y_valid, y_ready, m_valid;
  xb_item_t         y_data [J];
  xb_item_t         m_data [J];

  for (genvar k = 0; k < N_TILES; k++) begin : g_tile
    localparam int unsigned B = lane_base(k);
    localparam int unsigned L = LANES[k];
    logic     [L-1:0] yv, mv;
    xb_item_t         yd [L];
    xb_item_t         md [L];
    for (genvar l = 0; l < L; l++) begin : g_l
      assign y_valid[B+l] = yv[l];
      assign y_data[B+l]  = yd[l];
      assign mv[l]        = m_valid[B+l];
      assign md[l]        = m_data[B+l];
    end
    uv_tile #(.TILE_ID(k), .NLANE(L), .SLOTS(SLOTS), .QDEPTH(QDEPTH)) u_tile (
      .clk, .rst, .ld,
      .in_valid(in_valid[k]), .in_ready(in_ready[k]), .in_data(in_data[k]),
      .m_valid(mv), .m_data(md), .y_valid(yv), .y_data(yd),
      .b_valid(b_valid[k]), .b_data(b_data[k]));
  end

  fifo_xbar #(.NIN(J), .NOUT(J), .IN_DEPTH(XB_IN_DEPTH), .OUT_DEPTH(XB_OUT_DEPTH)) u_xbar (
    .clk, .rst,
    .in_valid(y_valid), .in_ready(y_ready), .in_data(y_data),
    .out_valid(m_valid), .out_ready('1), .out_data(m_data));

`ifndef SYNTHESIS
  // Tiles do not stall: the crossbar input queues must take every message.
  a_no_drop: assert property (@(posedge clk) disable iff (rst)
    (y_valid & ~y_ready) == '0) else $error("uv_unit: crossbar input queue overflow");
`endif
endmodule
