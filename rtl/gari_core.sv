// gari_core: one GARI decoder core.
//
// The D_X,D_Z unit runs the serial schedule over D_X and D_Z; the U,V unit
// processes the U and V checks of the GARI-transformed detector error model
// in parallel; three buffered crossbars connect them: D_X->U / D_Z->V
// (N_DX_TILES inputs to N_UV_TILES outputs), U->D_X / V->D_Z (the reverse),
// and U->V / V->U inside the U,V unit. Data flow per step (Table I of the
// paper): while D_Z is processed, the totals released at the end of the D_X
// step cross to the U checks, U runs and sends its e_Y messages to V and the
// new ebar_Z totals back to V^DX; symmetrically for V during the next D_X
// step. The step length is a fixed cycle count chosen by the user; every
// transfer of a step must have landed before it ends.
//
// Interface: load bus for tables, LLRs and syndromes; start begins a decode
// (queues and hard decisions are cleared, tables and LLRs are kept); done
// pulses at the end with converged, iterations and cycles; hd holds the hard
// decision of every ebar_X variable by (D_X,D_Z tile, address).
module gari_core
  import gari_pkg::*;
#(
  parameter int unsigned N_DX_TILES = 45,
  parameter int unsigned VX_DEPTH   = 345,
  parameter int unsigned VZ_DEPTH   = 286,
  parameter int unsigned NCHK_X     = 792,
  parameter int unsigned NCHK_Z     = 936,
  parameter int unsigned N_UV_TILES = 18,
  parameter int unsigned LANES [N_UV_TILES] = '{21, 15, 11, 9, 9, 9, 5, 5, 5, 5, 5, 5, 5, 5, 3, 3, 1, 1},
  parameter int unsigned SLOTS      = 1000,
  parameter int unsigned QDEPTH     = 512
) (
  input  logic        clk,
  input  logic        rst,
  input  load_t       ld,
  input  logic        start,
  input  logic [7:0]  max_iter,
  input  logic [11:0] step_len_x,
  input  logic [11:0] step_len_z,
  output logic        busy,
  output logic        done,
  output logic        converged,
  output logic [7:0]  iterations,
  output logic [31:0] cycles,
  output logic [N_DX_TILES-1:0][VZ_DEPTH-1:0] hd
);
  logic qrst;
  assign qrst = rst || (start && !busy);

  logic     [N_DX_TILES-1:0] dx_out_valid, dx_out_ready, ret_valid;
  xb_item_t                  dx_out_data [N_DX_TILES];
  xb_item_t                  ret_data    [N_DX_TILES];
  logic     [N_UV_TILES-1:0] uv_in_valid, uv_in_ready, b_valid, b_ready;
  xb_item_t                  uv_in_data  [N_UV_TILES];
  xb_item_t                  b_data      [N_UV_TILES];

  dxdz_unit #(.N_TILES(N_DX_TILES), .VX_DEPTH(VX_DEPTH), .VZ_DEPTH(VZ_DEPTH),
              .NCHK_X(NCHK_X), .NCHK_Z(NCHK_Z), .OQ_DEPTH(QDEPTH)) u_dxdz (
    .clk, .rst, .ld, .start, .max_iter, .step_len_x, .step_len_z,
    .uv_valid(ret_valid), .uv_data(ret_data),
    .out_valid(dx_out_valid), .out_ready(dx_out_ready), .out_data(dx_out_data),
    .busy, .done, .converged, .iterations, .cycles, .hd);

  // D_X -> U, D_Z -> V
  fifo_xbar #(.NIN(N_DX_TILES), .NOUT(N_UV_TILES), .IN_DEPTH(16), .OUT_DEPTH(16)) u_xb_dx2uv (
    .clk, .rst(qrst),
    .in_valid(dx_out_valid), .in_ready(dx_out_ready), .in_data(dx_out_data),
    .out_valid(uv_in_valid), .out_ready(uv_in_ready), .out_data(uv_in_data));

  uv_unit #(.N_TILES(N_UV_TILES), .LANES(LANES), .SLOTS(SLOTS), .QDEPTH(QDEPTH)) u_uv (
    .clk, .rst(qrst), .ld,
    .in_valid(uv_in_valid), .in_ready(uv_in_ready), .in_data(uv_in_data),
    .b_valid, .b_data);

  // U -> D_X, V -> D_Z
  fifo_xbar #(.NIN(N_UV_TILES), .NOUT(N_DX_TILES), .IN_DEPTH(QDEPTH), .OUT_DEPTH(16)) u_xb_uv2dx (
    .clk, .rst(qrst),
    .in_valid(b_valid), .in_ready(b_ready), .in_data(b_data),
    .out_valid(ret_valid), .out_ready('1), .out_data(ret_data));

`ifndef SYNTHESIS
  a_no_drop: assert property (@(posedge clk) disable iff (qrst)
    (b_valid & ~b_ready) == '0) else $error("gari_core: return crossbar queue overflow");
`endif
endmodule
