// gari_ensemble: N_CORES independent GARI decoder cores on one device.
//
// The published implementation places three cores on one FPGA so that an
// ensemble of decoders (each core decoding the same syndrome with its own
// LLRs) needs fewer devices. How the ensemble members' results are combined
// is not part of the published design, so each core keeps its own load bus,
// start and result ports; the cores share only the clock and reset.
module gari_ensemble
  import gari_pkg::*;
#(
  parameter int unsigned N_CORES    = 3,
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
  input  load_t       ld         [N_CORES],
  input  logic        [N_CORES-1:0] start,
  input  logic [7:0]  max_iter   [N_CORES],
  input  logic [11:0] step_len_x [N_CORES],
  input  logic [11:0] step_len_z [N_CORES],
  output logic        [N_CORES-1:0] busy,
  output logic        [N_CORES-1:0] done,
  output logic        [N_CORES-1:0] converged,
  output logic [7:0]  iterations [N_CORES],
  output logic [31:0] cycles     [N_CORES],
  output logic [N_DX_TILES-1:0][VZ_DEPTH-1:0] hd [N_CORES]
);
  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    gari_core #(.N_DX_TILES(N_DX_TILES), .VX_DEPTH(VX_DEPTH), .VZ_DEPTH(VZ_DEPTH),
                .NCHK_X(NCHK_X), .NCHK_Z(NCHK_Z), .N_UV_TILES(N_UV_TILES),
                .LANES(LANES), .SLOTS(SLOTS), .QDEPTH(QDEPTH)) u_core (
      .clk, .rst, .ld(ld[c]), .start(start[c]), .max_iter(max_iter[c]),
      .step_len_x(step_len_x[c]), .step_len_z(step_len_z[c]),
      .busy(busy[c]), .done(done[c]), .converged(converged[c]),
      .iterations(iterations[c]), .cycles(cycles[c]), .hd(hd[c]));
  end
endmodule
