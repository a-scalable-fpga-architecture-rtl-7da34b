// conv_check: hard-decision registers and fully parallel D_Z parity check.
//
// Hard decisions: one bit per (tile, address) of the D_Z value memories,
// written by the tiles on the last touch of a variable in a D_Z step and
// cleared by rst. Parity table: for every D_Z check and every tile, a valid
// bit and the address of the tile's variable in that check (LD_CONV, tile,
// addr = check, data[9] valid, data[8:0] address) - the same layout as the
// control ROM, because every variable of a check sits in a different tile.
//
// Two steps as in the paper: on check_start, every check's parity
// (syndrome XOR the selected hard decisions) is computed and registered; the
// next cycle all parities are OR-reduced and registered. res_valid pulses two
// cycles after check_start with res_fail = 1 if any check is violated.
// Only D_Z is checked (memory experiment), following the text of the paper.
module conv_check
  import gari_pkg::*;
#(
  parameter int unsigned N_TILES = 45,
  parameter int unsigned DEPTH   = 286,
  parameter int unsigned NCHK    = 936
) (
  input  logic                clk,
  input  logic                rst,
  input  load_t               ld,
  input  logic [N_TILES-1:0]  hd_we,
  input  logic [8:0]          hd_addr [N_TILES],
  input  logic [N_TILES-1:0]  hd_bit,
  input  logic [NCHK-1:0]     syn,
  input  logic                check_start,
  output logic                res_valid,
  output logic                res_fail,
  output logic [N_TILES-1:0][DEPTH-1:0] hd
);
  typedef struct packed { logic valid; logic [8:0] addr; } entry_t;

  entry_t tab [NCHK][N_TILES];

  always_ff @(posedge clk) begin
    if (ld.valid && ld.target == LD_CONV && 32'(ld.tile) < N_TILES && 32'(ld.addr) < NCHK)
      tab[ld.addr][ld.tile] <= '{valid: ld.data[9], addr: ld.data[8:0]};
  end

  always_ff @(posedge clk) begin
    for (int t = 0; t < N_TILES; t++) begin
      if (rst) hd[t] <= '0;
      else if (hd_we[t] && 32'(hd_addr[t]) < DEPTH) hd[t][hd_addr[t]] <= hd_bit[t];
    end
  end

  logic [NCHK-1:0] par_c, par_r;
  logic            v1;

  for (genvar c = 0; c < NCHK; c++) begin : g_par
    always_comb begin
      par_c[c] = syn[c];
      for (int t = 0; t < N_TILES; t++)
        if (tab[c][t].valid && 32'(tab[c][t].addr) < DEPTH)
          par_c[c] ^= hd[t][tab[c][t].addr];
    end
  end

  always_ff @(posedge clk) begin
    par_r    <= par_c;
    res_fail <= |par_r;
  end

  always_ff @(posedge clk) begin
    if (rst) begin v1 <= 1'b0; res_valid <= 1'b0; end
    else begin v1 <= check_start; res_valid <= v1; end
  end
endmodule
