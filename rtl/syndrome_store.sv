// syndrome_store: syndrome register file and circular syndrome queue.
//
// Holds one bit per check of D_X (indices 0..NCHK_X-1) followed by D_Z
// (NCHK_X..NCHK_X+NCHK_Z-1), written through the load bus (LD_SYN, addr =
// global check index, data[0] = bit). Two views of the same bits, as in the
// paper: (1) a circular queue read in check-processing order, one bit per
// issued check (adv), wrapping after the last D_Z check so every iteration
// sees D_X then D_Z again; (2) the D_Z bits in parallel for the convergence
// check. Timing: syn_out is registered, valid the cycle after adv. clr
// rewinds the queue to the first D_X check.
module syndrome_store
  import gari_pkg::*;
#(
  parameter int unsigned NCHK_X = 792,
  parameter int unsigned NCHK_Z = 936
) (
  input  logic              clk,
  input  logic              rst,
  input  load_t             ld,
  input  logic              clr,
  input  logic              adv,
  output logic              syn_out,
  output logic [NCHK_Z-1:0] syn_z
);
  localparam int unsigned N = NCHK_X + NCHK_Z;

  logic [N-1:0] bits;
  logic [$clog2(N)-1:0] ptr;

  always_ff @(posedge clk) begin
    if (ld.valid && ld.target == LD_SYN && 32'(ld.addr) < N)
      bits[ld.addr] <= ld.data[0];
  end

  always_ff @(posedge clk) begin
    if (rst || clr) begin
      ptr <= '0;
      syn_out <= 1'b0;
    end else if (adv) begin
      syn_out <= bits[ptr];
      ptr <= (32'(ptr) == N - 1) ? '0 : ptr + 1'b1;
    end
  end

  assign syn_z = bits[N-1:NCHK_X];
endmodule
