// iteration_control: schedule of the D_X,D_Z unit (the paper's "iteration
// control").
//
// A decode alternates a D_X step and a D_Z step (one iteration = both). In
// each step the checks of that matrix are issued one per cycle, in the order
// of the control ROM, and the step lasts a fixed number of cycles
// (step_len_x / step_len_z, at least the number of checks plus 6), counted
// by a counter: the paper synchronizes the crossbar queues with a counter
// because the timing is deterministic. step_end pulses in the last cycle of
// each step and releases the queued totals towards the U,V unit.
//
// The control ROM holds, per check and per tile, a ctrl_t: participation
// (mask), the variable address (check select), first touch (source select:
// in the first iteration a first touch reads the calibration memory) and last
// touch (write-enable ROM: hard decision and hand-off to the U,V unit). It is
// written through the load bus (LD_CTRL, tile, addr = check index where D_Z
// checks follow the NCHK_X D_X checks).
//
// At the end of every D_Z step conv_start asks for a parity check; the next
// D_X step starts speculatively, and the decode ends when the result shows
// no violated check (converged) or after max_iter iterations. Outputs:
// ctl_* are registered, one cycle after issue (stage S1 of the tiles).
module iteration_control
  import gari_pkg::*;
#(
  parameter int unsigned N_TILES = 45,
  parameter int unsigned NCHK_X  = 792,
  parameter int unsigned NCHK_Z  = 936
) (
  input  logic        clk,
  input  logic        rst,
  input  load_t       ld,
  input  logic        start,
  input  logic [7:0]  max_iter,
  input  logic [11:0] step_len_x,
  input  logic [11:0] step_len_z,
  // S0
  output logic        issue,        // a check is issued this cycle
  // S1
  output logic        ctl_en,
  output logic        ctl_iter0,    // first iteration
  output ctrl_t       ctl [N_TILES],
  output logic        step,         // 0: D_X, 1: D_Z
  output logic        step_end,
  output logic        conv_start,
  input  logic        conv_valid,
  input  logic        conv_fail,
  output logic        busy,
  output logic        done,
  output logic        converged,
  output logic [7:0]  iterations,
  output logic [31:0] cycles
);
  localparam int unsigned NCHK = NCHK_X + NCHK_Z;
  localparam int CW = $clog2(NCHK);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_WAIT_CONV} state_e;
  state_e state;

  ctrl_t rom [N_TILES][NCHK];

  always_ff @(posedge clk) begin
    if (ld.valid && ld.target == LD_CTRL && 32'(ld.tile) < N_TILES && 32'(ld.addr) < NCHK)
      rom[ld.tile][ld.addr] <= ctrl_t'(ld.data[$bits(ctrl_t)-1:0]);
  end

  logic [11:0] cnt;
  logic [7:0]  iter;
  logic [11:0] nchk_cur, len_cur;
  logic [CW-1:0] raddr;

  assign nchk_cur = step ? 12'(NCHK_Z) : 12'(NCHK_X);
  assign len_cur  = step ? step_len_z : step_len_x;
  assign issue    = (state == S_RUN) && (cnt < nchk_cur);
  assign raddr    = step ? CW'(32'(cnt) + NCHK_X) : CW'(cnt);
  assign busy     = (state != S_IDLE);

  // control ROM read (check select, source select, write enable)
  always_ff @(posedge clk) begin
    for (int t = 0; t < N_TILES; t++) ctl[t] <= rom[t][raddr];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ctl_en <= 1'b0; ctl_iter0 <= 1'b0;
    end else begin
      ctl_en <= issue;
      ctl_iter0 <= (iter == 0);
    end
  end

  assign step_end = (state == S_RUN) && (cnt == len_cur - 1'b1);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE; cnt <= '0; iter <= '0; step <= 1'b0;
      conv_start <= 1'b0; done <= 1'b0; converged <= 1'b0;
      iterations <= '0; cycles <= '0;
    end else begin
      conv_start <= 1'b0;
      done <= 1'b0;
      if (state != S_IDLE) cycles <= cycles + 1;
      case (state)
        S_IDLE: if (start) begin
          state <= S_RUN; cnt <= '0; iter <= '0; step <= 1'b0;
          cycles <= '0; converged <= 1'b0;
        end
        S_RUN: begin
          if (step_end) begin
            cnt  <= '0;
            step <= !step;
            if (step) begin
              conv_start <= 1'b1;
              iter <= iter + 1'b1;
              if (iter + 1'b1 >= max_iter) state <= S_WAIT_CONV;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: ;
      endcase
      if (state != S_IDLE && conv_valid && (!conv_fail || state == S_WAIT_CONV)) begin
        state      <= S_IDLE;
        done       <= 1'b1;
        converged  <= !conv_fail;
        iterations <= iter;
      end
    end
  end

`ifndef SYNTHESIS
  a_len_x: assert property (@(posedge clk) disable iff (rst)
    start |-> 32'(step_len_x) >= NCHK_X + 6 && 32'(step_len_z) >= NCHK_Z + 6)
    else $error("iteration_control: step shorter than its checks plus pipeline");
`endif
endmodule
