// nms_cnu: normalized min-sum check-node unit with input filters.
//
// For every input i it returns r_i = (-1)^syn * prod_{j!=i} sign(q_j) *
// alpha * min_{j!=i} |q_j|, the normalized min-sum rule. Inputs whose mask
// bit is low are replaced by the largest positive value before the search,
// so they never become the minimum and never flip a sign; their outputs are
// meaningless and are ignored downstream (no output filter, as in the paper).
// alpha = 3/4 (computed as (3*m) >> 2) and saturation to the 8-bit message
// range are this design's choices; the paper names normalized min-sum but
// gives no factor.
// Timing: two register stages. Inputs sampled with in_valid are answered
// with out_valid exactly two cycles later; a new check can enter every cycle.
module nms_cnu
  import gari_pkg::*;
#(
  parameter int unsigned DEG = 45
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  input  var_t            q    [DEG],
  input  logic [DEG-1:0]  mask,
  input  logic            syn,
  output logic            out_valid,
  output msg_t            r    [DEG]
);
  localparam int IW = (DEG <= 2) ? 1 : $clog2(DEG);

  // Stage 1: filter and search for the two smallest magnitudes.
  logic [VAR_W-1:0] mag [DEG];
  logic [DEG-1:0]   sgn;
  logic [VAR_W-1:0] min1_c, min2_c;
  logic [IW-1:0]    idx_c;
  logic             par_c;

  always_comb begin
    min1_c = VAR_W'(VAR_MAX);
    min2_c = VAR_W'(VAR_MAX);
    idx_c  = '0;
    par_c  = syn;
    for (int i = 0; i < DEG; i++) begin
      if (mask[i]) begin
        sgn[i] = q[i][VAR_W-1];
        mag[i] = q[i][VAR_W-1] ? VAR_W'(-q[i]) : VAR_W'(q[i]);
      end else begin
        sgn[i] = 1'b0;
        mag[i] = VAR_W'(VAR_MAX);
      end
      par_c ^= sgn[i];
      if (mag[i] < min1_c) begin
        min2_c = min1_c;
        min1_c = mag[i];
        idx_c  = IW'(i);
      end else if (mag[i] < min2_c) begin
        min2_c = mag[i];
      end
    end
  end

  logic             v1;
  logic [VAR_W-1:0] min1_r, min2_r;
  logic [IW-1:0]    idx_r;
  logic             par_r;
  logic [DEG-1:0]   sgn_r;

  always_ff @(posedge clk) begin
    min1_r <= min1_c;
    min2_r <= min2_c;
    idx_r  <= idx_c;
    par_r  <= par_c;
    sgn_r  <= sgn;
  end

  // Stage 2: normalize and build each extrinsic message.
  function automatic msg_t scale(input logic [VAR_W-1:0] m, input logic neg);
    logic [VAR_W+1:0] s;
    s = ((VAR_W+2)'(m) * 3) >> 2;
    if (s > MSG_MAX) s = MSG_MAX;
    return neg ? msg_t'(-$signed(s)) : msg_t'(s);
  endfunction

  always_ff @(posedge clk) begin
    for (int i = 0; i < DEG; i++)
      r[i] <= scale((idx_r == IW'(i)) ? min2_r : min1_r, par_r ^ sgn_r[i]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin v1 <= 1'b0; out_valid <= 1'b0; end
    else begin v1 <= in_valid; out_valid <= v1; end
  end
endmodule
