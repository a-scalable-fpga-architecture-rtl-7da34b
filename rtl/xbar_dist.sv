// xbar_dist: distribution module of the crossbar interconnect.
//
// Takes two input streams and routes each message to output 0 or output 1
// according to one bit of its destination tag (bit BIT; the first crossbar
// level uses the most significant tag bit, as in the paper). When both
// inputs want the same output in the same cycle, one of them waits; a
// per-output round-robin pointer decides which, so neither input starves.
// Purely combinational: valid/ready in, valid/ready out, zero latency; the
// buffers around it provide the registers. The paper's modules accept two
// words per port per cycle (four in, four out); this one moves at most one
// word per output per cycle, a simplification of this design.
module xbar_dist
  import gari_pkg::*;
#(
  parameter int unsigned BIT = 0
) (
  input  logic     clk,
  input  logic     rst,
  input  logic     [1:0] in_valid,
  output logic     [1:0] in_ready,
  input  xb_item_t in_data [2],
  output logic     [1:0] out_valid,
  input  logic     [1:0] out_ready,
  output xb_item_t out_data [2]
);
  logic [1:0] dir;        // output wanted by each input
  logic [1:0] rr;         // per output: 1 = input 1 has priority
  logic [1:0] sel;        // per output: which input is granted
  logic [1:0] conflict;

  always_comb begin
    for (int i = 0; i < 2; i++) dir[i] = in_data[i].dest[BIT];
    for (int o = 0; o < 2; o++) begin
      logic c0, c1;
      c0 = in_valid[0] && (dir[0] == 1'(o));
      c1 = in_valid[1] && (dir[1] == 1'(o));
      conflict[o]  = c0 && c1;
      sel[o]       = (c0 && c1) ? rr[o] : c1;
      out_valid[o] = c0 || c1;
      out_data[o]  = in_data[sel[o]];
    end
    for (int i = 0; i < 2; i++)
      in_ready[i] = (sel[dir[i]] == 1'(i)) && out_ready[dir[i]];
  end

  always_ff @(posedge clk) begin
    if (rst) rr <= '0;
    else
      for (int o = 0; o < 2; o++)
        if (conflict[o] && out_ready[o]) rr[o] <= !sel[o];
  end
endmodule
