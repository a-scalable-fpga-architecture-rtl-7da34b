// fifo_xbar: buffered multistage crossbar that sorts messages by tag.
//
// J = max(NIN, NOUT) ports are padded to P = 2^K with K = ceil(log2 J)
// levels. Level i (i = 0 .. K-1) pairs positions r and r + s inside each
// group of 2s positions, s = 2^(K-1-i), which is the input crossbar mapping
// of the paper (j -> (j mod s)*2 + floor(j/s) mod 2 + floor(j/2s)*2s) followed
// by its inverse on the output side. Each pair feeds one xbar_dist that sends
// a message to the r side or the r+s side according to tag bit K-1-i, so after
// the last level a message sits at the position equal to its destination: a
// binary radix sort done in K passes.
//
// Buffering: a FIFO of IN_DEPTH words at each of the NIN inputs, ping-pong
// buffers after every level but the last, and a FIFO of OUT_DEPTH words at
// each of the NOUT outputs. The paper puts the first queues after the first
// level; here they sit before it because a distribution module accepts only
// one word per output per cycle, and the producing tiles must never stall.
// Interface: per-port valid/ready streams of xb_item_t; dest must be < NOUT.
// Latency through an empty network is K+1 cycles.
module fifo_xbar
  import gari_pkg::*;
#(
  parameter int unsigned NIN       = 8,
  parameter int unsigned NOUT      = 8,
  parameter int unsigned IN_DEPTH  = 512,
  parameter int unsigned OUT_DEPTH = 64
) (
  input  logic     clk,
  input  logic     rst,
  input  logic     [NIN-1:0]  in_valid,
  output logic     [NIN-1:0]  in_ready,
  input  xb_item_t in_data    [NIN],
  output logic     [NOUT-1:0] out_valid,
  input  logic     [NOUT-1:0] out_ready,
  output xb_item_t out_data   [NOUT]
);
  localparam int unsigned J = (NIN > NOUT) ? NIN : NOUT;
  localparam int unsigned K = (J <= 2) ? 1 : $clog2(J);
  localparam int unsigned P = 1 << K;

  // Stream state at the input of each level (lv) and after the last (K).
  logic     [P-1:0] v   [K+1];
  logic     [P-1:0] rdy [K+1];
  xb_item_t         d   [K+1][P];
  // Outputs of the distribution modules of each level, before buffering.
  logic     [P-1:0] mv  [K];
  logic     [P-1:0] mr  [K];
  xb_item_t         md  [K][P];

  // Input queues.
  for (genvar p = 0; p < P; p++) begin : g_in
    if (p < NIN) begin : g_q
      sync_fifo #(.WIDTH($bits(xb_item_t)), .DEPTH(IN_DEPTH)) u_q (
        .clk, .rst,
        .in_valid(in_valid[p]), .in_ready(in_ready[p]), .din(in_data[p]),
        .out_valid(v[0][p]), .out_ready(rdy[0][p]), .dout(d[0][p]), .count());
    end else begin : g_none
      assign v[0][p] = 1'b0;
      assign d[0][p] = '0;
    end
  end

  for (genvar lv = 0; lv < K; lv++) begin : g_lv
    localparam int unsigned S = 1 << (K - 1 - lv);
    for (genvar m = 0; m < P / 2; m++) begin : g_dist
      localparam int unsigned P0 = (m / S) * 2 * S + (m % S);
      localparam int unsigned P1 = P0 + S;
      xb_item_t id [2];
      xb_item_t od [2];
      assign id[0] = d[lv][P0];
      assign id[1] = d[lv][P1];
      assign md[lv][P0] = od[0];
      assign md[lv][P1] = od[1];
      xbar_dist #(.BIT(K - 1 - lv)) u_dist (
        .clk, .rst,
        .in_valid({v[lv][P1], v[lv][P0]}),
        .in_ready({rdy[lv][P1], rdy[lv][P0]}),
        .in_data(id),
        .out_valid({mv[lv][P1], mv[lv][P0]}),
        .out_ready({mr[lv][P1], mr[lv][P0]}),
        .out_data(od));
    end
    for (genvar p = 0; p < P; p++) begin : g_buf
      if (lv < K - 1) begin : g_pp
        pingpong_buf #(.WIDTH($bits(xb_item_t))) u_pp (
          .clk, .rst,
          .in_valid(mv[lv][p]), .in_ready(mr[lv][p]), .din(md[lv][p]),
          .out_valid(v[lv+1][p]), .out_ready(rdy[lv+1][p]), .dout(d[lv+1][p]));
      end else if (p < NOUT) begin : g_oq
        sync_fifo #(.WIDTH($bits(xb_item_t)), .DEPTH(OUT_DEPTH)) u_q (
          .clk, .rst,
          .in_valid(mv[lv][p]), .in_ready(mr[lv][p]), .din(md[lv][p]),
          .out_valid(v[K][p]), .out_ready(rdy[K][p]), .dout(d[K][p]), .count());
      end else begin : g_sink
        // No output port here; tags never point at it.
        assign mr[lv][p] = 1'b1;
        assign v[K][p]   = 1'b0;
        assign d[K][p]   = '0;
      end
    end
  end

  for (genvar p = 0; p < P; p++) begin : g_out
    if (p < NOUT) begin : g_o
      assign out_valid[p] = v[K][p];
      assign out_data[p]  = d[K][p];
      assign rdy[K][p]    = out_ready[p];
    end else begin : g_x
      assign rdy[K][p] = 1'b1;
    end
  end

`ifndef SYNTHESIS
  for (genvar p = 0; p < NIN; p++) begin : g_chk
    a_dest_range: assert property (@(posedge clk) disable iff (rst)
      in_valid[p] |-> 32'(in_data[p].dest) < NOUT)
      else $error("fifo_xbar: destination out of range");
  end
`endif
endmodule
