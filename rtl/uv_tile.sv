// uv_tile: one U,V tile, a data-driven processor of U and V checks.
//
// Every check of U (or V) joins one e_Z (or e_X) variable with a fixed
// prior, up to NLANE e_Y variables and one ebar_Z (or ebar_X) variable whose
// total comes from the D_X,D_Z unit. A tile owns SLOTS check slots (the
// first half for U checks, the second for V checks; the address carried with
// each message selects the slot, so the tile needs no knowledge of the
// schedule). Per slot it stores: the e_X/e_Z prior; per e_Y lane the prior
// e^C, the last message from the opposite matrix e^M and the tag e^T (where
// this lane's outgoing message must go); the ebar tag and the last message
// sent to the ebar variable (message buffer).
//
// When an ebar total arrives (queue), the tile reads the slot, forms the
// variable-to-check messages (prior; e^C + e^M for each e_Y, because an e_Y
// variable has exactly two checks; total - old message for ebar), runs the
// normalized min-sum CNU with a zero syndrome and emits: each e_Y lane's
// message with its tag, towards the opposite matrix through the U,V
// crossbar, and the new ebar total (input minus old plus new message) with
// the ebar tag, towards the D_X,D_Z unit. Unused lanes (tag not valid) are
// masked. e^M and the message buffer read as zero until written after rst.
//
// Timing: one check per cycle; a queued value leaves as results three
// cycles later. Outputs are not back-pressured: the crossbar input queues
// are sized to take every message of a step (as in the paper). The paper's
// tile has a 10-stage pipeline; this one has three stages.
module uv_tile
  import gari_pkg::*;
#(
  parameter int unsigned TILE_ID = 0,
  parameter int unsigned NLANE   = 3,
  parameter int unsigned SLOTS   = 1000,
  parameter int unsigned QDEPTH  = 512
) (
  input  logic     clk,
  input  logic     rst,
  input  load_t    ld,
  // ebar totals from the D_X,D_Z unit (addr = slot)
  input  logic     in_valid,
  output logic     in_ready,
  input  xb_item_t in_data,
  // messages from the opposite matrix, one port per lane (addr = slot)
  input  logic     [NLANE-1:0] m_valid,
  input  xb_item_t m_data [NLANE],
  // messages towards the opposite matrix, one port per lane
  output logic     [NLANE-1:0] y_valid,
  output xb_item_t y_data [NLANE],
  // new ebar totals towards the D_X,D_Z unit
  output logic     b_valid,
  output xb_item_t b_data
);
  localparam int unsigned DEG = NLANE + 2;
  localparam int SW = $clog2(SLOTS);

  llr_t xz_mem [SLOTS];
  llr_t yc_mem [NLANE][SLOTS];
  msg_t ym_mem [NLANE][SLOTS];
  tag_t yt_mem [NLANE][SLOTS];
  tag_t bt_mem [SLOTS];
  msg_t mb_mem [SLOTS];
  logic [SLOTS-1:0] ym_ok [NLANE];
  logic [SLOTS-1:0] mb_ok;

  // ---- loading ----
  always_ff @(posedge clk) begin
    if (ld.valid && 32'(ld.tile) == TILE_ID && 32'(ld.addr) < SLOTS) begin
      case (ld.target)
        LD_UV_XZ:   xz_mem[ld.addr[SW-1:0]] <= llr_t'(ld.data[LLR_W-1:0]);
        LD_UV_BTAG: bt_mem[ld.addr[SW-1:0]] <= tag_from_data(ld.data);
        LD_UV_YLLR: if (32'(ld.lane) < NLANE) yc_mem[ld.lane][ld.addr[SW-1:0]] <= llr_t'(ld.data[LLR_W-1:0]);
        LD_UV_YTAG: if (32'(ld.lane) < NLANE) yt_mem[ld.lane][ld.addr[SW-1:0]] <= tag_from_data(ld.data);
        default: ;
      endcase
    end
  end

  // ---- ebar queue ----
  logic     q_valid;
  xb_item_t q_data;

  sync_fifo #(.WIDTH($bits(xb_item_t)), .DEPTH(QDEPTH)) u_q (
    .clk, .rst, .in_valid, .in_ready, .din(in_data),
    .out_valid(q_valid), .out_ready(1'b1), .dout(q_data), .count());

  // ---- S1: slot read ----
  logic          v1;
  logic [SW-1:0] a0, a1;
  var_t          l1;
  llr_t          xz1;
  llr_t          yc1 [NLANE];
  msg_t          ym1 [NLANE];
  tag_t          yt1 [NLANE];
  tag_t          bt1;
  msg_t          mb1;

  assign a0 = q_data.addr[SW-1:0];

  always_ff @(posedge clk) begin
    a1  <= a0;
    l1  <= q_data.value;
    xz1 <= xz_mem[a0];
    bt1 <= bt_mem[a0];
    mb1 <= mb_ok[a0] ? mb_mem[a0] : msg_t'(0);
    for (int l = 0; l < NLANE; l++) begin
      yc1[l] <= yc_mem[l][a0];
      ym1[l] <= ym_ok[l][a0] ? ym_mem[l][a0] : msg_t'(0);
      yt1[l] <= yt_mem[l][a0];
    end
  end

  // ---- variable-to-check messages into the CNU ----
  var_t           q [DEG];
  logic [DEG-1:0] mask;
  var_t           qb1;

  always_comb begin
    qb1 = sat_var((VAR_W+2)'(l1) - (VAR_W+2)'(mb1));
    q[0] = var_t'(xz1);
    mask[0] = 1'b1;
    for (int l = 0; l < NLANE; l++) begin
      q[l+1]    = sat_var((VAR_W+2)'(yc1[l]) + (VAR_W+2)'(ym1[l]));
      mask[l+1] = yt1[l].valid;
    end
    q[DEG-1]    = qb1;
    mask[DEG-1] = 1'b1;
  end

  logic v3;
  msg_t r [DEG];

  nms_cnu #(.DEG(DEG)) u_cnu (
    .clk, .rst, .in_valid(v1), .q, .mask, .syn(1'b0), .out_valid(v3), .r);

  // ---- S2, S3: carry slot data alongside the CNU ----
  logic [SW-1:0] a2, a3;
  var_t          qb2, qb3;
  tag_t          yt2 [NLANE], yt3 [NLANE];
  tag_t          bt2, bt3;

  always_ff @(posedge clk) begin
    a2 <= a1;   a3 <= a2;
    qb2 <= qb1; qb3 <= qb2;
    bt2 <= bt1; bt3 <= bt2;
    yt2 <= yt1; yt3 <= yt2;
  end

  always_ff @(posedge clk) begin
    if (rst) v1 <= 1'b0;
    else     v1 <= q_valid;
  end

  // ---- S3: results ----
  always_comb begin
    for (int l = 0; l < NLANE; l++) begin
      y_valid[l] = v3 && yt3[l].valid;
      y_data[l]  = '{dest: yt3[l].dest, addr: yt3[l].addr, value: var_t'(r[l+1])};
    end
    b_valid = v3 && bt3.valid;
    b_data  = '{dest: bt3.dest, addr: bt3.addr,
                value: sat_var((VAR_W+2)'(qb3) + (VAR_W+2)'(r[DEG-1]))};
  end

  // message buffer and opposite-matrix messages
  always_ff @(posedge clk) begin
    if (v3) mb_mem[a3] <= r[DEG-1];
    for (int l = 0; l < NLANE; l++)
      if (m_valid[l]) ym_mem[l][m_data[l].addr[SW-1:0]] <= msg_t'(m_data[l].value);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      mb_ok <= '0;
      for (int l = 0; l < NLANE; l++) ym_ok[l] <= '0;
    end else begin
      if (v3) mb_ok[a3] <= 1'b1;
      for (int l = 0; l < NLANE; l++)
        if (m_valid[l]) ym_ok[l][m_data[l].addr[SW-1:0]] <= 1'b1;
    end
  end
endmodule
