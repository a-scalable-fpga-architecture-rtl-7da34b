// dxdz_unit: serial-schedule (layered) min-sum decoder for D_X and D_Z.
//
// N_TILES tiles share one CNU of degree N_TILES: each check of D_X or D_Z
// has at most one variable per tile, so one control-ROM row selects, per
// tile, the variable taking part (or masks the tile out). Per cycle one
// check is processed: tiles read their variable (S1), subtract the check's
// message from the previous iteration, read from the message buffer (S2),
// the CNU computes the new normalized min-sum messages (S3..S5) with the
// check's syndrome bit from the syndrome queue, and the tiles write
// q + r back (S5) while the new messages are pushed into the message buffer
// (a FIFO of one row of N_TILES messages per check, popped from the second
// iteration on). A check issued at cycle t writes its variables at t+5, so
// checks that share a variable must be at least 5 issue slots apart.
//
// Last touches (write-enable ROM) update the hard-decision registers in
// D_Z steps and queue the variable total for the U,V unit; queued totals
// leave a tile only after the step that produced them has ended. Totals
// coming back from the U,V unit (uv_*) land in the value memory not in use.
// The parity check of D_Z runs after every D_Z step; done pulses when the
// hard decisions satisfy all D_Z checks or max_iter is reached.
module dxdz_unit
  import gari_pkg::*;
#(
  parameter int unsigned N_TILES  = 45,
  parameter int unsigned VX_DEPTH = 345,
  parameter int unsigned VZ_DEPTH = 286,
  parameter int unsigned NCHK_X   = 792,
  parameter int unsigned NCHK_Z   = 936,
  parameter int unsigned OQ_DEPTH = 512
) (
  input  logic        clk,
  input  logic        rst,
  input  load_t       ld,
  input  logic        start,
  input  logic [7:0]  max_iter,
  input  logic [11:0] step_len_x,
  input  logic [11:0] step_len_z,
  // totals returned from the U,V unit, one port per tile
  input  logic     [N_TILES-1:0] uv_valid,
  input  xb_item_t uv_data [N_TILES],
  // totals sent to the U,V unit, one port per tile
  output logic     [N_TILES-1:0] out_valid,
  input  logic     [N_TILES-1:0] out_ready,
  output xb_item_t out_data [N_TILES],
  output logic        busy,
  output logic        done,
  output logic        converged,
  output logic [7:0]  iterations,
  output logic [31:0] cycles,
  output logic [N_TILES-1:0][VZ_DEPTH-1:0] hd
);
  logic        qrst;            // queues and pipelines restart on start
  logic        issue, ctl_en, ctl_iter0, step, step_end, conv_start;
  logic        conv_valid, conv_fail;
  ctrl_t       ctl [N_TILES];

  assign qrst = rst || (start && !busy);

  iteration_control #(.N_TILES(N_TILES), .NCHK_X(NCHK_X), .NCHK_Z(NCHK_Z)) u_ctl (
    .clk, .rst, .ld, .start, .max_iter, .step_len_x, .step_len_z,
    .issue, .ctl_en, .ctl_iter0, .ctl, .step, .step_end, .conv_start,
    .conv_valid, .conv_fail, .busy, .done, .converged, .iterations, .cycles);

  // ---- syndrome queue and register file ----
  logic              syn_s1, syn_s2, syn_s3;
  logic [NCHK_Z-1:0] syn_z;

  syndrome_store #(.NCHK_X(NCHK_X), .NCHK_Z(NCHK_Z)) u_syn (
    .clk, .rst, .ld, .clr(start && !busy), .adv(issue), .syn_out(syn_s1), .syn_z);

  // ---- pipeline control ----
  logic s2_en, s3_en, s2_iter0;
  always_ff @(posedge clk) begin
    if (qrst) begin
      s2_en <= 1'b0; s3_en <= 1'b0; s2_iter0 <= 1'b1;
    end else begin
      s2_en <= ctl_en; s3_en <= s2_en; s2_iter0 <= ctl_iter0;
    end
  end
  always_ff @(posedge clk) begin
    syn_s2 <= syn_s1;
    syn_s3 <= syn_s2;
  end

  // ---- message buffer: one row of N_TILES check messages per check ----
  localparam int unsigned MBW = N_TILES * MSG_W;
  logic [MBW-1:0] mb_head, mb_in;
  logic           mb_valid, mb_pop;
  msg_t           r [N_TILES];
  logic           r_valid;

  assign mb_pop = s2_en && !s2_iter0;

  sync_fifo #(.WIDTH(MBW), .DEPTH(NCHK_X + NCHK_Z)) u_mb (
    .clk, .rst(qrst),
    .in_valid(r_valid), .in_ready(), .din(mb_in),
    .out_valid(mb_valid), .out_ready(mb_pop), .dout(mb_head), .count());

  always_comb
    for (int t = 0; t < N_TILES; t++) mb_in[t*MSG_W +: MSG_W] = r[t];

  // ---- tiles ----
  var_t             q [N_TILES];
  logic [N_TILES-1:0] q_mask, hd_we, hd_bit;
  logic [8:0]       hd_addr [N_TILES];

  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    msg_t old;
    assign old = (s2_iter0 || !mb_valid) ? msg_t'(0) : msg_t'(mb_head[t*MSG_W +: MSG_W]);
    dxdz_tile #(.TILE_ID(t), .VX_DEPTH(VX_DEPTH), .VZ_DEPTH(VZ_DEPTH),
                .OQ_DEPTH(OQ_DEPTH)) u_tile (
      .clk, .rst(qrst), .ld, .step, .step_end,
      .rd_en(ctl_en), .rd_mask(ctl[t].valid), .rd_calib(ctl[t].first && ctl_iter0),
      .rd_last(ctl[t].last), .rd_addr(ctl[t].addr),
      .msg_old(old), .q(q[t]), .q_mask(q_mask[t]), .r_new(r[t]),
      .hd_we(hd_we[t]), .hd_addr(hd_addr[t]), .hd_bit(hd_bit[t]),
      .uv_valid(uv_valid[t]), .uv_data(uv_data[t]),
      .out_valid(out_valid[t]), .out_ready(out_ready[t]), .out_data(out_data[t]));
  end

  nms_cnu #(.DEG(N_TILES)) u_cnu (
    .clk, .rst(qrst), .in_valid(s3_en), .q, .mask(q_mask), .syn(syn_s3),
    .out_valid(r_valid), .r);

  conv_check #(.N_TILES(N_TILES), .DEPTH(VZ_DEPTH), .NCHK(NCHK_Z)) u_conv (
    .clk, .rst(qrst), .ld, .hd_we, .hd_addr, .hd_bit, .syn(syn_z),
    .check_start(conv_start), .res_valid(conv_valid), .res_fail(conv_fail), .hd);

`ifndef SYNTHESIS
  a_mb_ready: assert property (@(posedge clk) disable iff (qrst)
    mb_pop |-> mb_valid) else $error("dxdz_unit: message buffer underflow");
`endif
endmodule
