// dxdz_tile: one tile of the D_X,D_Z (serial) unit.
//
// Holds, for the subset of variables mapped to this tile, the value memories
// V^DX and V^DZ (running totals of the ebar_Z and ebar_X variables), the
// calibration memory C with the input LLRs of both matrices (D_X entries at
// 0..VX_DEPTH-1, D_Z entries after them), and a tag memory that tells where
// each variable goes in the U,V unit. Per check it reads one variable, forms
// the variable-to-check message q = value - old check message, hands q to
// the shared CNU, and when the new message r comes back writes q + r to the
// value memory. On the last touch of a variable in a step (write-enable ROM
// bit) the new total is also written to the hard-decision register (D_Z only)
// and queued for the U,V unit with its tag.
//
// Step select: the value memory of the matrix being processed takes local
// writes; the other one takes totals returned by the U,V unit (uv_*), which
// is the paper's duplicated-memory scheme. Source select: rd_calib reads C
// instead of V (first touch in the first iteration).
//
// Release queue: totals are held until the end of the step that produced
// them (step_end), then released to the crossbar; the tile counts what it
// queued per step so that only finished steps are released. This queue is
// this design's reading of "stored in the input queues ... until the decoding
// iteration is completed".
//
// Timing (cycle numbers relative to the control-ROM output, S1):
//   S1 rd_* inputs; S2 memory data, msg_old input; S3 q/q_mask outputs to
//   CNU; S5 r_new input, memory write, hd_* and queue push.
module dxdz_tile
  import gari_pkg::*;
#(
  parameter int unsigned TILE_ID  = 0,
  parameter int unsigned VX_DEPTH = 345,
  parameter int unsigned VZ_DEPTH = 286,
  parameter int unsigned OQ_DEPTH = 512
) (
  input  logic     clk,
  input  logic     rst,
  input  load_t    ld,
  input  logic     step,        // 0: D_X step, 1: D_Z step
  input  logic     step_end,    // one-cycle pulse closing a step
  // S1: read request for the current check
  input  logic     rd_en,       // a check is being issued
  input  logic     rd_mask,     // this tile takes part in it
  input  logic     rd_calib,    // read C instead of V
  input  logic     rd_last,     // last touch of the variable in this step
  input  logic [8:0] rd_addr,
  // S2: old check message from the message buffer (0 in iteration 1)
  input  msg_t     msg_old,
  // S3: to CNU
  output var_t     q,
  output logic     q_mask,
  // S5: new message from CNU
  input  msg_t     r_new,
  // hard-decision write (D_Z, last touch)
  output logic     hd_we,
  output logic [8:0] hd_addr,
  output logic     hd_bit,
  // totals returned from the U,V unit: addr = {mat, var[8:0]}
  input  logic     uv_valid,
  input  xb_item_t uv_data,
  // totals sent to the U,V unit
  output logic     out_valid,
  input  logic     out_ready,
  output xb_item_t out_data
);
  localparam int unsigned CDEPTH = VX_DEPTH + VZ_DEPTH;
  localparam int unsigned TDEPTH = VX_DEPTH + VZ_DEPTH;

  var_t vx_mem [VX_DEPTH];
  var_t vz_mem [VZ_DEPTH];
  llr_t c_mem  [CDEPTH];
  tag_t t_mem  [TDEPTH];

  // ---- loading of C and tags ----
  always_ff @(posedge clk) begin
    if (ld.valid && 32'(ld.tile) == TILE_ID) begin
      if (ld.target == LD_LLR_DX && 32'(ld.addr) < CDEPTH)
        c_mem[ld.addr] <= llr_t'(ld.data[LLR_W-1:0]);
      if (ld.target == LD_DXTAG) begin
        if (!ld.addr[9] && 32'(ld.addr[8:0]) < VX_DEPTH)
          t_mem[ld.addr[8:0]] <= tag_from_data(ld.data);
        if (ld.addr[9] && 32'(ld.addr[8:0]) < VZ_DEPTH)
          t_mem[32'(ld.addr[8:0]) + VX_DEPTH] <= tag_from_data(ld.data);
      end
    end
  end

  // ---- S1 -> S2: memory reads ----
  logic       s2_en, s2_mask, s2_calib, s2_last, s2_mat;
  logic [8:0] s2_addr;
  var_t       s2_vx, s2_vz;
  llr_t       s2_c;
  tag_t       s2_tag;

  always_ff @(posedge clk) begin
    s2_vx  <= vx_mem[32'(rd_addr) % VX_DEPTH];
    s2_vz  <= vz_mem[32'(rd_addr) % VZ_DEPTH];
    s2_c   <= c_mem[step ? 32'(rd_addr) % VZ_DEPTH + VX_DEPTH : 32'(rd_addr) % VX_DEPTH];
    s2_tag <= t_mem[step ? 32'(rd_addr) % VZ_DEPTH + VX_DEPTH : 32'(rd_addr) % VX_DEPTH];
    s2_addr  <= rd_addr;
    s2_calib <= rd_calib;
    s2_last  <= rd_last;
    s2_mat   <= step;
  end

  // ---- S2 -> S3: subtract old message ----
  var_t       s2_val;
  logic       s3_en, s3_mask, s3_last, s3_mat;
  logic [8:0] s3_addr;
  tag_t       s3_tag;

  always_comb begin
    if (s2_calib) s2_val = var_t'(s2_c);
    else          s2_val = s2_mat ? s2_vz : s2_vx;
  end

  always_ff @(posedge clk) begin
    q       <= sat_var((VAR_W+2)'(s2_val) - (VAR_W+2)'(msg_old));
    s3_addr <= s2_addr;
    s3_last <= s2_last;
    s3_mat  <= s2_mat;
    s3_tag  <= s2_tag;
  end
  assign q_mask = s3_mask;

  // ---- S3 -> S5: wait for the CNU (two stages) ----
  var_t       s4_q, s5_q;
  logic       s4_en, s5_en, s4_last, s5_last, s4_mat, s5_mat;
  logic [8:0] s4_addr, s5_addr;
  tag_t       s4_tag, s5_tag;

  always_ff @(posedge clk) begin
    s4_q <= q;        s5_q <= s4_q;
    s4_last <= s3_last; s5_last <= s4_last;
    s4_mat <= s3_mat;   s5_mat <= s4_mat;
    s4_addr <= s3_addr; s5_addr <= s4_addr;
    s4_tag <= s3_tag;   s5_tag <= s4_tag;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      s2_en <= 1'b0; s2_mask <= 1'b0; s3_en <= 1'b0; s3_mask <= 1'b0;
      s4_en <= 1'b0; s5_en <= 1'b0;
    end else begin
      s2_en   <= rd_en && rd_mask;
      s2_mask <= rd_en && rd_mask;
      s3_en   <= s2_en;
      s3_mask <= s2_mask;
      s4_en   <= s3_en;
      s5_en   <= s4_en;
    end
  end

  // ---- S5: add and write back ----
  var_t l_new;
  assign l_new = sat_var((VAR_W+2)'(s5_q) + (VAR_W+2)'(r_new));

  logic vx_local, vz_local;
  assign vx_local = s5_en && !s5_mat;
  assign vz_local = s5_en &&  s5_mat;

  always_ff @(posedge clk) begin
    // step select: processed matrix takes local updates, the other U,V data
    if (!step) begin
      if (vx_local) vx_mem[32'(s5_addr) % VX_DEPTH] <= l_new;
      if (uv_valid && uv_data.addr[9])
        vz_mem[32'(uv_data.addr[8:0]) % VZ_DEPTH] <= uv_data.value;
    end else begin
      if (vz_local) vz_mem[32'(s5_addr) % VZ_DEPTH] <= l_new;
      if (uv_valid && !uv_data.addr[9])
        vx_mem[32'(uv_data.addr[8:0]) % VX_DEPTH] <= uv_data.value;
    end
  end

  assign hd_we   = vz_local && s5_last;
  assign hd_addr = s5_addr;
  assign hd_bit  = l_new[VAR_W-1];

  // ---- release queue towards the U,V unit ----
  logic     push;
  xb_item_t push_data;
  logic     q_valid, oq_ready;
  logic [15:0] pending, credits;

  assign push = s5_en && s5_last && s5_tag.valid;
  assign push_data = '{dest: s5_tag.dest, addr: s5_tag.addr, value: l_new};

  sync_fifo #(.WIDTH($bits(xb_item_t)), .DEPTH(OQ_DEPTH)) u_oq (
    .clk, .rst,
    .in_valid(push), .in_ready(oq_ready), .din(push_data),
    .out_valid(q_valid), .out_ready(out_ready && credits != 0),
    .dout(out_data), .count());

  assign out_valid = q_valid && credits != 0;

  always_ff @(posedge clk) begin
    if (rst) begin
      pending <= '0; credits <= '0;
    end else begin
      if (step_end) pending <= push ? 16'd1 : 16'd0;
      else if (push) pending <= pending + 1'b1;
      credits <= credits - ((out_valid && out_ready) ? 16'd1 : 16'd0)
                         + (step_end ? pending : 16'd0);
    end
  end

`ifndef SYNTHESIS
  a_oq_room: assert property (@(posedge clk) disable iff (rst)
    push |-> oq_ready) else $error("dxdz_tile: release queue overflow");
  a_uv_target: assert property (@(posedge clk) disable iff (rst)
    uv_valid |-> uv_data.addr[9] != step)
    else $error("dxdz_tile: U,V return into the memory being processed");
`endif
endmodule
