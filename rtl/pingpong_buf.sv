// pingpong_buf: two-register (ping/pong) buffer between crossbar levels.
//
// Two slots are written alternately and read alternately, so one word can
// enter and one can leave in the same cycle and the stage runs at full rate
// while its in_ready depends only on registers (no combinational path from
// out_ready to in_ready). Interface: valid/ready on both sides. Latency one
// cycle. The paper names ping-pong buffers for the intermediate crossbar
// levels; the two-slot depth is this design's choice.
module pingpong_buf #(
  parameter int unsigned WIDTH = 8
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] din,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] dout
);
  logic [WIDTH-1:0] slot [2];
  logic [1:0]       full;
  logic             wsel, rsel;
  logic             push, pop;

  assign in_ready  = !full[wsel];
  assign out_valid = full[rsel];
  assign dout      = slot[rsel];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) slot[wsel] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      full <= '0; wsel <= 1'b0; rsel <= 1'b0;
    end else begin
      if (push) begin full[wsel] <= 1'b1; wsel <= !wsel; end
      if (pop)  begin full[rsel] <= 1'b0; rsel <= !rsel; end
    end
  end
endmodule
