// sync_fifo: first-word-fall-through FIFO with a registered output and an
// input-to-output bypass.
//
// The storage array is written and read like a simple dual-port block RAM;
// the head of the queue sits in an output register. When the queue is empty
// an incoming word is bypassed straight into that register, so it appears on
// dout one cycle after it was pushed (write-first behaviour, as the paper
// describes for the crossbar FIFOs). Interface: valid/ready on both sides;
// a word moves when valid and ready are both high on a rising clock edge.
// in_ready is high while fewer than DEPTH words are held. Used for the
// D_X,D_Z check-message buffer, the crossbar queues and the U,V tile queues.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] din,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] dout,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH <= 2) ? 1 : $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [$clog2(DEPTH+1)-1:0] mcnt;   // words in the array
  logic             ov;               // output register holds a word
  logic             push, take, refill, from_mem, bypass, mem_wr;

  assign in_ready  = (32'(mcnt) + 32'(ov)) < DEPTH;
  assign push      = in_valid && in_ready;
  assign take      = ov && out_ready;
  assign refill    = !ov || take;
  assign from_mem  = refill && (mcnt != 0);
  assign bypass    = refill && (mcnt == 0) && push;
  assign mem_wr    = push && !bypass;
  assign out_valid = ov;
  assign count     = $bits(count)'(32'(mcnt) + 32'(ov));

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (mem_wr) mem[wp] <= din;
    if (from_mem) dout <= mem[rp];
    else if (bypass) dout <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0; rp <= '0; mcnt <= '0; ov <= 1'b0;
    end else begin
      if (mem_wr) wp <= inc(wp);
      if (from_mem) rp <= inc(rp);
      mcnt <= mcnt + (mem_wr ? 1'b1 : 1'b0) - (from_mem ? 1'b1 : 1'b0);
      if (refill) ov <= from_mem || bypass;
    end
  end
endmodule
