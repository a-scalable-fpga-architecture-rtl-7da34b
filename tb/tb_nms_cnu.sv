// tb_nms_cnu: random checks of degree 7 with random masks, magnitudes up to
// the 10-bit limit and random syndromes, fed one per cycle; every output is
// compared two cycles later with an integer normalized min-sum model
// (alpha = 3/4, messages saturated to +-127, masked inputs ignored).
`timescale 1ns/1ps
module tb_nms_cnu;
  import gari_pkg::*;
  localparam int DEG = 7;
  logic clk = 0, rst = 1;
  always #5 clk = !clk;
  logic in_valid = 0, syn = 0, out_valid;
  var_t q [DEG];
  logic [DEG-1:0] mask = '0;
  msg_t r [DEG];
  int checks = 0, failures = 0;

  nms_cnu #(.DEG(DEG)) dut (.*);

  typedef struct { int q[DEG]; bit m[DEG]; bit s; } vec_t;
  vec_t pend [$];

  function automatic int expect_r(vec_t v, int i);
    int m = 511, sg = v.s;
    for (int j = 0; j < DEG; j++) if (j != i && v.m[j]) begin
      int a = v.q[j] < 0 ? -v.q[j] : v.q[j];
      if (a < m) m = a;
      if (v.q[j] < 0) sg ^= 1;
    end
    m = (m * 3) / 4;
    if (m > 127) m = 127;
    return sg ? -m : m;
  endfunction

  initial begin
    foreach (q[i]) q[i] = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 3000; n++) begin
      vec_t v;
      @(negedge clk);
      in_valid = (n < 2990);
      v.s = 1'($urandom);
      for (int i = 0; i < DEG; i++) begin
        automatic int lim = ($urandom % 4 == 0) ? 511 : 60;
        v.q[i] = int'($urandom % (2 * lim + 1)) - lim;
        v.m[i] = ($urandom % 5 != 0);
        q[i] = var_t'(v.q[i]);
        mask[i] = v.m[i];
      end
      syn = v.s;
      if (in_valid) pend.push_back(v);
      @(posedge clk); #1;
      if (out_valid) begin
        vec_t e;
        e = pend.pop_front();
        for (int i = 0; i < DEG; i++) if (e.m[i]) begin
          checks++;
          if (int'(r[i]) != expect_r(e, i)) begin
            failures++;
            if (failures < 5) $display("FAIL: r[%0d]=%0d expected %0d", i, r[i], expect_r(e, i));
          end
        end
      end
    end
    checks++;
    if (pend.size() > 2) begin failures++; $display("FAIL: outputs missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
