// tb_fifo_xbar: sends random messages from every input of a 5-input,
// 3-output and of a 12-input, 12-output crossbar (non-power-of-two sizes,
// padded internally) under random output back-pressure; checks that every
// message arrives exactly once at the output its tag names, that messages
// from one input to one output keep their order, and that a single message
// crosses an empty network in K+1 cycles.
`timescale 1ns/1ps
module tb_fifo_xbar;
  import gari_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = !clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam int NI_A = 5, NO_A = 3, NI_B = 12, NO_B = 12;
  logic [NI_A-1:0] iva, ira; logic [NO_A-1:0] ova, ora;
  xb_item_t ida [NI_A]; xb_item_t oda [NO_A];
  logic [NI_B-1:0] ivb, irb; logic [NO_B-1:0] ovb, orb;
  xb_item_t idb [NI_B]; xb_item_t odb [NO_B];

  fifo_xbar #(.NIN(NI_A), .NOUT(NO_A), .IN_DEPTH(8), .OUT_DEPTH(4)) dut_a (
    .clk, .rst, .in_valid(iva), .in_ready(ira), .in_data(ida),
    .out_valid(ova), .out_ready(ora), .out_data(oda));
  fifo_xbar #(.NIN(NI_B), .NOUT(NO_B), .IN_DEPTH(8), .OUT_DEPTH(4)) dut_b (
    .clk, .rst, .in_valid(ivb), .in_ready(irb), .in_data(idb),
    .out_valid(ovb), .out_ready(orb), .out_data(odb));

  // message id = source * 4096 + sequence; value carries the low bits, addr the source
  int sent_a = 0, got_a = 0, sent_b = 0, got_b = 0;
  int last_seq_a [NI_A][NO_A];
  int last_seq_b [NI_B][NO_B];
  int seq_a [NI_A], seq_b [NI_B];

  initial begin
    iva = 0; ivb = 0; ora = 0; orb = 0;
    foreach (ida[i]) ida[i] = '0;
    foreach (idb[i]) idb[i] = '0;
    foreach (seq_a[i]) seq_a[i] = 0;
    foreach (seq_b[i]) seq_b[i] = 0;
    foreach (last_seq_a[i, j]) last_seq_a[i][j] = -1;
    foreach (last_seq_b[i, j]) last_seq_b[i][j] = -1;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    // latency through an empty network (K = 3 for 5 inputs)
    @(negedge clk);
    iva[0] = 1; ida[0] = '{dest: 2, addr: 0, value: 0};
    seq_a[0] = 1;
    ora = '1;
    @(negedge clk); iva[0] = 0;
    repeat (3) @(negedge clk);
    check(ova[2] && oda[2].addr == 0, "latency K+1 cycles");
    @(negedge clk);
    last_seq_a[0][2] = 0; got_a = 1; sent_a = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      for (int i = 0; i < NI_A; i++) begin
        iva[i] = (n < 3000) && ($urandom % 3 == 0) && ira[i];
        ida[i] = '{dest: DEST_W'($urandom % NO_A), addr: ADDR_W'(i), value: var_t'(seq_a[i])};
      end
      for (int i = 0; i < NI_B; i++) begin
        ivb[i] = (n < 3000) && ($urandom % 3 == 0) && irb[i];
        idb[i] = '{dest: DEST_W'($urandom % NO_B), addr: ADDR_W'(i), value: var_t'(seq_b[i])};
      end
      ora = NO_A'($urandom) | NO_A'($urandom);
      orb = NO_B'($urandom) | NO_B'($urandom);
      #1;
      for (int o = 0; o < NO_A; o++) if (ova[o] && ora[o]) begin
        automatic int s = int'(oda[o].addr);
        got_a++;
        check(last_seq_a[s][o] < 0 || ((int'(oda[o].value) - last_seq_a[s][o] + 500) % 500) inside {[1:250]}, "order A");
        last_seq_a[s][o] = int'(oda[o].value);
      end
      for (int o = 0; o < NO_B; o++) if (ovb[o] && orb[o]) begin
        automatic int s = int'(odb[o].addr);
        got_b++;
        check(last_seq_b[s][o] < 0 || ((int'(odb[o].value) - last_seq_b[s][o] + 500) % 500) inside {[1:250]}, "order B");
        last_seq_b[s][o] = int'(odb[o].value);
      end
      for (int i = 0; i < NI_A; i++) if (iva[i]) begin sent_a++; seq_a[i] = (seq_a[i] + 1) % 500; end
      for (int i = 0; i < NI_B; i++) if (ivb[i]) begin sent_b++; seq_b[i] = (seq_b[i] + 1) % 500; end
    end
    // destination is checked by the output index itself: count per output
    check(sent_a == got_a, $sformatf("A delivered %0d of %0d", got_a, sent_a));
    check(sent_b == got_b, $sformatf("B delivered %0d of %0d", got_b, sent_b));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // every delivered message must be at the output its tag names
  always @(posedge clk) if (!rst) begin
    for (int o = 0; o < NO_A; o++) if (ova[o] && ora[o]) begin
      checks++; if (int'(oda[o].dest) != o) begin failures++; $display("FAIL: A wrong output"); end
    end
    for (int o = 0; o < NO_B; o++) if (ovb[o] && orb[o]) begin
      checks++; if (int'(odb[o].dest) != o) begin failures++; $display("FAIL: B wrong output"); end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
