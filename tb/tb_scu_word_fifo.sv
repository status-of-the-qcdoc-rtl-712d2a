// tb_scu_word_fifo: random push/pop traffic through the send/receive
// register FIFO, compared against a queue; checks the words, their order,
// that a full FIFO (DEPTH words) refuses input and that an empty one shows
// nothing.
`timescale 1ns/1ps
module tb_scu_word_fifo;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic iv, ir, ov, orr;
  logic [63:0] id, od;
  logic [63:0] q[$];
  int checks = 0, failures = 0;
  bit pop, push;

  scu_word_fifo dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
                     .out_valid(ov), .out_ready(orr), .out_data(od));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iv = 0; orr = 0; id = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!ov && ir, "empty after reset");
    for (int t = 0; t < 3000; t++) begin
      iv  = $urandom_range(1);
      orr = (t < 1000) ? ($urandom_range(3) == 0) : $urandom_range(1);
      id  = {$urandom, $urandom};
      #0.1;
      check(ir == (q.size() < 2), "in_ready matches occupancy");
      check(ov == (q.size() > 0), "out_valid matches occupancy");
      if (ov && q.size() > 0) check(od == q[0], "word order and value");
      pop  = ov && orr;
      push = iv && ir;
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(id);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
