// tb_inst_fifo: self-checking testbench of the instruction FIFO.
//
// Pushes and pops at random against a queue kept in the testbench, checks
// the head, empty, full and count outputs every cycle, and fills the FIFO to
// exercise the full flag.
`timescale 1ns/1ps
module tb_inst_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, full, empty;
  logic [W-1:0] din, dout;
  logic [$clog2(D):0] count;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0, fulls = 0;

  inst_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    push = 0; pop = 0; din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      chk(empty == (q.size() == 0), "empty");
      chk(full == (q.size() == D), "full");
      chk(count == ($clog2(D)+1)'(q.size()), "count");
      if (q.size() > 0) chk(dout == q[0], $sformatf("head %h exp %h", dout, q[0]));
      if (full) fulls++;
      // phase 1 favours pushes so the FIFO fills up
      push = !full && ($urandom % 100 < ((t < 1000) ? 70 : 40));
      pop  = !empty && ($urandom % 100 < ((t < 1000) ? 30 : 60));
      din  = W'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    chk(fulls > 0, "FIFO never became full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
