// tb_local_buffer: self-checking testbench of one local buffer bank.
//
// Random masked writes on both write ports (including same-address
// collisions, where port 1 wins on its enabled bits) and random reads on all
// read ports, compared with a shadow copy one cycle later.
`timescale 1ns/1ps
module tb_local_buffer;
  localparam int W = 64, D = 32, NR = 3, AW = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [1:0] we;
  logic [AW-1:0] waddr [2];
  logic [W-1:0] wdata [2], wmask [2];
  logic [NR-1:0] re;
  logic [AW-1:0] raddr [NR];
  logic [W-1:0] rdata [NR];
  logic [W-1:0] shadow [D];
  logic [W-1:0] expect_q [NR];
  logic [NR-1:0] re_q;
  int checks = 0, failures = 0;

  local_buffer #(.W(W), .DEPTH(D), .NR(NR)) dut (.*);

  initial begin
    we = '0; re = '0; re_q = '0;
    for (int p = 0; p < 2; p++) begin waddr[p] = '0; wdata[p] = '0; wmask[p] = '1; end
    for (int r = 0; r < NR; r++) raddr[r] = '0;
    // initialise every word through port 0
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 2'b01; waddr[0] = AW'(i); wdata[0] = {$urandom, $urandom}; wmask[0] = '1;
      shadow[i] = wdata[0];
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // check reads issued last cycle
      for (int r = 0; r < NR; r++)
        if (re_q[r]) begin
          checks++;
          if (rdata[r] !== expect_q[r]) begin
            failures++;
            if (failures < 10) $display("FAIL port %0d got %h exp %h", r, rdata[r], expect_q[r]);
          end
        end
      we = 2'($urandom);
      for (int p = 0; p < 2; p++) begin
        waddr[p] = AW'($urandom % 8);     // small range: frequent collisions
        wdata[p] = {$urandom, $urandom};
        wmask[p] = {$urandom, $urandom};
      end
      re = NR'($urandom);
      for (int r = 0; r < NR; r++) begin
        raddr[r] = AW'($urandom % D);
        expect_q[r] = shadow[raddr[r]];
      end
      re_q = re;
      for (int p = 0; p < 2; p++)
        if (we[p]) shadow[waddr[p]] = (shadow[waddr[p]] & ~wmask[p]) | (wdata[p] & wmask[p]);
    end
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
