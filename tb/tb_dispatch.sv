// tb_dispatch: self-checking testbench of the instruction dispatcher.
//
// Places a program of 40 instructions with random target units in the memory
// model (the 40th has its last bit set, followed by junk), starts the
// dispatcher, and models the four FIFOs as queues that are drained slowly and
// report full at a small depth so that back-pressure occurs. Checks that each
// unit receives exactly its instructions in program order, that nothing after
// the last instruction is pushed, and that fetch_done rises.
`timescale 1ns/1ps
module tb_dispatch;
  import qd_pkg::*;
  localparam int N = 40, QD = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, fetch_done;
  logic [31:0] base;
  logic [31:0] araddr;
  logic [7:0]  arlen;
  logic arvalid, arready, rlast, rvalid, rready;
  logic [127:0] rdata;
  logic [3:0] push, fifo_full;
  instr_t push_data;

  logic [31:0] m_araddr [2];
  logic [7:0]  m_arlen [2];
  logic [1:0]  m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic [127:0] m_rdata [2];
  logic bvalid, awready, wready;

  dispatch dut (.clk, .rst_n, .start, .base, .fetch_done, .araddr, .arlen, .arvalid, .arready,
                .rdata, .rlast, .rvalid, .rready, .push, .push_data, .fifo_full);

  axi_mem_model #(.WORDS(256), .STALL(1'b1)) mem (
    .clk, .rst_n, .araddr(m_araddr), .arlen(m_arlen), .arvalid(m_arvalid), .arready(m_arready),
    .rdata(m_rdata), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready),
    .awaddr(32'd0), .awlen(8'd0), .awvalid(1'b0), .awready, .wdata('0), .wlast(1'b0),
    .wvalid(1'b0), .wready, .bvalid, .bready(1'b0));

  assign m_araddr  = '{araddr, 32'd0};
  assign m_arlen   = '{arlen, 8'd0};
  assign m_arvalid = {1'b0, arvalid};
  assign arready   = m_arready[0];
  assign rdata     = m_rdata[0];
  assign rlast     = m_rlast[0];
  assign rvalid    = m_rvalid[0];
  assign m_rready  = {1'b0, rready};

  instr_t prog [64];
  instr_t expq [4][$];
  int     qlen [4];
  int checks = 0, failures = 0, bp = 0;

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  always_comb for (int u = 0; u < 4; u++) fifo_full[u] = (qlen[u] >= QD);

  always @(posedge clk) if (rst_n) begin
    for (int u = 0; u < 4; u++) begin
      if (push[u]) begin
        if (expq[u].size() == 0) chk(0, $sformatf("unexpected push to unit %0d", u));
        else chk(push_data == expq[u].pop_front(), $sformatf("wrong instruction for unit %0d", u));
        chk(!fifo_full[u], "push while full");
      end
      if (rvalid && !rready) bp++;
    end
    // slow drain
    for (int u = 0; u < 4; u++) begin
      int nl;
      nl = qlen[u] + int'(push[u]);
      if (nl > 0 && $urandom % 8 == 0) nl--;
      qlen[u] <= nl;
    end
  end

  initial begin
    start = 0; base = 32'h100;
    for (int u = 0; u < 4; u++) qlen[u] = 0;
    for (int i = 0; i < 64; i++) begin
      prog[i] = instr_t'({$urandom, $urandom, $urandom, $urandom});
      prog[i].last = (i == N - 1);
      if (i < N) expq[prog[i].unit].push_back(prog[i]);
      mem.mem[16 + i] = prog[i];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int t = 0; t < 3000 && !fetch_done; t++) @(negedge clk);
    chk(fetch_done, "fetch_done never rose");
    repeat (20) @(negedge clk);
    for (int u = 0; u < 4; u++) chk(expq[u].size() == 0, $sformatf("unit %0d missing %0d instructions", u, expq[u].size()));
    chk(bp > 0, "back-pressure never happened");
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
