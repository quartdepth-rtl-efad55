// tb_store_unit: self-checking testbench of the Store DMA unit.
//
// A small model of the cores' banks answers the unit's read requests one
// cycle later, as the real banks do. Store instructions copy a 40-word vector
// region of core 2 (80 beats, so two AXI bursts), a partial-sum region of
// core 7 and an activation region of core 0 into the behavioural AXI memory
// (random stalls on AW, W and B). The memory is then compared word by word
// with the bank model, and the test checks that nothing beyond each region
// was written and that done pulses once per instruction.
`timescale 1ns/1ps
module tb_store_unit;
  import qd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic work, done;
  instr_t cmd;
  logic [31:0] awaddr;
  logic [7:0] awlen;
  logic awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic [127:0] wdata;
  logic rd_en;
  buf_e rd_buf;
  logic [3:0] rd_core;
  logic [ADDR_W-1:0] rd_addr;
  logic [VEC_W-1:0] rd_data;

  store_unit dut (.clk, .rst_n, .work, .cmd, .done, .awaddr, .awlen, .awvalid, .awready, .wdata,
    .wlast, .wvalid, .wready, .bvalid, .bready, .rd_en, .rd_buf, .rd_core, .rd_addr, .rd_data);

  logic [127:0] m_rdata [2];
  logic [1:0] m_arready, m_rlast, m_rvalid;
  axi_mem_model #(.WORDS(1024), .STALL(1'b1)) mem (
    .clk, .rst_n, .araddr('{32'd0, 32'd0}), .arlen('{8'd0, 8'd0}), .arvalid(2'b00),
    .arready(m_arready), .rdata(m_rdata), .rlast(m_rlast), .rvalid(m_rvalid), .rready(2'b00),
    .awaddr, .awlen, .awvalid, .awready, .wdata, .wlast, .wvalid, .wready, .bvalid, .bready);

  logic [VEC_W-1:0] bank [8][4][64];
  always @(posedge clk) if (rd_en) rd_data <= bank[rd_core[2:0]][rd_buf][rd_addr[5:0]];

  int checks = 0, failures = 0, bursts = 0;
  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask
  always @(posedge clk) if (rst_n && awvalid && awready) bursts++;

  task automatic run(input buf_e b, input int core, input int ddr, input int a, input int n);
    int t;
    cmd = '0; cmd.unit = U_STORE; cmd.bsel = b; cmd.core = 4'(core);
    cmd.ddr = 32'(ddr * 16); cmd.a = 12'(a); cmd.n0 = 12'(n);
    bursts = 0;
    @(negedge clk); work = 1;
    @(negedge clk); work = 0;
    t = 0;
    while (!done && t < 5000) begin @(negedge clk); t++; end
    chk(done, "done never pulsed");
    @(negedge clk);
    chk(!done, "done longer than one cycle");
  endtask

  initial begin
    work = 0; cmd = '0; rd_data = '0;
    for (int c = 0; c < 8; c++) for (int b = 0; b < 4; b++) for (int i = 0; i < 64; i++)
      bank[c][b][i] = {8{$urandom}};
    for (int i = 0; i < 1024; i++) mem.mem[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(B_VEC, 2, 100, 4, 40);
    chk(bursts == 2, $sformatf("vector store used %0d bursts", bursts));
    for (int i = 0; i < 40; i++) begin
      chk(mem.mem[100 + 2*i] == bank[2][B_VEC][4 + i][127:0], $sformatf("vec word %0d low", i));
      chk(mem.mem[101 + 2*i] == bank[2][B_VEC][4 + i][255:128], $sformatf("vec word %0d high", i));
    end
    chk(mem.mem[180] == '0 && mem.mem[99] == '0, "vector store overran");
    run(B_PSUM, 7, 300, 0, 5);
    for (int i = 0; i < 5; i++)
      chk({mem.mem[301 + 2*i], mem.mem[300 + 2*i]} == bank[7][B_PSUM][i], $sformatf("psum word %0d", i));
    run(B_ACT, 0, 400, 9, 6);
    for (int i = 0; i < 6; i++) chk(mem.mem[400 + i] == bank[0][B_ACT][9 + i][127:0], $sformatf("act word %0d", i));
    chk(mem.mem[406] == '0, "activation store overran");
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
