// tb_load_unit: self-checking testbench of the Load DMA unit.
//
// Runs Load instructions against the behavioural AXI memory (random stalls):
// a per-core weight load (8 beats per bank word), a broadcast vector load
// long enough to need several AXI bursts (2 beats per word), and an
// activation load (1 beat per word). Every bank write is captured into a
// shadow of each core's banks and compared with the memory contents; the
// test also checks that a broadcast write selects every core, a per-core one
// exactly its core, and that the unit's done pulse follows the last write.
`timescale 1ns/1ps
module tb_load_unit;
  import qd_pkg::*;
  localparam int NC = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic work, done;
  instr_t cmd;
  logic [31:0] araddr;
  logic [7:0] arlen;
  logic arvalid, arready, rlast, rvalid, rready;
  logic [127:0] rdata;
  logic wr_en;
  buf_e wr_buf;
  logic [NC-1:0] wr_cores;
  logic [ADDR_W-1:0] wr_addr;
  logic [WGT_W-1:0] wr_data;

  load_unit #(.NUM_CORES(NC)) dut (.clk, .rst_n, .work, .cmd, .done, .araddr, .arlen, .arvalid,
    .arready, .rdata, .rlast, .rvalid, .rready, .wr_en, .wr_buf, .wr_cores, .wr_addr, .wr_data);

  logic [127:0] m_rdata [2];
  logic [1:0] m_arready, m_rlast, m_rvalid;
  logic awready, wready, bvalid;
  axi_mem_model #(.WORDS(1024), .STALL(1'b1)) mem (
    .clk, .rst_n, .araddr('{araddr, 32'd0}), .arlen('{arlen, 8'd0}), .arvalid({1'b0, arvalid}),
    .arready(m_arready), .rdata(m_rdata), .rlast(m_rlast), .rvalid(m_rvalid), .rready({1'b0, rready}),
    .awaddr(32'd0), .awlen(8'd0), .awvalid(1'b0), .awready, .wdata('0), .wlast(1'b0),
    .wvalid(1'b0), .wready, .bvalid, .bready(1'b0));
  assign arready = m_arready[0];
  assign rdata = m_rdata[0];
  assign rlast = m_rlast[0];
  assign rvalid = m_rvalid[0];

  logic [WGT_W-1:0] shadow [NC][4][64];
  int writes = 0, bursts = 0;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (wr_en) begin
      writes++;
      for (int c = 0; c < NC; c++) if (wr_cores[c]) shadow[c][wr_buf][wr_addr[5:0]] <= wr_data;
    end
    if (arvalid && arready) bursts++;
  end

  task automatic run(input buf_e b, input int core, input bit bc, input int ddr, input int a,
                     input int n);
    int t;
    cmd = '0; cmd.unit = U_LOAD; cmd.bsel = b; cmd.core = 4'(core); cmd.bcast = bc;
    cmd.ddr = 32'(ddr * 16); cmd.c = 12'(a); cmd.n0 = 12'(n);
    writes = 0; bursts = 0;
    @(negedge clk); work = 1;
    @(negedge clk); work = 0;
    t = 0;
    while (!done && t < 5000) begin @(negedge clk); t++; end
    chk(done, "done never pulsed");
    chk(writes == n, $sformatf("%0d bank writes for %0d words", writes, n));
    @(negedge clk);
  endtask

  function automatic bit word_ok(input int c, input buf_e b, input int addr, input int ddr, input int bpw);
    for (int j = 0; j < bpw; j++)
      if (shadow[c][b][addr][128*j +: 128] != mem.mem[ddr + j]) return 0;
    return 1;
  endfunction

  initial begin
    work = 0; cmd = '0;
    for (int c = 0; c < NC; c++) for (int b = 0; b < 4; b++) for (int i = 0; i < 64; i++) shadow[c][b][i] = '0;
    for (int i = 0; i < 1024; i++) mem.mem[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1;
    // per-core weight load to core 3: 3 words x 8 beats
    run(B_WGT, 3, 0, 100, 5, 3);
    for (int i = 0; i < 3; i++) chk(word_ok(3, B_WGT, 5 + i, 100 + 8*i, 8), $sformatf("wgt word %0d", i));
    for (int c = 0; c < NC; c++) if (c != 3) chk(shadow[c][B_WGT][5] == '0, "per-core load wrote another core");
    // broadcast vector load: 40 words x 2 beats = 80 beats -> 2 bursts
    run(B_VEC, 0, 1, 300, 10, 40);
    chk(bursts == 2, $sformatf("vector load used %0d bursts", bursts));
    for (int c = 0; c < NC; c++)
      for (int i = 0; i < 40; i++) chk(word_ok(c, B_VEC, 10 + i, 300 + 2*i, 2), $sformatf("vec core %0d word %0d", c, i));
    // per-core activation load, core 6
    run(B_ACT, 6, 0, 600, 0, 7);
    for (int i = 0; i < 7; i++) chk(shadow[6][B_ACT][i][127:0] == mem.mem[600 + i], $sformatf("act word %0d", i));
    chk(shadow[5][B_ACT][0] == '0, "act load wrote core 5");
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
