// tb_mmu: self-checking testbench of the matrix multiplication unit.
//
// Fills behavioural activation and weight banks with random codes, loads
// per-column weight zero points (M_SETZ), runs W4A4 and W4A8 GeMM tiles and
// compares every INT32 result with a dot product computed here from the same
// codes and zero points. Also checks that a tile of M rows of KW words takes
// M*KW + 5 cycles from work to done (one word per cycle).
`timescale 1ns/1ps
module tb_mmu;
  import qd_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic work, done;
  instr_t cmd;
  logic act_re, wgt_re, ps_we;
  logic [8:0] act_addr;
  logic [7:0] wgt_addr, ps_addr;
  logic [ACT_W-1:0] act_data;
  logic [WGT_W-1:0] wgt_data;
  logic [PSUM_W-1:0] ps_data;

  logic [ACT_W-1:0]  actb [512];
  logic [WGT_W-1:0]  wgtb [256];
  logic [PSUM_W-1:0] psb  [256];

  mmu dut (.*);

  always_ff @(posedge clk) begin
    if (act_re) act_data <= actb[act_addr];
    if (wgt_re) wgt_data <= wgtb[wgt_addr];
    if (ps_we)  psb[ps_addr] <= ps_data;
  end

  int checks = 0, failures = 0;
  logic [3:0] zw [N_COLS];

  task automatic run(input logic [4:0] op, input int a, input int b, input int c,
                     input int m, input int kw, input int za);
    int cyc;
    cmd = '0;
    cmd.unit = U_MMU; cmd.op = op;
    cmd.a = 12'(a); cmd.b = 12'(b); cmd.c = 12'(c);
    cmd.n0 = 12'(m); cmd.n1 = 12'(kw); cmd.imm = 8'(za);
    @(negedge clk); work = 1;
    @(negedge clk); work = 0;
    cyc = 1;
    while (!done && cyc < 5000) begin @(negedge clk); cyc++; end
    checks++;
    if (op != M_SETZ && cyc != m * kw + 5) begin
      failures++;
      $display("FAIL latency %0d for M=%0d KW=%0d", cyc, m, kw);
    end
  endtask

  task automatic check_tile(input bit a8, input int a, input int b, input int c,
                            input int m, input int kw, input int za);
    for (int r = 0; r < m; r++)
      for (int n = 0; n < N_COLS; n++) begin
        longint acc = 0;
        for (int k = 0; k < kw; k++)
          for (int i = 0; i < (a8 ? K_LANES / 2 : K_LANES); i++) begin
            int av, wv;
            av = a8 ? int'(actb[a + r*kw + k][8*i +: 8]) : int'(actb[a + r*kw + k][4*i +: 4]);
            wv = int'(wgtb[b + k][n*AXI_DW + 4*i +: 4]);
            acc += longint'((av - za) * (wv - int'(zw[n])));
          end
        checks++;
        if ($signed(psb[c + r][32*n +: 32]) != 32'(acc)) begin
          failures++;
          if (failures < 10) $display("FAIL a8=%0d row %0d col %0d got %0d exp %0d", a8, r, n,
                                      $signed(psb[c + r][32*n +: 32]), acc);
        end
      end
  endtask

  initial begin : main
    work = 0; cmd = '0;
    for (int i = 0; i < 512; i++) for (int j = 0; j < ACT_W / 32; j++) actb[i][32*j +: 32] = $urandom;
    for (int i = 0; i < 256; i++) begin
      for (int j = 0; j < WGT_W / 32; j++) wgtb[i][32*j +: 32] = $urandom;
      psb[i] = '0;
    end
    for (int n = 0; n < N_COLS; n++) begin
      zw[n] = 4'($urandom % 16);
      wgtb[250][4*n +: 4] = zw[n];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(M_SETZ, 0, 250, 0, 1, 1, 0);
    run(M_GEMM_A4, 0, 0, 0, 8, 4, 7);
    check_tile(1'b0, 0, 0, 0, 8, 4, 7);
    run(M_GEMM_A8, 100, 20, 50, 5, 3, 131);
    check_tile(1'b1, 100, 20, 50, 5, 3, 131);
    run(M_GEMM_A4, 200, 40, 100, 16, 1, 0);
    check_tile(1'b0, 200, 40, 100, 16, 1, 0);
    run(M_GEMM_A8, 300, 60, 150, 1, 12, 255);
    check_tile(1'b1, 300, 60, 150, 1, 12, 255);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
