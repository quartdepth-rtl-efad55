// tb_quartdepth_top: end-to-end test of the whole accelerator at its default
// size (8 cores, 16-deep instruction FIFOs), also used as the full-size test.
//
// Off-chip memory is the behavioural AXI model (random stalls on all
// channels). The test writes one program into it and runs it:
//   * Load: per-core INT4 weight tiles (with weight zero points), broadcast
//     INT4 and INT8 activation tiles and broadcast FP32 parameter vectors;
//   * MMU: set zero points, one W4A4 GeMM tile, then one W4A8 tile (a
//     precision mode switch between back-to-back instructions);
//   * VCU: dequantise both tiles, LogNP polish, quantise to INT8, unpolish,
//     ReLU, dequantise the INT8 codes and a chain of additions;
//   * Store: partial sums of cores 0 and 7 and every VCU result of core 5.
// Every stored word is compared with a reference computed here from the
// input data (integer GeMM exactly, FP32 operations with correctly rounded
// reals, log-domain functions within a tolerance). The test also counts how
// often the mechanisms of the design occurred and fails if one never did:
// units running concurrently (load/MMU/VCU/store overlap), instructions held
// by the synchronizer for a missing token, a full instruction FIFO stalling
// the fetch, AXI stalls, per-core and broadcast loads and the A4->A8 switch.
`timescale 1ns/1ps
module tb_quartdepth_top;
  import qd_pkg::*;
  import tb_util_pkg::*;

  localparam int NC = 8, KW = 2, M = 4;
  localparam int PROG = 0, WGT = 256, ACT4 = 512, ACT8 = 520, PAR = 600, OUT = 1024;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, done;
  logic [31:0] i_araddr, l_araddr, s_awaddr;
  logic [7:0]  i_arlen, l_arlen, s_awlen;
  logic i_arvalid, i_arready, i_rlast, i_rvalid, i_rready;
  logic l_arvalid, l_arready, l_rlast, l_rvalid, l_rready;
  logic s_awvalid, s_awready, s_wlast, s_wvalid, s_wready, s_bvalid, s_bready;
  logic [127:0] i_rdata, l_rdata, s_wdata;
  logic [3:0] unit_busy, unit_blocked;

  quartdepth_top dut (
    .clk, .rst_n, .start, .prog_base(32'(PROG * 16)), .done,
    .i_araddr, .i_arlen, .i_arvalid, .i_arready, .i_rdata, .i_rlast, .i_rvalid, .i_rready,
    .l_araddr, .l_arlen, .l_arvalid, .l_arready, .l_rdata, .l_rlast, .l_rvalid, .l_rready,
    .s_awaddr, .s_awlen, .s_awvalid, .s_awready, .s_wdata, .s_wlast, .s_wvalid, .s_wready,
    .s_bvalid, .s_bready, .unit_busy, .unit_blocked);

  logic [127:0] m_rdata [2];
  logic [1:0] m_arready, m_rlast, m_rvalid;
  axi_mem_model #(.WORDS(2048), .STALL(1'b1)) mem (
    .clk, .rst_n,
    .araddr('{i_araddr, l_araddr}), .arlen('{i_arlen, l_arlen}), .arvalid({l_arvalid, i_arvalid}),
    .arready(m_arready), .rdata(m_rdata), .rlast(m_rlast), .rvalid(m_rvalid),
    .rready({l_rready, i_rready}),
    .awaddr(s_awaddr), .awlen(s_awlen), .awvalid(s_awvalid), .awready(s_awready),
    .wdata(s_wdata), .wlast(s_wlast), .wvalid(s_wvalid), .wready(s_wready),
    .bvalid(s_bvalid), .bready(s_bready));
  assign {l_arready, i_arready} = m_arready;
  assign {l_rlast, i_rlast}     = m_rlast;
  assign {l_rvalid, i_rvalid}   = m_rvalid;
  assign i_rdata = m_rdata[0];
  assign l_rdata = m_rdata[1];

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  // ------------------------------------------------------------ stimulus data
  logic [127:0] act4 [M*KW], act8 [M*KW];
  logic [3:0]   w [NC][KW][N_COLS][K_LANES];
  logic [3:0]   zw [NC][N_COLS];
  real          par [6][N_COLS];   // scale, alpha, log2 alpha, 1/s, zp, scale2
  instr_t       prog [$];

  function automatic instr_t ins(input unit_e u, input logic [4:0] op, input logic [3:0] wt,
                                 input logic [3:0] sg);
    instr_t i;
    i = '0; i.unit = u; i.op = op; i.wait_m = wt; i.sig_m = sg;
    return i;
  endfunction
  function automatic instr_t ld(input buf_e b, input int core, input bit bc, input int ddr,
                                input int a, input int n, input logic [3:0] sg);
    instr_t i;
    i = ins(U_LOAD, 5'd0, 4'd0, sg);
    i.bsel = b; i.core = 4'(core); i.bcast = bc; i.ddr = 32'(ddr * 16);
    i.c = 12'(a); i.n0 = 12'(n);
    return i;
  endfunction
  function automatic instr_t st(input buf_e b, input int core, input int ddr, input int a,
                                input int n, input logic [3:0] wt);
    instr_t i;
    i = ins(U_STORE, 5'd0, wt, 4'd0);
    i.bsel = b; i.core = 4'(core); i.ddr = 32'(ddr * 16); i.a = 12'(a); i.n0 = 12'(n);
    return i;
  endfunction
  function automatic instr_t mm(input logic [4:0] op, input int a, input int b, input int c,
                                input int za, input logic [3:0] wt, input logic [3:0] sg);
    instr_t i;
    i = ins(U_MMU, op, wt, sg);
    i.a = 12'(a); i.b = 12'(b); i.c = 12'(c); i.n0 = 12'(M); i.n1 = 12'(KW); i.imm = 8'(za);
    return i;
  endfunction
  function automatic instr_t vc(input vop_e op, input int a, input int b, input int c, input int n,
                                input int p, input int slot, input logic [3:0] wt,
                                input logic [3:0] sg);
    instr_t i;
    i = ins(U_VCU, op, wt, sg);
    i.a = 12'(a); i.b = 12'(b); i.c = 12'(c); i.n0 = 12'(n); i.imm = 8'({slot[1:0], p[1:0]});
    return i;
  endfunction

  localparam logic [3:0] TL = 4'b0001, TS = 4'b0010, TM = 4'b0100, TV = 4'b1000;

  // ------------------------------------------------------------ references
  function automatic int psum_ref(input int core, input bit a8, input int r, input int n);
    int acc = 0;
    for (int k = 0; k < KW; k++)
      for (int i = 0; i < (a8 ? K_LANES / 2 : K_LANES); i++) begin
        int av, wv;
        av = a8 ? int'(act8[r*KW + k][8*i +: 8]) - 128 : int'(act4[r*KW + k][4*i +: 4]) - 8;
        wv = int'(w[core][k][n][i]) - int'(zw[core][n]);
        acc += av * wv;
      end
    return acc;
  endfunction
  function automatic logic [31:0] vout(input int ddr, input int row, input int l);
    logic [255:0] v;
    v = {mem.mem[ddr + 2*row + 1], mem.mem[ddr + 2*row]};
    return v[32*l +: 32];
  endfunction

  // ------------------------------------------------------------ mechanism counters
  int n_overlap = 0, n_ld_mmu = 0, n_token = 0, n_fifo_full = 0, n_axi_stall = 0;
  int n_bcast = 0, n_percore = 0, n_switch = 0, cycles = 0;
  logic [4:0] last_mmu_op = 5'h1f;
  always @(posedge clk) if (rst_n) begin
    cycles++;
    if ($countones(unit_busy) >= 2) n_overlap++;
    if (unit_busy[U_LOAD] && unit_busy[U_MMU]) n_ld_mmu++;
    if (unit_blocked != '0) n_token++;
    if (i_rvalid && !i_rready) n_fifo_full++;
    if ((l_arvalid && !l_arready) || (l_rready && !l_rvalid) || (s_wvalid && !s_wready)) n_axi_stall++;
    if (dut.u_load.wr_en) begin
      if ($countones(dut.u_load.wr_cores) == NC) n_bcast++;
      else if ($countones(dut.u_load.wr_cores) == 1) n_percore++;
    end
    if (dut.work[U_MMU] && dut.cmd[U_MMU].op != M_SETZ) begin
      if (last_mmu_op != 5'h1f && dut.cmd[U_MMU].op != last_mmu_op) n_switch++;
      last_mmu_op <= dut.cmd[U_MMU].op;
    end
  end

  // ------------------------------------------------------------ main
  initial begin
    int t;
    start = 0;
    for (int i = 0; i < 2048; i++) mem.mem[i] = '0;
    // weights: per core, word 0 = zero points, words 1..KW = K slices (beat n = column n)
    for (int c = 0; c < NC; c++) begin
      logic [127:0] z;
      z = '0;
      for (int n = 0; n < N_COLS; n++) begin
        zw[c][n] = 4'($urandom_range(5, 10));
        z[4*n +: 4] = zw[c][n];
      end
      mem.mem[WGT + 24*c] = z;
      for (int k = 0; k < KW; k++)
        for (int n = 0; n < N_COLS; n++) begin
          logic [127:0] b;
          for (int i = 0; i < K_LANES; i++) begin
            w[c][k][n][i] = 4'($urandom);
            b[4*i +: 4] = w[c][k][n][i];
          end
          mem.mem[WGT + 24*c + 8*(k + 1) + n] = b;
        end
    end
    for (int i = 0; i < M*KW; i++) begin
      act4[i] = {$urandom, $urandom, $urandom, $urandom};
      act8[i] = {$urandom, $urandom, $urandom, $urandom};
      mem.mem[ACT4 + i] = act4[i];
      mem.mem[ACT8 + i] = act8[i];
    end
    for (int l = 0; l < N_COLS; l++) begin
      par[0][l] = f2r(r2f(0.002 + 0.001 * real'($urandom_range(0, 8))));
      par[1][l] = f2r(r2f(0.25 + 0.25 * real'($urandom_range(0, 6))));
      par[2][l] = f2r(r2f(log2r(par[1][l])));
      par[3][l] = f2r(r2f(40.0 + real'($urandom_range(0, 20))));
      par[4][l] = f2r(r2f(real'($urandom_range(100, 150))));
      par[5][l] = f2r(r2f(0.01 + 0.005 * real'($urandom_range(0, 4))));
    end
    for (int p = 0; p < 6; p++) begin
      logic [255:0] v;
      for (int l = 0; l < N_COLS; l++) v[32*l +: 32] = r2f(par[p][l]);
      mem.mem[PAR + 2*p]     = v[127:0];
      mem.mem[PAR + 2*p + 1] = v[255:128];
    end

    // program
    for (int c = 0; c < NC; c++) prog.push_back(ld(B_WGT, c, 0, WGT + 24*c, 0, KW + 1, 4'd0));
    prog.push_back(ld(B_ACT, 0, 1, ACT4, 0, M*KW, 4'd0));
    prog.push_back(ld(B_ACT, 0, 1, ACT8, 64, M*KW, 4'd0));
    prog.push_back(ld(B_VEC, 0, 1, PAR, 0, 6, TM | TV));
    prog.push_back(ld(B_ACT, 0, 1, ACT4, 256, M*KW, 4'd0));          // prefetch, overlaps the MMU
    prog.push_back(mm(M_SETZ, 0, 0, 0, 0, TL, 4'd0));
    prog.push_back(mm(M_GEMM_A4, 0, 1, 0, 8, 4'd0, TV));
    prog.push_back(mm(M_GEMM_A8, 64, 1, 16, 128, 4'd0, TV));
    prog.push_back(vc(V_SETP, 0, 0, 0, 1, 0, 0, TL, 4'd0));
    prog.push_back(vc(V_SETP, 1, 0, 0, 1, 2, 0, 4'd0, 4'd0));
    prog.push_back(vc(V_SETP, 2, 0, 0, 1, 3, 0, 4'd0, 4'd0));
    prog.push_back(vc(V_DEQ, 0, 0, 8, M, 0, 0, TM, 4'd0));
    prog.push_back(vc(V_DEQ, 16, 0, 12, M, 0, 0, TM, 4'd0));
    prog.push_back(vc(V_POL, 8, 0, 32, 2*M, 2, 0, 4'd0, 4'd0));
    prog.push_back(vc(V_SETP, 3, 0, 0, 1, 0, 0, 4'd0, 4'd0));
    prog.push_back(vc(V_SETP, 4, 0, 0, 1, 1, 0, 4'd0, 4'd0));
    prog.push_back(vc(V_QNT8, 32, 0, 128, 2*M, 0, 1, 4'd0, 4'd0));
    prog.push_back(vc(V_UNPOL, 32, 0, 48, 2*M, 2, 0, 4'd0, 4'd0));
    prog.push_back(vc(V_RELU, 48, 0, 64, 2*M, 0, 0, 4'd0, 4'd0));
    prog.push_back(vc(V_SETP, 5, 0, 0, 1, 0, 0, 4'd0, 4'd0));
    prog.push_back(vc(V_DQ8, 128, 0, 80, 2*M, 0, 1, 4'd0, 4'd0));
    prog.push_back(vc(V_ADD, 80, 80, 96, 2*M, 0, 0, 4'd0, 4'd0));
    for (int i = 0; i < 5; i++) prog.push_back(vc(V_ADD, 96, 80, 96, 2*M, 0, 0, 4'd0, (i == 4) ? TS : 4'd0));
    prog.push_back(st(B_PSUM, 0, OUT, 0, M, TV));
    prog.push_back(st(B_PSUM, 7, OUT + 8, 16, M, 4'd0));
    prog.push_back(st(B_VEC, 5, OUT + 16, 8, 2*M, 4'd0));      // DEQ
    prog.push_back(st(B_VEC, 5, OUT + 32, 32, 2*M, 4'd0));     // POL
    prog.push_back(st(B_ACT, 5, OUT + 48, 128, 2*M, 4'd0));    // QNT8
    prog.push_back(st(B_VEC, 5, OUT + 56, 48, 2*M, 4'd0));     // UNPOL
    prog.push_back(st(B_VEC, 5, OUT + 72, 64, 2*M, 4'd0));     // RELU
    prog.push_back(st(B_VEC, 5, OUT + 88, 80, 2*M, 4'd0));     // DQ8
    prog.push_back(st(B_VEC, 5, OUT + 104, 96, 2*M, 4'd0));    // 6 x DQ8 by additions
    prog[prog.size() - 1].last = 1'b1;
    foreach (prog[i]) mem.mem[PROG + i] = prog[i];

    repeat (4) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    t = 0;
    while (!done && t < 20000) begin @(negedge clk); t++; end
    chk(done, "program did not finish");
    $display("program finished after %0d cycles", t);

    // partial sums
    for (int r = 0; r < M; r++)
      for (int n = 0; n < N_COLS; n++) begin
        logic [255:0] v0, v7;
        v0 = {mem.mem[OUT + 2*r + 1], mem.mem[OUT + 2*r]};
        v7 = {mem.mem[OUT + 8 + 2*r + 1], mem.mem[OUT + 8 + 2*r]};
        chk($signed(v0[32*n +: 32]) == psum_ref(0, 0, r, n),
            $sformatf("A4 psum core0 r%0d c%0d got %0d exp %0d", r, n, $signed(v0[32*n +: 32]), psum_ref(0, 0, r, n)));
        chk($signed(v7[32*n +: 32]) == psum_ref(7, 1, r, n),
            $sformatf("A8 psum core7 r%0d c%0d got %0d exp %0d", r, n, $signed(v7[32*n +: 32]), psum_ref(7, 1, r, n)));
      end
    // VCU chain of core 5
    for (int r = 0; r < 2*M; r++)
      for (int l = 0; l < N_COLS; l++) begin
        real deq, pol, polr, unp, x, acc;
        logic [31:0] e;
        longint q;
        logic [7:0] code;
        e = r2f(f2r(r2f(real'(psum_ref(5, r >= M, r % M, l)))) * par[0][l]);
        chk(vout(OUT + 16, r, l) == e, $sformatf("DEQ r%0d l%0d got %h exp %h", r, l, vout(OUT + 16, r, l), e));
        deq = f2r(vout(OUT + 16, r, l));
        polr = (deq == 0.0) ? 0.0 : ((deq < 0.0) ? -1.0 : 1.0) * (log2r(rabs(deq) + par[1][l]) - par[2][l]);
        pol = f2r(vout(OUT + 32, r, l));
        chk(rabs(pol - polr) <= 4.0e-6 * ((rabs(polr) > 1.0) ? rabs(polr) : 1.0),
            $sformatf("POL r%0d l%0d got %g exp %g", r, l, pol, polr));
        q = rne(f2r(r2f(f2r(r2f(pol * par[3][l])) + par[4][l])));
        if (q < 0) q = 0;
        if (q > 255) q = 255;
        code = mem.mem[OUT + 48 + r][64 + 8*l +: 8];
        chk(code == 8'(q), $sformatf("QNT8 r%0d l%0d got %0d exp %0d", r, l, code, q));
        unp = f2r(vout(OUT + 56, r, l));
        chk(rabs(unp - deq) <= 1.0e-4 * ((rabs(deq) > 1.0) ? rabs(deq) : 1.0),
            $sformatf("UNPOL r%0d l%0d got %g exp %g", r, l, unp, deq));
        e = (vout(OUT + 56, r, l)[31] && vout(OUT + 56, r, l)[30:0] != 0) ? 32'd0 : vout(OUT + 56, r, l);
        chk(vout(OUT + 72, r, l) == e || (vout(OUT + 72, r, l) == 32'd0 && vout(OUT + 56, r, l)[31]),
            $sformatf("RELU r%0d l%0d", r, l));
        x = f2r(r2f(f2r(r2f(real'(code) - par[4][l])) * par[5][l]));
        chk(vout(OUT + 88, r, l) == r2f(x), $sformatf("DQ8 r%0d l%0d got %h exp %h", r, l, vout(OUT + 88, r, l), r2f(x)));
        acc = f2r(r2f(x + x));
        for (int i = 0; i < 5; i++) acc = f2r(r2f(acc + x));
        chk(vout(OUT + 104, r, l) == r2f(acc), $sformatf("ADD chain r%0d l%0d", r, l));
      end

    $display("mechanisms: overlap=%0d load||mmu=%0d token_wait=%0d fifo_full=%0d axi_stall=%0d bcast=%0d percore=%0d a4/a8_switch=%0d",
             n_overlap, n_ld_mmu, n_token, n_fifo_full, n_axi_stall, n_bcast, n_percore, n_switch);
    chk(n_overlap > 0, "units never overlapped");
    chk(n_ld_mmu > 0, "load never overlapped the MMU");
    chk(n_token > 0, "no instruction ever waited for a token");
    chk(n_fifo_full > 0, "instruction FIFO never filled");
    chk(n_axi_stall > 0, "no AXI stall");
    chk(n_bcast > 0, "no broadcast load");
    chk(n_percore > 0, "no per-core load");
    chk(n_switch > 0, "no A4/A8 mode switch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
