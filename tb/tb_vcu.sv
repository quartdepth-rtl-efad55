// tb_vcu: self-checking testbench of the vector compute unit.
//
// Models the three banks the VCU touches as arrays with one cycle of read
// latency, loads random data, runs each opcode over a block of rows and
// compares every lane with a reference computed in double precision
// (bit-exact for add/multiply/convert/quantise, within a tolerance for the
// polynomial log2 / exp2 and the polishing functions). It also checks that
// an instruction of n0 rows takes n0 + 9 cycles from work to done.
`timescale 1ns/1ps
module tb_vcu;
  import qd_pkg::*;
  import tb_util_pkg::*;

  localparam int L = N_COLS;
  localparam int ROWS = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic work, done;
  instr_t cmd;
  logic ps_re, vec_we, act_re, act_we;
  logic [1:0] vec_re;
  logic [7:0] ps_addr, vec_waddr;
  logic [7:0] vec_raddr [2];
  logic [8:0] act_raddr, act_waddr;
  logic [L*32-1:0] ps_data, vec_wdata;
  logic [L*32-1:0] vec_rdata [2];
  logic [ACT_W-1:0] act_rdata, act_wdata, act_wmask;

  logic [L*32-1:0] psb [256];
  logic [L*32-1:0] vecb [256];
  logic [ACT_W-1:0] actb [512];

  vcu dut (.*);

  always_ff @(posedge clk) begin
    if (ps_re) ps_data <= psb[ps_addr];
    if (vec_re[0]) vec_rdata[0] <= vecb[vec_raddr[0]];
    if (vec_re[1]) vec_rdata[1] <= vecb[vec_raddr[1]];
    if (act_re) act_rdata <= actb[act_raddr];
    if (vec_we) vecb[vec_waddr] <= vec_wdata;
    if (act_we) actb[act_waddr] <= (actb[act_waddr] & ~act_wmask) | (act_wdata & act_wmask);
  end

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic run(input vop_e op, input int a, input int b, input int c, input int n,
                     input int p, input int slot);
    int cyc;
    cmd = '0;
    cmd.unit = U_VCU;
    cmd.op = op;
    cmd.a = 12'(a); cmd.b = 12'(b); cmd.c = 12'(c); cmd.n0 = 12'(n);
    cmd.imm = 8'({slot[1:0], p[1:0]});
    @(negedge clk);
    work = 1;
    @(negedge clk);
    work = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
      if (cyc > 1000) break;
    end
    if (op != V_SETP) check(cyc == n + 9, $sformatf("latency op %0d: %0d cycles for %0d rows", op, cyc, n));
  endtask

  function automatic logic [31:0] vget(input int addr, input int l);
    return vecb[addr][32*l +: 32];
  endfunction

  function automatic logic [31:0] rnd_f(input real lo, input real hi);
    return r2f(lo + (hi - lo) * real'($urandom % 1000000) / 1000000.0);
  endfunction

  real alpha [L], scale [L], invs [L], zp [L];

  initial begin : main
    logic [31:0] ref_bits, got;
    real x, y, r, g;
    work = 0;
    cmd = '0;
    for (int i = 0; i < 256; i++) begin psb[i] = '0; vecb[i] = '0; end
    for (int i = 0; i < 512; i++) actb[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- parameters: vec[200] = scale, vec[201] = zero point / log2(alpha)
    for (int l = 0; l < L; l++) begin
      scale[l] = f2r(rnd_f(0.001, 0.1));
      invs[l]  = f2r(r2f(1.0 / scale[l]));
      zp[l]    = real'($urandom % 8);
      alpha[l] = f2r(rnd_f(0.05, 4.0));
      vecb[200][32*l +: 32] = r2f(scale[l]);
      vecb[201][32*l +: 32] = r2f(zp[l]);
      vecb[202][32*l +: 32] = r2f(alpha[l]);
      vecb[203][32*l +: 32] = r2f(log2r(alpha[l]));
      vecb[204][32*l +: 32] = r2f(invs[l]);
    end
    run(V_SETP, 200, 0, 0, 1, 0, 0);   // P0 = scale
    run(V_SETP, 201, 0, 0, 1, 1, 0);   // P1 = zero point
    run(V_SETP, 202, 0, 0, 1, 2, 0);   // P2 = alpha
    run(V_SETP, 203, 0, 0, 1, 3, 0);   // P3 = log2(alpha)

    // ---------------- DEQ: vec[0..] = fp(psum) * scale
    for (int i = 0; i < ROWS; i++)
      for (int l = 0; l < L; l++) psb[i][32*l +: 32] = 32'($signed($urandom % 2000001) - 1000000);
    run(V_DEQ, 0, 0, 0, ROWS, 0, 0);
    for (int i = 0; i < ROWS; i++)
      for (int l = 0; l < L; l++) begin
        ref_bits = r2f(f2r(r2f(real'($signed(psb[i][32*l +: 32])))) * scale[l]);
        check(vget(i, l) == ref_bits, $sformatf("DEQ row %0d lane %0d got %h exp %h", i, l, vget(i, l), ref_bits));
      end

    // ---------------- ADD, MUL, ADDP, MULP, RELU on random vectors
    for (int i = 0; i < ROWS; i++)
      for (int l = 0; l < L; l++) begin
        vecb[40 + i][32*l +: 32] = rnd_f(-8.0, 8.0);
        vecb[80 + i][32*l +: 32] = rnd_f(-8.0, 8.0);
      end
    run(V_ADD, 40, 80, 120, ROWS, 0, 0);
    for (int i = 0; i < ROWS; i++)
      for (int l = 0; l < L; l++) begin
        ref_bits = r2f(f2r(vget(40 + i, l)) + f2r(vget(80 + i, l)));
        check(vget(120 + i, l) == ref_bits, $sformatf("ADD %0d/%0d got %h exp %h", i, l, vget(120 + i, l), ref_bits));
      end
    run(V_MUL, 40, 80, 120, ROWS, 0, 0);
    for (int i = 0; i < ROWS; i++)
      for (int l = 0; l < L; l++) begin
        ref_bits = r2f(f2r(vget(40 + i, l)) * f2r(vget(80 + i, l)));
        check(vget(120 + i, l) == ref_bits, $sformatf("MUL %0d/%0d", i, l));
      end
    run(V_ADDP, 40, 0, 120, ROWS, 2, 0);
    for (int i = 0; i < ROWS; i++)
      for (int l = 0; l < L; l++) begin
        ref_bits = r2f(f2r(vget(40 + i, l)) + alpha[l]);
        check(vget(120 + i, l) == ref_bits, $sformatf("ADDP %0d/%0d", i, l));
      end
    run(V_RELU, 40, 0, 120, ROWS, 0, 0);
    for (int i = 0; i < ROWS; i++)
      for (int l = 0; l < L; l++) begin
        ref_bits = vget(40 + i, l)[31] ? 32'd0 : vget(40 + i, l);
        check(vget(120 + i, l) == ref_bits, $sformatf("RELU %0d/%0d", i, l));
      end

    // ---------------- LOG2 on positive values, EXP2 on [-20, 20]
    for (int i = 0; i < ROWS; i++)
      for (int l = 0; l < L; l++) vecb[40 + i][32*l +: 32] = r2f($pow(2.0, real'($urandom % 4000) / 100.0 - 20.0));
    run(V_LOG2, 40, 0, 120, ROWS, 0, 0);
    for (int i = 0; i < ROWS; i++)
      for (int l = 0; l < L; l++) begin
        r = log2r(f2r(vget(40 + i, l)));
        g = f2r(vget(120 + i, l));
        check(rabs(g - r) <= 1.0e-6 * ((rabs(r) > 1.0) ? rabs(r) : 1.0),
              $sformatf("LOG2 x=%g got %g exp %g", f2r(vget(40 + i, l)), g, r));
      end
    for (int i = 0; i < ROWS; i++)
      for (int l = 0; l < L; l++) vecb[40 + i][32*l +: 32] = rnd_f(-20.0, 20.0);
    run(V_EXP2, 40, 0, 120, ROWS, 0, 0);
    for (int i = 0; i < ROWS; i++)
      for (int l = 0; l < L; l++) begin
        r = $pow(2.0, f2r(vget(40 + i, l)));
        g = f2r(vget(120 + i, l));
        check(rabs(g - r) <= 2.0e-6 * r, $sformatf("EXP2 y=%g got %g exp %g", f2r(vget(40 + i, l)), g, r));
      end

    // ---------------- LogNP polish and unpolish (alpha = P2, log2 alpha = P3)
    for (int i = 0; i < ROWS; i++)
      for (int l = 0; l < L; l++)
        vecb[40 + i][32*l +: 32] = (i == 0) ? 32'd0 : rnd_f(-50.0, 50.0);
    run(V_POL, 40, 0, 120, ROWS, 2, 0);
    for (int i = 0; i < ROWS; i++)
      for (int l = 0; l < L; l++) begin
        x = f2r(vget(40 + i, l));
        r = (x == 0.0) ? 0.0 : ((x < 0.0) ? -1.0 : 1.0) * (log2r(rabs(x) + alpha[l]) - log2r(alpha[l]));
        g = f2r(vget(120 + i, l));
        check(rabs(g - r) <= 2.0e-6 * ((rabs(r) > 1.0) ? rabs(r) : 1.0),
              $sformatf("POL x=%g a=%g got %g exp %g", x, alpha[l], g, r));
      end
    run(V_UNPOL, 120, 0, 160, ROWS, 2, 0);
    for (int i = 0; i < ROWS; i++)
      for (int l = 0; l < L; l++) begin
        x = f2r(vget(40 + i, l));
        g = f2r(vget(160 + i, l));
        check(rabs(g - x) <= 1.0e-4 * ((rabs(x) > 1.0) ? rabs(x) : 1.0),
              $sformatf("UNPOL round trip x=%g got %g", x, g));
      end

    // ---------------- QNT4 into slot 1, QNT8 into slot 1 of other words, then DQ back
    run(V_SETP, 204, 0, 0, 1, 0, 0);   // P0 = 1/scale
    for (int i = 0; i < ROWS; i++)
      for (int l = 0; l < L; l++) vecb[40 + i][32*l +: 32] = rnd_f(-0.3, 1.5);
    run(V_QNT4, 40, 0, 300, ROWS, 0, 1);
    run(V_QNT8, 40, 0, 400, ROWS, 0, 1);
    for (int i = 0; i < ROWS; i++)
      for (int l = 0; l < L; l++) begin
        real t;
        longint q4, q8;
        t  = f2r(r2f(f2r(r2f(f2r(vget(40 + i, l)) * invs[l])) + zp[l]));
        q4 = rne(t); q8 = q4;
        if (q4 < 0) q4 = 0; if (q4 > 15) q4 = 15;
        if (q8 < 0) q8 = 0; if (q8 > 255) q8 = 255;
        check(actb[300 + i][32 + 4*l +: 4] == 4'(q4), $sformatf("QNT4 %0d/%0d got %0d exp %0d", i, l, actb[300 + i][32 + 4*l +: 4], q4));
        check(actb[400 + i][64 + 8*l +: 8] == 8'(q8), $sformatf("QNT8 %0d/%0d", i, l));
        check(actb[300 + i][31:0] == 32'd0 && actb[300 + i][127:64] == 64'd0, "QNT4 wrote outside its slot");
      end
    run(V_SETP, 200, 0, 0, 1, 0, 0);   // P0 = scale again
    run(V_DQ4, 300, 0, 120, ROWS, 0, 1);
    for (int i = 0; i < ROWS; i++)
      for (int l = 0; l < L; l++) begin
        ref_bits = r2f(f2r(r2f(real'(actb[300 + i][32 + 4*l +: 4]) - zp[l])) * scale[l]);
        check(vget(120 + i, l) == ref_bits, $sformatf("DQ4 %0d/%0d", i, l));
      end
    run(V_DQ8, 400, 0, 120, ROWS, 0, 1);
    for (int i = 0; i < ROWS; i++)
      for (int l = 0; l < L; l++) begin
        ref_bits = r2f(f2r(r2f(real'(actb[400 + i][64 + 8*l +: 8]) - zp[l])) * scale[l]);
        check(vget(120 + i, l) == ref_bits, $sformatf("DQ8 %0d/%0d", i, l));
      end

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
