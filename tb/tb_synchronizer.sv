// tb_synchronizer: self-checking testbench of the work/done synchronizer.
//
// The four instruction FIFOs are modelled as queues holding a pipelined
// program of 6 iterations: Load (signals MMU) -> MMU (waits for Load,
// signals VCU) -> VCU (waits for MMU, signals Store) -> Store (waits for
// VCU). Each unit is modelled as busy for a random number of cycles after
// its work pulse, then pulses done. The test records when every instruction
// started and finished and checks that no instruction started before the
// instruction it depends on had finished, that no unit was started while busy,
// that every instruction ran, that units of different iterations overlapped,
// that the blocked flag was seen, and that idle rises at the end.
`timescale 1ns/1ps
module tb_synchronizer;
  import qd_pkg::*;
  localparam int IT = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  instr_t head [NUM_UNITS];
  instr_t cmd [NUM_UNITS];
  logic [NUM_UNITS-1:0] empty, pop, work, done, busy, blocked;
  logic idle;

  synchronizer dut (.clk, .rst_n, .head, .empty, .pop, .work, .cmd, .done, .busy, .idle, .blocked);

  instr_t q [NUM_UNITS][$];
  int     started [NUM_UNITS], finished [NUM_UNITS];
  int     t_start [NUM_UNITS][IT], t_end [NUM_UNITS][IT];
  int     remain [NUM_UNITS];
  int     cyc = 0, n_overlap = 0, n_blocked = 0;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  always_comb for (int u = 0; u < NUM_UNITS; u++) begin
    empty[u] = (q[u].size() == 0);
    head[u]  = empty[u] ? '0 : q[u][0];
  end

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (blocked != '0) n_blocked++;
    if (remain[U_LOAD] > 0 && remain[U_MMU] > 0) n_overlap++;
    for (int u = 0; u < NUM_UNITS; u++) begin
      done[u] <= 1'b0;
      if (remain[u] > 0) begin
        remain[u] <= remain[u] - 1;
        if (remain[u] == 1) begin
          done[u] <= 1'b1;
          t_end[u][finished[u]] = cyc;
          finished[u]++;
        end
      end
      if (work[u]) begin
        chk(remain[u] == 0 && !busy[u], "work while busy");
        chk(cmd[u] == q[u][0], "cmd is not the FIFO head");
        chk(pop[u], "work without pop");
        t_start[u][started[u]] = cyc;
        started[u]++;
        void'(q[u].pop_front());
        remain[u] <= 1 + $urandom_range(0, 12);
      end
    end
  end

  function automatic instr_t mk(input unit_e u, input logic [3:0] wt, input logic [3:0] sg);
    instr_t i;
    i = '0; i.unit = u; i.wait_m = wt; i.sig_m = sg; i.op = 5'($urandom);
    i.a = 12'($urandom);
    return i;
  endfunction

  initial begin
    int t;
    done = '0;
    for (int u = 0; u < NUM_UNITS; u++) begin started[u] = 0; finished[u] = 0; remain[u] = 0; end
    for (int i = 0; i < IT; i++) begin
      q[U_LOAD].push_back(mk(U_LOAD, 4'b0000, 4'b0100));
      q[U_MMU].push_back(mk(U_MMU, 4'b0001, 4'b1000));
      q[U_VCU].push_back(mk(U_VCU, 4'b0100, 4'b0010));
      q[U_STORE].push_back(mk(U_STORE, 4'b1000, 4'b0000));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    t = 0;
    while (!(idle && started[U_STORE] == IT && remain[U_STORE] == 0) && t < 3000) begin @(negedge clk); t++; end
    repeat (3) @(negedge clk);
    chk(idle, "idle did not rise");
    for (int u = 0; u < NUM_UNITS; u++) chk(started[u] == IT && finished[u] == IT, $sformatf("unit %0d ran %0d", u, started[u]));
    for (int i = 0; i < IT; i++) begin
      chk(t_start[U_MMU][i] > t_end[U_LOAD][i], $sformatf("MMU %0d started before its load", i));
      chk(t_start[U_VCU][i] > t_end[U_MMU][i], $sformatf("VCU %0d started before its MMU", i));
      chk(t_start[U_STORE][i] > t_end[U_VCU][i], $sformatf("Store %0d started before its VCU", i));
    end
    chk(n_overlap > 0, "load and MMU never overlapped");
    chk(n_blocked > 0, "blocked never seen");
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
