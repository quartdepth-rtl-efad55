// synchronizer: starts and ends the four execution units.
//
// Each unit (Load, Store, MMU, VCU) has an instruction FIFO. The synchronizer
// looks at every FIFO head and starts the unit with a one-cycle `work` pulse
// (popping the head and handing the instruction over) when
//   * the unit is idle (its previous instruction has reported `done`), and
//   * for every unit p set in the head's wait_m, at least one completion token
//     from p to this unit is available.
// Starting consumes those tokens. When a unit pulses `done`, one token is
// added from that unit to every unit set in the sig_m of the instruction that
// just finished. Units therefore run concurrently and out of order relative to
// each other, and only the dependencies named in the program serialise them;
// this is what lets load, matrix, vector and store work of different
// instruction cycles overlap.
//
// The paper states that the synchronizer controls the start and end of each
// module through control signals (labelled work and done in its block
// diagram); the token counters and mask encoding are this design's choice.
// idle is high when no unit is busy and every FIFO is empty.
module synchronizer
  import qd_pkg::*;
#(
  parameter int TOK_W = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // FIFO heads
  input  instr_t               head [NUM_UNITS],
  input  logic [NUM_UNITS-1:0] empty,
  output logic [NUM_UNITS-1:0] pop,
  // unit control
  output logic [NUM_UNITS-1:0] work,
  output instr_t               cmd [NUM_UNITS],
  input  logic [NUM_UNITS-1:0] done,
  output logic [NUM_UNITS-1:0] busy,
  output logic                 idle,
  output logic [NUM_UNITS-1:0] blocked   // head waiting for a token (for statistics)
);
  logic [TOK_W-1:0] tok [NUM_UNITS][NUM_UNITS];   // tok[producer][consumer]
  logic [3:0]       sig_q [NUM_UNITS];

  // Start decision per unit
  always_comb begin
    for (int c = 0; c < NUM_UNITS; c++) begin
      logic ok;
      ok = 1'b1;
      for (int p = 0; p < NUM_UNITS; p++)
        if (head[c].wait_m[p] && tok[p][c] == '0) ok = 1'b0;
      blocked[c] = !empty[c] && !busy[c] && !ok;
      work[c]    = !empty[c] && !busy[c] && ok;
      pop[c]     = work[c];
      cmd[c]     = head[c];
    end
  end

  assign idle = (busy == '0) && (&empty);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0;
      for (int p = 0; p < NUM_UNITS; p++) begin
        sig_q[p] <= '0;
        for (int c = 0; c < NUM_UNITS; c++) tok[p][c] <= '0;
      end
    end else begin
      for (int u = 0; u < NUM_UNITS; u++) begin
        if (work[u]) begin
          busy[u]  <= 1'b1;
          sig_q[u] <= head[u].sig_m;
        end else if (done[u]) begin
          busy[u] <= 1'b0;
        end
      end
      for (int p = 0; p < NUM_UNITS; p++)
        for (int c = 0; c < NUM_UNITS; c++)
          tok[p][c] <= tok[p][c]
                     + TOK_W'(done[p] && busy[p] && sig_q[p][c])
                     - TOK_W'(work[c] && head[c].wait_m[p]);
    end
  end

  for (genvar u = 0; u < NUM_UNITS; u++) begin : g_chk
    a_done_when_busy: assert property (@(posedge clk) disable iff (!rst_n) done[u] |-> busy[u]);
  end
endmodule
