// mmu: Matrix Multiplication Unit of one core (W4A4 / W4A8 GeMM).
//
// A GeMM instruction multiplies an M x K activation tile by a K x N_COLS
// weight tile. The activation tile sits in the activation bank as M rows of
// KW words (word a + m*KW + k holds K_LANES INT4 or K_LANES/2 INT8 codes);
// the weight tile sits in the weight bank as KW words (word b + k holds, for
// each of the N_COLS output columns, the matching K_LANES INT4 codes). Every
// cycle the unit reads one activation word and one weight word and feeds
// them to N_COLS mac_tree instances; the INT32 accumulators are written to
// the partial-sum bank at c + m after the last k. Convolution is executed the
// same way on activations laid out as im2col rows.
//
// Timing: reads are issued back to back, one per cycle, so from the work
// pulse to the done pulse a tile takes M*KW + 5 cycles (1 to accept, M*KW
// issue cycles, bank read, accumulate, write, done).
// Instruction fields: op = M_GEMM_A4 / M_GEMM_A8 / M_SETZ, a, b, c,
// n0 = M, n1 = KW, imm = activation zero point. M_SETZ loads the per-column
// weight zero points from the low 4*N_COLS bits of weight word b.
//
// The paper gives the MAC-tree array and the W4A4 / W4A8 precisions; tile
// shapes, buffer layout and the zero-point handling are this design's own.
module mmu
  import qd_pkg::*;
#(
  parameter int WGT_AW = 8,
  parameter int ACT_AW = 9,
  parameter int PS_AW  = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                work,
  input  instr_t              cmd,
  output logic                done,
  // activation bank read
  output logic                act_re,
  output logic [ACT_AW-1:0]   act_addr,
  input  logic [ACT_W-1:0]    act_data,
  // weight bank read
  output logic                wgt_re,
  output logic [WGT_AW-1:0]   wgt_addr,
  input  logic [WGT_W-1:0]    wgt_data,
  // partial-sum bank write
  output logic                ps_we,
  output logic [PS_AW-1:0]    ps_addr,
  output logic [PSUM_W-1:0]   ps_data
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_DONE} state_e;
  state_e state;

  instr_t            ins;
  logic [ADDR_W-1:0] m, k;
  logic [ADDR_W-1:0] row_base;
  logic [3:0]        zw [N_COLS];

  // pipeline: stage 1 = data returning from the banks
  logic              v1, first1, last1, setz1;
  logic [ADDR_W-1:0] m1;
  logic signed [31:0] tree [N_COLS];
  logic signed [31:0] acc  [N_COLS];
  logic              wr_pend;
  logic [ADDR_W-1:0] wr_row;

  wire issue = (state == S_RUN);
  wire a8    = (ins.op == M_GEMM_A8);
  wire setz  = (ins.op == M_SETZ);

  assign act_re   = issue && !setz;
  assign act_addr = ACT_AW'(ins.a + row_base + k);
  assign wgt_re   = issue;
  assign wgt_addr = setz ? WGT_AW'(ins.b) : WGT_AW'(ins.b + k);

  for (genvar n = 0; n < N_COLS; n++) begin : g_tree
    mac_tree #(.LANES(K_LANES)) u_tree (
      .a8  (a8),
      .act (act_data),
      .wgt (wgt_data[n*AXI_DW +: AXI_DW]),
      .za  (ins.imm),
      .zw  (zw[n]),
      .sum (tree[n])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      ins      <= '0;
      m        <= '0;
      k        <= '0;
      row_base <= '0;
      v1       <= 1'b0;
      first1   <= 1'b0;
      last1    <= 1'b0;
      setz1    <= 1'b0;
      m1       <= '0;
      wr_pend  <= 1'b0;
      wr_row   <= '0;
      done     <= 1'b0;
      for (int n = 0; n < N_COLS; n++) begin
        acc[n] <= '0;
        zw[n]  <= '0;
      end
    end else begin
      done <= 1'b0;
      // ---------------- issue stage
      v1 <= 1'b0;
      unique case (state)
        S_IDLE: if (work) begin
          ins      <= cmd;
          m        <= '0;
          k        <= '0;
          row_base <= '0;
          state    <= S_RUN;
        end
        S_RUN: begin
          v1     <= 1'b1;
          setz1  <= setz;
          first1 <= (k == '0);
          last1  <= (k == ins.n1 - 1'b1) || setz;
          m1     <= m;
          if (setz || (k == ins.n1 - 1'b1)) begin
            k <= '0;
            if (setz || (m == ins.n0 - 1'b1)) state <= S_DRAIN;
            else begin
              m        <= m + 1'b1;
              row_base <= row_base + ins.n1;
            end
          end else k <= k + 1'b1;
        end
        S_DRAIN: if (!v1 && !wr_pend) state <= S_DONE;
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      // ---------------- accumulate stage
      wr_pend <= 1'b0;
      if (v1) begin
        if (setz1) begin
          for (int n = 0; n < N_COLS; n++) zw[n] <= wgt_data[4*n +: 4];
        end else begin
          for (int n = 0; n < N_COLS; n++) acc[n] <= (first1 ? 32'sd0 : acc[n]) + tree[n];
          wr_pend <= last1;
          wr_row  <= m1;
        end
      end
    end
  end

  // ---------------- write stage
  assign ps_we   = wr_pend;
  assign ps_addr = PS_AW'(ins.c + wr_row);
  always_comb for (int n = 0; n < N_COLS; n++) ps_data[n*ACC_W +: ACC_W] = acc[n];

  a_sizes: assert property (@(posedge clk) disable iff (!rst_n)
                            work && state == S_IDLE && cmd.op != M_SETZ |-> cmd.n0 != 0 && cmd.n1 != 0);
endmodule
