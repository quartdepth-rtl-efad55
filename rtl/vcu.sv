// vcu: Vector Compute Unit of one core.
//
// A programmable array of LANES FP32 units (vcu_lane), one per output
// channel of the MMU tile. One VCU instruction streams n0 rows: row i is read
// from the source bank at a+i (and b+i for two-operand ops), passes through
// the lanes and is written to the destination bank at c+i. Rows issue one per
// cycle; from the work pulse to the done pulse an instruction takes n0 + 9
// cycles (n0 issue cycles, 1 read cycle, 5 lane stages, 3 cycles to drain
// and signal done).
//   source: partial-sum bank (DEQ), activation bank (DQ4/DQ8), else vector bank
//   destination: activation bank (QNT4/QNT8), else vector bank
// Because the MMU leaves its INT32 results in the local partial-sum bank and
// the VCU reads them from there and can write quantised codes straight back
// to the activation bank, dequantise -> activation -> polish -> quantise
// chains run on chip without a round trip through DDR (kernel fusion).
//
// Parameters P[0..3] are per-lane FP32 registers loaded with V_SETP from the
// vector bank. imm[1:0] picks p (P0 = P[p], P1 = P[p+1 mod 4]); imm[3:2]
// picks the slot of a packed activation word (INT4: 8 lanes x 4 bits = 32-bit
// slot 0..3; INT8: 64-bit slot 0..1).
//
// The paper gives the VCU as a programmable FP32 vector array with SFU,
// format conversion and polishing support; the instruction set, the slot
// packing and the parameter registers are this design's choices.
module vcu
  import qd_pkg::*;
#(
  parameter int LANES  = N_COLS,
  parameter int ACT_AW = 9,
  parameter int PS_AW  = 8,
  parameter int VEC_AW = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               work,
  input  instr_t             cmd,
  output logic               done,
  // partial-sum bank read
  output logic               ps_re,
  output logic [PS_AW-1:0]   ps_addr,
  input  logic [LANES*32-1:0] ps_data,
  // vector bank: two reads, one write
  output logic [1:0]         vec_re,
  output logic [VEC_AW-1:0]  vec_raddr [2],
  input  logic [LANES*32-1:0] vec_rdata [2],
  output logic               vec_we,
  output logic [VEC_AW-1:0]  vec_waddr,
  output logic [LANES*32-1:0] vec_wdata,
  // activation bank: one read, one masked write
  output logic               act_re,
  output logic [ACT_AW-1:0]  act_raddr,
  input  logic [ACT_W-1:0]   act_rdata,
  output logic               act_we,
  output logic [ACT_AW-1:0]  act_waddr,
  output logic [ACT_W-1:0]   act_wdata,
  output logic [ACT_W-1:0]   act_wmask
);
  localparam int LAT = 6;   // read + 5 lane stages

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_DONE} state_e;
  state_e state;

  instr_t            ins;
  vop_e              op;
  logic [ADDR_W-1:0] i;
  logic [31:0]       P [4][LANES];
  logic [LAT-1:0]    vpipe;
  logic [ADDR_W-1:0] apipe [LAT];
  logic [1:0]        p_sel, slot;

  assign op    = vop_e'(ins.op);
  assign p_sel = ins.imm[1:0];
  assign slot  = ins.imm[3:2];

  wire issue = (state == S_RUN);
  wire src_ps  = (op == V_DEQ);
  wire src_act = (op == V_DQ4) || (op == V_DQ8);
  wire dst_act = (op == V_QNT4) || (op == V_QNT8);

  assign ps_re        = issue && src_ps;
  assign ps_addr      = PS_AW'(ins.a + i);
  assign act_re       = issue && src_act;
  assign act_raddr    = ACT_AW'(ins.a + i);
  assign vec_re[0]    = issue && !src_ps && !src_act;
  assign vec_re[1]    = issue && (op == V_ADD || op == V_MUL);
  assign vec_raddr[0] = VEC_AW'(ins.a + i);
  assign vec_raddr[1] = VEC_AW'(ins.b + i);

  // ---------------- lane operands (data from the banks, one cycle after issue)
  logic [31:0] lx [LANES], ly [LANES], lz [LANES];
  logic [LANES-1:0] lv;
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      if (src_ps) lx[l] = ps_data[32*l +: 32];
      else if (op == V_DQ4) lx[l] = {28'd0, act_rdata[32*slot + 4*l +: 4]};
      else if (op == V_DQ8) lx[l] = {24'd0, act_rdata[64*slot[0] + 8*l +: 8]};
      else lx[l] = vec_rdata[0][32*l +: 32];
      ly[l] = vec_rdata[1][32*l +: 32];
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    vcu_lane u_lane (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (vpipe[0] && op != V_SETP),
      .op        (op),
      .x         (lx[l]),
      .y         (ly[l]),
      .p0        (P[p_sel][l]),
      .p1        (P[p_sel + 2'd1][l]),
      .out_valid (lv[l]),
      .z         (lz[l])
    );
  end

  // ---------------- write-back
  always_comb begin
    vec_we    = lv[0] && !dst_act;
    vec_waddr = VEC_AW'(apipe[LAT-1]);
    act_we    = lv[0] && dst_act;
    act_waddr = ACT_AW'(apipe[LAT-1]);
    act_wdata = '0;
    act_wmask = '0;
    for (int l = 0; l < LANES; l++) begin
      vec_wdata[32*l +: 32] = lz[l];
      if (op == V_QNT4) begin
        act_wdata[32*slot + 4*l +: 4] = lz[l][3:0];
        act_wmask[32*slot + 4*l +: 4] = '1;
      end else begin
        act_wdata[64*slot[0] + 8*l +: 8] = lz[l][7:0];
        act_wmask[64*slot[0] + 8*l +: 8] = '1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      ins   <= '0;
      i     <= '0;
      vpipe <= '0;
      done  <= 1'b0;
      for (int s = 0; s < LAT; s++) apipe[s] <= '0;
      for (int p = 0; p < 4; p++)
        for (int l = 0; l < LANES; l++) P[p][l] <= '0;
    end else begin
      done  <= 1'b0;
      vpipe <= {vpipe[LAT-2:0], issue};
      apipe[0] <= ins.c + i;
      for (int s = 1; s < LAT; s++) apipe[s] <= apipe[s-1];
      // parameter load: data of V_SETP returns one cycle after issue
      if (vpipe[0] && op == V_SETP)
        for (int l = 0; l < LANES; l++) P[p_sel][l] <= vec_rdata[0][32*l +: 32];
      unique case (state)
        S_IDLE: if (work) begin
          ins   <= cmd;
          i     <= '0;
          state <= (cmd.n0 == '0) ? S_DRAIN : S_RUN;
        end
        S_RUN: begin
          if (op == V_SETP || i == ins.n0 - 1'b1) state <= S_DRAIN;
          i <= i + 1'b1;
        end
        S_DRAIN: if (vpipe == '0 && !issue) state <= S_DONE;
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
