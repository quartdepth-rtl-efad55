// qd_core: one compute core, an MMU and a VCU with their local buffer banks.
//
// The core holds four local_buffer banks:
//   act  (ACT_DEPTH x 128 b)       INT4/INT8 activation codes
//   wgt  (WGT_DEPTH x 8*128 b)     INT4 weight codes, one K slice per column
//   psum (PS_DEPTH  x 8*32 b)      INT32 MMU results
//   vec  (VEC_DEPTH x 8*32 b)      FP32 VCU operands and results
// Write port 0 of every bank belongs to the Load unit. Write port 1 belongs to
// the MMU (psum) or the VCU (act, vec). Read ports: act -> MMU, VCU, Store;
// wgt -> MMU; psum -> VCU, Store; vec -> VCU (two operands), Store. The Store
// read data is selected by the bank named in the store instruction and
// arrives one cycle after the request.
//
// The paper evaluates 2, 4 and 8 cores, a core being one MMU and one VCU; it
// does not say how cores share data. Here all cores receive the same MMU and
// VCU instructions and work on their own banks (each core holds a different
// slice of the output channels), and Load/Store address one core or all.
module qd_core
  import qd_pkg::*;
#(
  parameter int ACT_DEPTH = 512,
  parameter int WGT_DEPTH = 256,
  parameter int PS_DEPTH  = 256,
  parameter int VEC_DEPTH = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  // load write
  input  logic              ld_we,
  input  buf_e              ld_buf,
  input  logic [ADDR_W-1:0] ld_addr,
  input  logic [WGT_W-1:0]  ld_data,
  // store read
  input  logic              st_re,
  input  buf_e              st_buf,
  input  logic [ADDR_W-1:0] st_addr,
  output logic [VEC_W-1:0]  st_data,
  // unit control (broadcast)
  input  logic              mmu_work,
  input  logic              vcu_work,
  input  instr_t            cmd_mmu,
  input  instr_t            cmd_vcu,
  output logic              mmu_done,
  output logic              vcu_done
);
  localparam int ACT_AW = $clog2(ACT_DEPTH);
  localparam int WGT_AW = $clog2(WGT_DEPTH);
  localparam int PS_AW  = $clog2(PS_DEPTH);
  localparam int VEC_AW = $clog2(VEC_DEPTH);

  // ---------------- MMU <-> banks
  logic               m_act_re, m_wgt_re, m_ps_we;
  logic [ACT_AW-1:0]  m_act_addr;
  logic [WGT_AW-1:0]  m_wgt_addr;
  logic [PS_AW-1:0]   m_ps_addr;
  logic [PSUM_W-1:0]  m_ps_data;
  // ---------------- VCU <-> banks
  logic               v_ps_re, v_vec_we, v_act_re, v_act_we;
  logic [1:0]         v_vec_re;
  logic [PS_AW-1:0]   v_ps_addr;
  logic [VEC_AW-1:0]  v_vec_raddr [2];
  logic [VEC_AW-1:0]  v_vec_waddr;
  logic [VEC_W-1:0]   v_vec_wdata;
  logic [ACT_AW-1:0]  v_act_raddr, v_act_waddr;
  logic [ACT_W-1:0]   v_act_wdata, v_act_wmask;
  // ---------------- bank read data
  logic [ACT_W-1:0]   act_rd [3];
  logic [WGT_W-1:0]   wgt_rd [1];
  logic [PSUM_W-1:0]  ps_rd  [2];
  logic [VEC_W-1:0]   vec_rd [3];
  logic [VEC_W-1:0]   vcu_vec_rd [2];
  buf_e               st_buf_q;

  assign vcu_vec_rd[0] = vec_rd[0];
  assign vcu_vec_rd[1] = vec_rd[1];

  mmu #(.WGT_AW(WGT_AW), .ACT_AW(ACT_AW), .PS_AW(PS_AW)) u_mmu (
    .clk, .rst_n,
    .work     (mmu_work),
    .cmd      (cmd_mmu),
    .done     (mmu_done),
    .act_re   (m_act_re),
    .act_addr (m_act_addr),
    .act_data (act_rd[0]),
    .wgt_re   (m_wgt_re),
    .wgt_addr (m_wgt_addr),
    .wgt_data (wgt_rd[0]),
    .ps_we    (m_ps_we),
    .ps_addr  (m_ps_addr),
    .ps_data  (m_ps_data)
  );

  vcu #(.LANES(N_COLS), .ACT_AW(ACT_AW), .PS_AW(PS_AW), .VEC_AW(VEC_AW)) u_vcu (
    .clk, .rst_n,
    .work      (vcu_work),
    .cmd       (cmd_vcu),
    .done      (vcu_done),
    .ps_re     (v_ps_re),
    .ps_addr   (v_ps_addr),
    .ps_data   (ps_rd[0]),
    .vec_re    (v_vec_re),
    .vec_raddr (v_vec_raddr),
    .vec_rdata (vcu_vec_rd),
    .vec_we    (v_vec_we),
    .vec_waddr (v_vec_waddr),
    .vec_wdata (v_vec_wdata),
    .act_re    (v_act_re),
    .act_raddr (v_act_raddr),
    .act_rdata (act_rd[1]),
    .act_we    (v_act_we),
    .act_waddr (v_act_waddr),
    .act_wdata (v_act_wdata),
    .act_wmask (v_act_wmask)
  );

  // ---------------- banks
  local_buffer #(.W(ACT_W), .DEPTH(ACT_DEPTH), .NR(3)) u_act (
    .clk,
    .we    ({v_act_we, ld_we && ld_buf == B_ACT}),
    .waddr ('{ACT_AW'(ld_addr), v_act_waddr}),
    .wdata ('{ld_data[ACT_W-1:0], v_act_wdata}),
    .wmask ('{'1, v_act_wmask}),
    .re    ({st_re && st_buf == B_ACT, v_act_re, m_act_re}),
    .raddr ('{m_act_addr, v_act_raddr, ACT_AW'(st_addr)}),
    .rdata (act_rd)
  );

  local_buffer #(.W(WGT_W), .DEPTH(WGT_DEPTH), .NR(1)) u_wgt (
    .clk,
    .we    ({1'b0, ld_we && ld_buf == B_WGT}),
    .waddr ('{WGT_AW'(ld_addr), '0}),
    .wdata ('{ld_data, '0}),
    .wmask ('{'1, '0}),
    .re    (m_wgt_re),
    .raddr ('{m_wgt_addr}),
    .rdata (wgt_rd)
  );

  local_buffer #(.W(PSUM_W), .DEPTH(PS_DEPTH), .NR(2)) u_psum (
    .clk,
    .we    ({m_ps_we, ld_we && ld_buf == B_PSUM}),
    .waddr ('{PS_AW'(ld_addr), m_ps_addr}),
    .wdata ('{ld_data[PSUM_W-1:0], m_ps_data}),
    .wmask ('{'1, '1}),
    .re    ({st_re && st_buf == B_PSUM, v_ps_re}),
    .raddr ('{v_ps_addr, PS_AW'(st_addr)}),
    .rdata (ps_rd)
  );

  local_buffer #(.W(VEC_W), .DEPTH(VEC_DEPTH), .NR(3)) u_vec (
    .clk,
    .we    ({v_vec_we, ld_we && ld_buf == B_VEC}),
    .waddr ('{VEC_AW'(ld_addr), v_vec_waddr}),
    .wdata ('{ld_data[VEC_W-1:0], v_vec_wdata}),
    .wmask ('{'1, '1}),
    .re    ({st_re && st_buf == B_VEC, v_vec_re}),
    .raddr ('{v_vec_raddr[0], v_vec_raddr[1], VEC_AW'(st_addr)}),
    .rdata (vec_rd)
  );

  // ---------------- store read data (one cycle after the request)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) st_buf_q <= B_ACT;
    else if (st_re) st_buf_q <= st_buf;
  end

  always_comb begin
    unique case (st_buf_q)
      B_ACT:   st_data = VEC_W'(act_rd[2]);
      B_PSUM:  st_data = ps_rd[1];
      default: st_data = vec_rd[2];
    endcase
  end
endmodule
