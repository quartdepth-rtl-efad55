// qd_pkg: types and constants shared by the QuartDepth-style accelerator.
//
// The accelerator is driven by a stream of 128-bit instructions, one per AXI
// beat. Each instruction names the unit that executes it (Load, Store, MMU or
// VCU), carries a pair of dependency masks that the synchronizer evaluates
// (wait_m: units whose completion tokens must be available before it starts;
// sig_m: units that receive a token when it finishes), and generic operand
// fields whose meaning depends on the unit and opcode. The paper names the
// units and the Dispatch/Synchronizer/FIFO structure; the instruction format,
// the token-based dependency scheme and all sizes here are this design's
// own choices.
package qd_pkg;

  // ---------------------------------------------------------------- sizes
  parameter int AXI_DW    = 128;  // AXI data width (one instruction per beat)
  parameter int AXI_AW    = 32;   // AXI byte address width
  parameter int K_LANES   = 32;   // MAC-tree inputs: 32 x INT4 = one 128-bit word
  parameter int N_COLS    = 8;    // MAC trees per MMU = FPU lanes per VCU
  parameter int ACC_W     = 32;   // accumulator width
  parameter int ADDR_W    = 12;   // local-buffer word address width in instructions
  parameter int ACT_W     = AXI_DW;             // activation word: 32 x A4 or 16 x A8
  parameter int WGT_W     = N_COLS * AXI_DW;    // weight word: one 128-bit K slice per column
  parameter int PSUM_W    = N_COLS * ACC_W;     // one row of INT32 partial sums
  parameter int VEC_W     = N_COLS * 32;        // one row of FP32 values

  // ---------------------------------------------------------------- units
  typedef enum logic [1:0] {
    U_LOAD  = 2'd0,
    U_STORE = 2'd1,
    U_MMU   = 2'd2,
    U_VCU   = 2'd3
  } unit_e;
  parameter int NUM_UNITS = 4;

  // Local buffer selector used by Load and Store
  typedef enum logic [1:0] {
    B_ACT  = 2'd0,
    B_WGT  = 2'd1,
    B_PSUM = 2'd2,
    B_VEC  = 2'd3
  } buf_e;

  // ---------------------------------------------------------------- opcodes
  // MMU
  parameter logic [4:0] M_GEMM_A4 = 5'd0;  // W4A4 GeMM tile
  parameter logic [4:0] M_GEMM_A8 = 5'd1;  // W4A8 GeMM tile
  parameter logic [4:0] M_SETZ    = 5'd2;  // load per-column weight zero points

  // VCU
  typedef enum logic [4:0] {
    V_SETP  = 5'd0,   // P[p] <- vec[a]
    V_DEQ   = 5'd1,   // vec[c] <- fp(psum[a]) * P[p]
    V_ADD   = 5'd2,   // vec[c] <- vec[a] + vec[b]
    V_MUL   = 5'd3,   // vec[c] <- vec[a] * vec[b]
    V_ADDP  = 5'd4,   // vec[c] <- vec[a] + P[p]
    V_MULP  = 5'd5,   // vec[c] <- vec[a] * P[p]
    V_RELU  = 5'd6,   // vec[c] <- max(vec[a], 0)
    V_LOG2  = 5'd7,   // vec[c] <- log2(vec[a])
    V_EXP2  = 5'd8,   // vec[c] <- 2^vec[a]
    V_POL   = 5'd9,   // LogNP polish, alpha = P[p], log2(alpha) = P[p+1]
    V_UNPOL = 5'd10,  // LogNP unpolish, same parameters
    V_QNT4  = 5'd11,  // act[c] slot s <- clip(round(x*P[p] + P[p+1]), 0, 15)
    V_QNT8  = 5'd12,  // act[c] slot s <- clip(round(x*P[p] + P[p+1]), 0, 255)
    V_DQ4   = 5'd13,  // vec[c] <- (code4(act[a] slot s) - P[p+1]) * P[p]
    V_DQ8   = 5'd14   // vec[c] <- (code8(act[a] slot s) - P[p+1]) * P[p]
  } vop_e;

  // ---------------------------------------------------------------- instruction
  typedef struct packed {
    logic              last;    // final instruction of the program
    unit_e             unit;    // executing unit
    logic [3:0]        wait_m;  // bit u: consume one token from unit u before start
    logic [3:0]        sig_m;   // bit u: give one token to unit u on completion
    logic [4:0]        op;      // unit-specific opcode
    logic [3:0]        core;    // Load/Store: target core
    logic              bcast;   // Load: write the same data to every core
    buf_e              bsel;    // Load/Store: local buffer; VCU: source is psum when B_PSUM
    logic [31:0]       ddr;     // Load/Store: DDR byte address
    logic [ADDR_W-1:0] a;       // source address
    logic [ADDR_W-1:0] b;       // second source address
    logic [ADDR_W-1:0] c;       // destination address
    logic [ADDR_W-1:0] n0;      // rows / words
    logic [ADDR_W-1:0] n1;      // MMU: K words per row
    logic [7:0]        imm;     // MMU: activation zero point; VCU: {slot[3:2], p[1:0]}
    logic [4:0]        rsvd;
  } instr_t;

  parameter int INSTR_W = $bits(instr_t);

endpackage
