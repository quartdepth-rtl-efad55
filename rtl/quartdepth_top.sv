// quartdepth_top: the programmable W4A4 / W4A8 inference accelerator.
//
// Structure (following the block diagram of the paper): Dispatch fetches the
// instruction stream over AXI and sorts it into four instruction FIFOs, one
// per execution unit; the Synchronizer starts each unit (work) when its next
// instruction's dependencies are met and collects its completion (done); the
// Load and Store units move data between off-chip memory (AXI) and the local
// buffers; NUM_CORES cores, each one MMU and one VCU with their own buffer
// banks, execute the matrix and vector instructions in lock step.
//
// Because every unit has its own FIFO and is started independently, loading
// the operands of instruction cycle N+1, the matrix work of cycle N and the
// vector / store work of earlier cycles run at the same time; the program
// expresses the order it needs through the wait/signal masks (see
// synchronizer).
//
// Interface: start (one-cycle pulse) with the byte address of the program;
// done rises when the last instruction has been fetched and every unit is
// idle with its FIFO empty. Three AXI4 master ports (subset: no id, size,
// burst type, strobes or response codes): instruction fetch (read), Load
// (read) and Store (write). All are synchronous to clk; reset is active low
// and asynchronous.
//
// What follows the paper: the set of blocks and their connections, INT4/INT8
// MAC trees in the MMU, FP32 VCU with log2/exp2 SFU, LogNP polishing, and 8
// cores. Everything else (widths, depths, instruction format, token-based
// synchronisation, core data layout) is this design's own.
module quartdepth_top
  import qd_pkg::*;
#(
  parameter int NUM_CORES = 8,
  parameter int FIFO_DEPTH = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [AXI_AW-1:0]    prog_base,
  output logic                 done,
  // instruction fetch AXI read
  output logic [AXI_AW-1:0]    i_araddr,
  output logic [7:0]           i_arlen,
  output logic                 i_arvalid,
  input  logic                 i_arready,
  input  logic [AXI_DW-1:0]    i_rdata,
  input  logic                 i_rlast,
  input  logic                 i_rvalid,
  output logic                 i_rready,
  // load AXI read
  output logic [AXI_AW-1:0]    l_araddr,
  output logic [7:0]           l_arlen,
  output logic                 l_arvalid,
  input  logic                 l_arready,
  input  logic [AXI_DW-1:0]    l_rdata,
  input  logic                 l_rlast,
  input  logic                 l_rvalid,
  output logic                 l_rready,
  // store AXI write
  output logic [AXI_AW-1:0]    s_awaddr,
  output logic [7:0]           s_awlen,
  output logic                 s_awvalid,
  input  logic                 s_awready,
  output logic [AXI_DW-1:0]    s_wdata,
  output logic                 s_wlast,
  output logic                 s_wvalid,
  input  logic                 s_wready,
  input  logic                 s_bvalid,
  output logic                 s_bready,
  // status
  output logic [NUM_UNITS-1:0] unit_busy,
  output logic [NUM_UNITS-1:0] unit_blocked
);
  // ---------------- dispatch -> FIFOs
  logic [NUM_UNITS-1:0] push, full, empty, pop, work, udone;
  instr_t               push_data;
  instr_t               head [NUM_UNITS];
  instr_t               cmd  [NUM_UNITS];
  logic                 fetch_done, idle, started;

  dispatch #(.BURST(16)) u_dispatch (
    .clk, .rst_n,
    .start      (start),
    .base       (prog_base),
    .fetch_done (fetch_done),
    .araddr     (i_araddr),
    .arlen      (i_arlen),
    .arvalid    (i_arvalid),
    .arready    (i_arready),
    .rdata      (i_rdata),
    .rlast      (i_rlast),
    .rvalid     (i_rvalid),
    .rready     (i_rready),
    .push       (push),
    .push_data  (push_data),
    .fifo_full  (full)
  );

  for (genvar u = 0; u < NUM_UNITS; u++) begin : g_fifo
    logic [INSTR_W-1:0] dout;
    logic [$clog2(FIFO_DEPTH):0] count;
    inst_fifo #(.WIDTH(INSTR_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .push  (push[u]),
      .din   (push_data),
      .full  (full[u]),
      .pop   (pop[u]),
      .dout  (dout),
      .empty (empty[u]),
      .count (count)
    );
    assign head[u] = instr_t'(dout);
  end

  synchronizer u_sync (
    .clk, .rst_n,
    .head    (head),
    .empty   (empty),
    .pop     (pop),
    .work    (work),
    .cmd     (cmd),
    .done    (udone),
    .busy    (unit_busy),
    .idle    (idle),
    .blocked (unit_blocked)
  );

  // ---------------- Load / Store
  logic                 ld_we;
  buf_e                 ld_buf;
  logic [NUM_CORES-1:0] ld_cores;
  logic [ADDR_W-1:0]    ld_addr;
  logic [WGT_W-1:0]     ld_data;
  logic                 st_re;
  buf_e                 st_buf;
  logic [3:0]           st_core, st_core_q;
  logic [ADDR_W-1:0]    st_addr;
  logic [VEC_W-1:0]     st_data;
  logic [VEC_W-1:0]     core_st_data [NUM_CORES];

  load_unit #(.NUM_CORES(NUM_CORES)) u_load (
    .clk, .rst_n,
    .work     (work[U_LOAD]),
    .cmd      (cmd[U_LOAD]),
    .done     (udone[U_LOAD]),
    .araddr   (l_araddr),
    .arlen    (l_arlen),
    .arvalid  (l_arvalid),
    .arready  (l_arready),
    .rdata    (l_rdata),
    .rlast    (l_rlast),
    .rvalid   (l_rvalid),
    .rready   (l_rready),
    .wr_en    (ld_we),
    .wr_buf   (ld_buf),
    .wr_cores (ld_cores),
    .wr_addr  (ld_addr),
    .wr_data  (ld_data)
  );

  store_unit u_store (
    .clk, .rst_n,
    .work    (work[U_STORE]),
    .cmd     (cmd[U_STORE]),
    .done    (udone[U_STORE]),
    .awaddr  (s_awaddr),
    .awlen   (s_awlen),
    .awvalid (s_awvalid),
    .awready (s_awready),
    .wdata   (s_wdata),
    .wlast   (s_wlast),
    .wvalid  (s_wvalid),
    .wready  (s_wready),
    .bvalid  (s_bvalid),
    .bready  (s_bready),
    .rd_en   (st_re),
    .rd_buf  (st_buf),
    .rd_core (st_core),
    .rd_addr (st_addr),
    .rd_data (st_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) st_core_q <= '0;
    else if (st_re) st_core_q <= st_core;
  end
  always_comb begin
    st_data = '0;
    for (int c = 0; c < NUM_CORES; c++)
      if (st_core_q == 4'(c)) st_data = core_st_data[c];
  end

  // ---------------- cores
  logic [NUM_CORES-1:0] mmu_done, vcu_done;

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    qd_core u_core (
      .clk, .rst_n,
      .ld_we    (ld_we && ld_cores[c]),
      .ld_buf   (ld_buf),
      .ld_addr  (ld_addr),
      .ld_data  (ld_data),
      .st_re    (st_re && st_core == 4'(c)),
      .st_buf   (st_buf),
      .st_addr  (st_addr),
      .st_data  (core_st_data[c]),
      .mmu_work (work[U_MMU]),
      .vcu_work (work[U_VCU]),
      .cmd_mmu  (cmd[U_MMU]),
      .cmd_vcu  (cmd[U_VCU]),
      .mmu_done (mmu_done[c]),
      .vcu_done (vcu_done[c])
    );
  end

  // The cores run in lock step; a unit is done when every core is.
  assign udone[U_MMU] = &mmu_done;
  assign udone[U_VCU] = &vcu_done;

  // ---------------- completion
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) started <= 1'b0;
    else if (start) started <= 1'b1;
  end
  assign done = started && fetch_done && idle && !start;

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               (mmu_done == '0 || mmu_done == '1) && (vcu_done == '0 || vcu_done == '1));
endmodule
