// axi_mem_model: behavioural off-chip memory (DDR) for the testbenches.
//
// Two AXI4 read ports and one write port (the same subset the accelerator
// uses) share one array of 128-bit words. A read burst starts LAT cycles
// after its address is accepted; with STALL set, beats and write-ready are
// withheld at random to exercise back-pressure. Byte addresses must be
// 16-byte aligned. Not synthesizable, testbench only.
module axi_mem_model #(
  parameter int WORDS = 8192,
  parameter int LAT   = 4,
  parameter bit STALL = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [31:0]  araddr [2],
  input  logic [7:0]   arlen [2],
  input  logic [1:0]   arvalid,
  output logic [1:0]   arready,
  output logic [127:0] rdata [2],
  output logic [1:0]   rlast,
  output logic [1:0]   rvalid,
  input  logic [1:0]   rready,
  input  logic [31:0]  awaddr,
  input  logic [7:0]   awlen,
  input  logic         awvalid,
  output logic         awready,
  input  logic [127:0] wdata,
  input  logic         wlast,
  input  logic         wvalid,
  output logic         wready,
  output logic         bvalid,
  input  logic         bready
);
  logic [127:0] mem [WORDS];

  // ---------------- read ports
  for (genvar p = 0; p < 2; p++) begin : g_rd
    int unsigned waddr_q, left, wait_c;
    logic busy, stall;
    assign arready[p] = !busy;
    assign rvalid[p]  = busy && wait_c == 0 && !stall;
    assign rdata[p]   = mem[waddr_q % WORDS];
    assign rlast[p]   = (left == 0);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        busy <= 1'b0; waddr_q <= 0; left <= 0; wait_c <= 0; stall <= 1'b0;
      end else begin
        stall <= STALL && ($urandom % 4 == 0);
        if (!busy && arvalid[p]) begin
          busy    <= 1'b1;
          waddr_q <= araddr[p] / 16;
          left    <= arlen[p];
          wait_c  <= LAT;
        end else if (busy) begin
          if (wait_c != 0) wait_c <= wait_c - 1;
          else if (rvalid[p] && rready[p]) begin
            if (left == 0) busy <= 1'b0;
            else begin
              left    <= left - 1;
              waddr_q <= waddr_q + 1;
            end
          end
        end
      end
    end
  end

  // ---------------- write port
  int unsigned wa;
  logic wbusy, bpend, wstall;
  assign awready = !wbusy && !bpend;
  assign wready  = wbusy && !wstall;
  assign bvalid  = bpend;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbusy <= 1'b0; bpend <= 1'b0; wa <= 0; wstall <= 1'b0;
    end else begin
      wstall <= STALL && ($urandom % 4 == 0);
      if (awvalid && awready) begin
        wbusy <= 1'b1;
        wa    <= awaddr / 16;
      end
      if (wvalid && wready) begin
        mem[wa % WORDS] <= wdata;
        wa <= wa + 1;
        if (wlast) begin
          wbusy <= 1'b0;
          bpend <= 1'b1;
        end
      end
      if (bpend && bready) bpend <= 1'b0;
    end
  end
endmodule
