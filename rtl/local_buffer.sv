// local_buffer: one bank of on-chip SRAM, written as an array.
//
// Each core holds four of these banks: activations (INT4/INT8 codes), weights
// (INT4 codes), partial sums (INT32) and vectors (FP32). A bank has two write
// ports with a per-bit write mask (so the VCU can write one slot of packed
// quantized codes while the Load unit fills other words) and NR read ports
// with one cycle of read latency. If both write ports hit the same word in
// one cycle, port 1 wins on the bits it enables.
//
// The paper shows a single "Local Buffer" block feeding Load, Store, MMU and
// VCU and mentions local SRAM; splitting it into banks, the port counts and
// the depths are this design's choices. In silicon each bank would be an SRAM
// macro; here it is a plain array.
module local_buffer #(
  parameter int W     = 128,
  parameter int DEPTH = 256,
  parameter int NR    = 2,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic [1:0]    we,
  input  logic [AW-1:0] waddr [2],
  input  logic [W-1:0]  wdata [2],
  input  logic [W-1:0]  wmask [2],
  input  logic [NR-1:0] re,
  input  logic [AW-1:0] raddr [NR],
  output logic [W-1:0]  rdata [NR]
);
  logic [W-1:0] mem [DEPTH];

  wire same = we[0] && we[1] && (waddr[0] == waddr[1]);

  always_ff @(posedge clk) begin
    if (we[0] && !same)
      mem[waddr[0]] <= (mem[waddr[0]] & ~wmask[0]) | (wdata[0] & wmask[0]);
    if (we[1])
      mem[waddr[1]] <= (((mem[waddr[1]] & ~(same ? wmask[0] : '0)) | (wdata[0] & (same ? wmask[0] : '0)))
                        & ~wmask[1]) | (wdata[1] & wmask[1]);
  end

  always_ff @(posedge clk) begin
    for (int r = 0; r < NR; r++)
      if (re[r]) rdata[r] <= mem[raddr[r]];
  end
endmodule
