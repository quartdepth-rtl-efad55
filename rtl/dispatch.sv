// dispatch: instruction fetch over AXI and distribution to the unit FIFOs.
//
// On a start pulse the dispatcher reads the program from off-chip memory,
// starting at byte address base, as AXI4 incrementing read bursts of BURST
// beats (one 128-bit instruction per beat). Each returned instruction is
// pushed into the FIFO of the unit named in its unit field. When the target
// FIFO is full, rready is dropped and the burst stalls (back-pressure). The
// instruction with its last bit set ends the program: any beats of the same
// burst after it are drained and discarded and no further burst is issued;
// then fetch_done rises and stays high until the next start.
//
// The paper says only that Dispatch fetches instructions over the AXI bus and
// distributes them to the local instruction FIFOs; burst size, the last-bit
// convention and the back-pressure rule are this design's choices.
module dispatch
  import qd_pkg::*;
#(
  parameter int BURST = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [AXI_AW-1:0]    base,
  output logic                 fetch_done,
  // AXI4 read address / data channels (subset)
  output logic [AXI_AW-1:0]    araddr,
  output logic [7:0]           arlen,
  output logic                 arvalid,
  input  logic                 arready,
  input  logic [AXI_DW-1:0]    rdata,
  input  logic                 rlast,
  input  logic                 rvalid,
  output logic                 rready,
  // FIFO push side
  output logic [NUM_UNITS-1:0] push,
  output instr_t               push_data,
  input  logic [NUM_UNITS-1:0] fifo_full
);
  typedef enum logic [1:0] {S_IDLE, S_AR, S_R, S_DONE} state_e;
  state_e state;
  logic [AXI_AW-1:0] addr;
  logic              seen_last;

  instr_t rin;
  assign rin       = instr_t'(rdata);
  assign push_data = rin;

  // Accept a beat when its unit's FIFO has room, or always while draining.
  assign rready  = (state == S_R) && (seen_last || !fifo_full[rin.unit]);
  assign araddr  = addr;
  assign arlen   = 8'(BURST - 1);
  assign arvalid = (state == S_AR);

  always_comb begin
    push = '0;
    if (state == S_R && rvalid && rready && !seen_last) push[rin.unit] = 1'b1;
  end

  assign fetch_done = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      addr      <= '0;
      seen_last <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          state     <= S_AR;
          addr      <= base;
          seen_last <= 1'b0;
        end
        S_AR: if (arready) state <= S_R;
        S_R: if (rvalid && rready) begin
          if (!seen_last && rin.last) seen_last <= 1'b1;
          if (rlast) begin
            addr  <= addr + AXI_AW'(BURST * AXI_DW / 8);
            state <= (seen_last || rin.last) ? S_DONE : S_AR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_push_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(push));
endmodule
