// store_unit: DMA from the local buffers to off-chip memory.
//
// A Store instruction copies n0 words of bank bsel (activation, partial-sum
// or vector bank) of core `core`, starting at word address a, to DDR byte
// address ddr. Each bank word is sent as 1 (activation) or 2 (partial sum,
// vector) AXI beats, LSB first. The transfer is split into AXI4 incrementing
// write bursts of at most MAXB beats: the unit issues AW, streams the W
// beats and waits for the B response before the next burst. A bank word is
// read one cycle before its first beat is needed (one-cycle read latency),
// so there is one idle cycle on W per word. `done` pulses after the last B.
//
// The paper names Store as the DMA from the local buffers to off-chip memory
// over AXI; the burst policy and beat order are this design's choices.
module store_unit
  import qd_pkg::*;
#(
  parameter int MAXB = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 work,
  input  instr_t               cmd,
  output logic                 done,
  // AXI4 write (subset)
  output logic [AXI_AW-1:0]    awaddr,
  output logic [7:0]           awlen,
  output logic                 awvalid,
  input  logic                 awready,
  output logic [AXI_DW-1:0]    wdata,
  output logic                 wlast,
  output logic                 wvalid,
  input  logic                 wready,
  input  logic                 bvalid,
  output logic                 bready,
  // local buffer read (one-cycle latency)
  output logic                 rd_en,
  output buf_e                 rd_buf,
  output logic [3:0]           rd_core,
  output logic [ADDR_W-1:0]    rd_addr,
  input  logic [VEC_W-1:0]     rd_data
);
  typedef enum logic [2:0] {S_IDLE, S_AW, S_RD, S_WAIT, S_W, S_B, S_DONE} state_e;
  state_e state;

  instr_t            ins;
  logic [AXI_AW-1:0] addr;
  logic [19:0]       beats_left;
  logic [7:0]        beat_in_burst, cur_len;
  logic [1:0]        beat_in_word, bpw;
  logic [ADDR_W-1:0] word;
  logic [VEC_W-1:0]  wbuf;

  assign awaddr  = addr;
  assign awlen   = (beats_left > 20'(MAXB)) ? 8'(MAXB - 1) : 8'(beats_left - 1);
  assign awvalid = (state == S_AW);
  assign wvalid  = (state == S_W);
  assign wdata   = wbuf[beat_in_word*AXI_DW +: AXI_DW];
  assign wlast   = (beat_in_burst == cur_len);
  assign bready  = (state == S_B);
  assign rd_en   = (state == S_RD);
  assign rd_buf  = ins.bsel;
  assign rd_core = ins.core;
  assign rd_addr = ins.a + word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      ins           <= '0;
      addr          <= '0;
      beats_left    <= '0;
      beat_in_burst <= '0;
      cur_len       <= '0;
      beat_in_word  <= '0;
      bpw           <= 2'd1;
      word          <= '0;
      wbuf          <= '0;
      done          <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (work) begin
          ins          <= cmd;
          addr         <= cmd.ddr;
          bpw          <= (cmd.bsel == B_ACT) ? 2'd1 : 2'(VEC_W / AXI_DW);
          beats_left   <= 20'(cmd.n0) * ((cmd.bsel == B_ACT) ? 20'd1 : 20'(VEC_W / AXI_DW));
          beat_in_word <= '0;
          word         <= '0;
          state        <= (cmd.n0 == '0) ? S_DONE : S_AW;
        end
        S_AW: if (awready) begin
          cur_len       <= awlen;
          beat_in_burst <= '0;
          state         <= (beat_in_word == '0) ? S_RD : S_W;
        end
        S_RD:   state <= S_WAIT;
        S_WAIT: begin
          wbuf  <= rd_data;
          state <= S_W;
        end
        S_W: if (wready) begin
          beat_in_burst <= beat_in_burst + 1'b1;
          if (beat_in_word == bpw - 1'b1) begin
            beat_in_word <= '0;
            word         <= word + 1'b1;
          end else beat_in_word <= beat_in_word + 1'b1;
          if (wlast) state <= S_B;
          else if (beat_in_word == bpw - 1'b1) state <= S_RD;
        end
        S_B: if (bvalid) begin
          beats_left <= beats_left - (20'(cur_len) + 20'd1);
          addr       <= addr + AXI_AW'((32'(cur_len) + 1) * (AXI_DW / 8));
          state      <= (beats_left == 20'(cur_len) + 20'd1) ? S_DONE : S_AW;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_store_src: assert property (@(posedge clk) disable iff (!rst_n)
                                work && state == S_IDLE |-> cmd.bsel != B_WGT);
endmodule
