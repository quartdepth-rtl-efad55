// load_unit: DMA from off-chip memory into the local buffers.
//
// A Load instruction copies n0 buffer words from DDR byte address ddr into
// bank bsel at word address c, of core `core` or of every core when bcast is
// set. Bank words are wider than an AXI beat, so beats are packed LSB first:
// an activation word is 1 beat, a partial-sum or vector word 2 beats and a
// weight word N_COLS beats. The transfer is split into AXI4 incrementing read
// bursts of at most MAXB beats, one burst outstanding at a time. rready is
// held high, so the unit accepts one beat per cycle; a bank word is written
// on the cycle after its last beat arrives. `done` pulses one cycle after
// the final write.
//
// The paper describes Load as the DMA that moves data from off-chip memory
// (HBM or DDR) into the local buffers over AXI; the burst policy, packing
// order and broadcast option are this design's choices.
module load_unit
  import qd_pkg::*;
#(
  parameter int NUM_CORES = 8,
  parameter int MAXB      = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 work,
  input  instr_t               cmd,
  output logic                 done,
  // AXI4 read (subset)
  output logic [AXI_AW-1:0]    araddr,
  output logic [7:0]           arlen,
  output logic                 arvalid,
  input  logic                 arready,
  input  logic [AXI_DW-1:0]    rdata,
  input  logic                 rlast,
  input  logic                 rvalid,
  output logic                 rready,
  // local buffer write
  output logic                 wr_en,
  output buf_e                 wr_buf,
  output logic [NUM_CORES-1:0] wr_cores,
  output logic [ADDR_W-1:0]    wr_addr,
  output logic [WGT_W-1:0]     wr_data
);
  localparam int MAXBPW = WGT_W / AXI_DW;

  typedef enum logic [1:0] {S_IDLE, S_AR, S_R, S_DONE} state_e;
  state_e state;

  instr_t            ins;
  logic [AXI_AW-1:0] addr;
  logic [19:0]       beats_left;     // beats not yet requested
  logic [7:0]        cur_len;
  logic [3:0]        beat_in_word;
  logic [3:0]        bpw;
  logic [ADDR_W-1:0] word;
  logic [WGT_W-1:0]  shreg;

  function automatic logic [3:0] beats_per_word(input buf_e b);
    unique case (b)
      B_ACT:   return 4'd1;
      B_WGT:   return 4'(MAXBPW);
      default: return 4'(VEC_W / AXI_DW);
    endcase
  endfunction

  assign araddr  = addr;
  assign arlen   = (beats_left > 20'(MAXB)) ? 8'(MAXB - 1) : 8'(beats_left - 1);
  assign arvalid = (state == S_AR);
  assign rready  = (state == S_R);

  // pack LSB first: beat j of a bank word lands in bits [128*j +: 128]
  logic [WGT_W-1:0] nxt;
  always_comb begin
    nxt = shreg;
    nxt[beat_in_word*AXI_DW +: AXI_DW] = rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      ins          <= '0;
      addr         <= '0;
      beats_left   <= '0;
      cur_len      <= '0;
      beat_in_word <= '0;
      bpw          <= 4'd1;
      word         <= '0;
      shreg        <= '0;
      wr_en        <= 1'b0;
      wr_addr      <= '0;
      wr_data      <= '0;
      done         <= 1'b0;
    end else begin
      wr_en <= 1'b0;
      done  <= 1'b0;
      unique case (state)
        S_IDLE: if (work) begin
          ins          <= cmd;
          addr         <= cmd.ddr;
          bpw          <= beats_per_word(cmd.bsel);
          beats_left   <= 20'(cmd.n0) * 20'(beats_per_word(cmd.bsel));
          beat_in_word <= '0;
          word         <= '0;
          state        <= (cmd.n0 == '0) ? S_DONE : S_AR;
        end
        S_AR: if (arready) begin
          cur_len <= arlen;
          state   <= S_R;
        end
        S_R: if (rvalid) begin
          shreg <= nxt;
          if (beat_in_word == bpw - 1'b1) begin
            beat_in_word <= '0;
            wr_en        <= 1'b1;
            wr_addr      <= ins.c + word;
            wr_data      <= nxt;
            word         <= word + 1'b1;
          end else beat_in_word <= beat_in_word + 1'b1;
          if (rlast) begin
            beats_left <= beats_left - (20'(cur_len) + 20'd1);
            addr       <= addr + AXI_AW'((32'(cur_len) + 1) * (AXI_DW / 8));
            state      <= (beats_left == 20'(cur_len) + 20'd1) ? S_DONE : S_AR;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    wr_buf   = ins.bsel;
    wr_cores = ins.bcast ? '1 : (NUM_CORES'(1) << ins.core);
  end
endmodule
