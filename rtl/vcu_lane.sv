// vcu_lane: one FP32 floating-point unit of the vector computation array.
//
// A five-stage pipeline; every operation passes through all five stages, so
// a result leaves exactly 5 cycles after its operands enter (one result per
// cycle). What each stage does is selected by the opcode:
//   st1 convert : INT32 partial sum or INT4/INT8 code -> FP32 (DEQ, DQ4/8)
//   st2 arith   : x*P0 (DEQ, MULP, QNT), x*y, x+y, x+P0, ReLU,
//                 |x|+alpha (POL), |x|+log2(alpha) (UNPOL), code-zp (DQ)
//   st3 SFU-1   : log2 / exp2 polynomial (LOG2, POL / EXP2, UNPOL),
//                 +zp (QNT), *scale (DQ)
//   st4 SFU-2   : normalise the SFU result to FP32; round and clip to
//                 0..15 or 0..255 (QNT4 / QNT8)
//   st5 post    : -log2(alpha) (POL) or -alpha (UNPOL), then restore sign
// LogNP polishing (Phi(x) = sign(x)[log2(|x|+alpha) - log2 alpha]) and its
// inverse (sign(x)[2^(|x| + log2 alpha) - alpha]) therefore take one pass
// each, with the special function itself occupying stages 3 and 4.
// Per-channel parameters: P0 = alpha / scale, P1 = log2(alpha) / zero point,
// both FP32. The QNT result is the unsigned code in bits [7:0].
//
// The paper gives the FPU array, the SFU computing log2 and exp by
// polynomial approximation within 3 to 5 cycles, the conversion of INT
// inputs to FP32 and back, and the polishing equations. The stage split and
// opcode set are this design's own.
module vcu_lane
  import qd_pkg::*;
  import qd_fp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  vop_e        op,
  input  logic [31:0] x,     // FP32, INT32 (DEQ) or code (DQ4/DQ8)
  input  logic [31:0] y,     // FP32 second operand (ADD, MUL)
  input  logic [31:0] p0,
  input  logic [31:0] p1,
  output logic        out_valid,
  output logic [31:0] z
);
  localparam logic [31:0] NEG = 32'h8000_0000;

  logic        v1, v2, v3, v4, v5;
  vop_e        o1, o2, o3, o4;
  logic        s2, s3, s4;         // sign of the input
  logic        zr2, zr3, zr4;      // input was zero
  logic [31:0] x1, y1, a2, r3, r4, r5;
  logic signed [63:0] fx3;
  exp2_t       ex3;

  // quantiser clip of stage 4 (round to nearest even, clip to the code range)
  logic signed [31:0] qraw, qmax;
  logic [31:0]        qclip;
  always_comb begin
    qraw = fp2int(r3);
    qmax = (o3 == V_QNT4) ? 32'sd15 : 32'sd255;
    if (qraw < 0)         qclip = 32'd0;
    else if (qraw > qmax) qclip = 32'(qmax);
    else                  qclip = 32'(qraw);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, v2, v3, v4, v5} <= '0;
      {o1, o2, o3, o4}     <= {4{V_SETP}};
      {s2, s3, s4}         <= '0;
      {zr2, zr3, zr4}      <= '0;
      {x1, y1, a2, r3, r4, r5} <= '0;
      fx3 <= '0;
      ex3 <= '0;
    end else begin
      // ---- st1: convert
      v1 <= in_valid;
      o1 <= op;
      y1 <= y;
      unique case (op)
        V_DEQ:        x1 <= int2fp(x);
        V_DQ4, V_DQ8: x1 <= int2fp({24'd0, x[7:0]});
        default:      x1 <= x;
      endcase
      // ---- st2: arithmetic
      v2  <= v1;
      o2  <= o1;
      s2  <= x1[31];
      zr2 <= is_zero(x1);
      unique case (o1)
        V_DEQ, V_MULP, V_QNT4, V_QNT8: a2 <= fmul(x1, p0);
        V_MUL:        a2 <= fmul(x1, y1);
        V_ADD:        a2 <= fadd(x1, y1);
        V_ADDP:       a2 <= fadd(x1, p0);
        V_RELU:       a2 <= x1[31] ? 32'd0 : x1;
        V_POL:        a2 <= fadd(fabs(x1), p0);
        V_UNPOL:      a2 <= fadd(fabs(x1), p1);
        V_DQ4, V_DQ8: a2 <= fadd(x1, p1 ^ NEG);
        default:      a2 <= x1;
      endcase
      // ---- st3: SFU first half
      v3  <= v2;
      o3  <= o2;
      s3  <= s2;
      zr3 <= zr2;
      fx3 <= log2_fix(a2);
      ex3 <= exp2_fix(a2);
      unique case (o2)
        V_QNT4, V_QNT8: r3 <= fadd(a2, p1);
        V_DQ4, V_DQ8:   r3 <= fmul(a2, p0);
        default:        r3 <= a2;
      endcase
      // ---- st4: SFU second half / quantiser
      v4  <= v3;
      o4  <= o3;
      s4  <= s3;
      zr4 <= zr3;
      unique case (o3)
        V_LOG2, V_POL:   r4 <= fix2fp(fx3, FRAC);
        V_EXP2, V_UNPOL: r4 <= exp2_pack(ex3);
        V_QNT4, V_QNT8:  r4 <= qclip;
        default:         r4 <= r3;
      endcase
      // ---- st5: post-processing
      v5 <= v4;
      unique case (o4)
        V_POL:   r5 <= zr4 ? 32'd0 : (fabs(fadd(r4, p1 ^ NEG)) | {s4, 31'd0});
        V_UNPOL: r5 <= zr4 ? 32'd0 : (fabs(fadd(r4, p0 ^ NEG)) | {s4, 31'd0});
        default: r5 <= r4;
      endcase
    end
  end

  assign out_valid = v5;
  assign z         = r5;
endmodule
