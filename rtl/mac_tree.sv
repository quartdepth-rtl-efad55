// mac_tree: one multiply-accumulate tree of the MMU.
//
// Computes the dot product of one 128-bit activation word and one 128-bit
// weight word, both holding unsigned quantization codes, after subtracting
// the zero points (asymmetric quantization, x_hat = s * (x_q - zp)):
//   W4A4 (a8 = 0): 32 lanes, activation lane i = act[4i+3:4i]
//   W4A8 (a8 = 1): 16 lanes, activation lane i = act[8i+7:8i]
// Weight lane i is always wgt[4i+3:4i] (INT4). Each lane multiplies a signed
// 5-bit weight difference by a signed 9-bit activation difference; the
// products are summed by a balanced adder tree. Purely combinational.
//
// The paper specifies a multiply-accumulate tree array with multipliers and
// adders specialised for W4A4 and W4A8; the lane count and the zero-point
// subtraction before the multiplier are this design's choices.
module mac_tree #(
  parameter int LANES = 32
) (
  input  logic               a8,
  input  logic [4*LANES-1:0] act,
  input  logic [4*LANES-1:0] wgt,
  input  logic [7:0]         za,
  input  logic [3:0]         zw,
  output logic signed [31:0] sum
);
  logic signed [13:0] prod [LANES];

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic signed [8:0] av;
      logic signed [4:0] wv;
      if (a8) av = (i < LANES / 2) ? ($signed({1'b0, act[8*(i % (LANES / 2)) +: 8]}) - $signed({1'b0, za})) : 9'sd0;
      else    av = $signed({5'd0, act[4*i +: 4]}) - $signed({1'b0, za});
      wv = $signed({1'b0, wgt[4*i +: 4]}) - $signed({1'b0, zw});
      if (a8 && i >= LANES / 2) wv = 5'sd0;
      prod[i] = av * wv;
    end
    sum = '0;
    for (int i = 0; i < LANES; i++) sum = sum + 32'(prod[i]);
  end
endmodule
