// tb_util_pkg: reference arithmetic for the testbenches.
//
// Converts between binary32 bit patterns and SystemVerilog reals without
// using the design's own functions: f2r decodes a float exactly, r2f rounds
// a double to the nearest binary32 (ties to even, subnormals flushed to zero
// as the design does).
package tb_util_pkg;

  function automatic real f2r(input logic [31:0] f);
    real m;
    if (f[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    m = m * $pow(2.0, real'(int'(f[30:23]) - 127));
    return f[31] ? -m : m;
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic [52:0] m;
    logic [24:0] mr;
    int e;
    logic g, st;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:0]};
    g  = m[28];
    st = |m[27:0];
    mr = {1'b0, m[52:29]} + 25'(g & (st | m[29]));
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), mr[22:0]};
  endfunction

  // round half to even
  function automatic longint rne(input real r);
    real fl;
    longint i;
    fl = $floor(r);
    i  = longint'(fl);
    if (r - fl > 0.5) return i + 1;
    if (r - fl < 0.5) return i;
    return (i % 2 == 0) ? i : i + 1;
  endfunction

  function automatic real rabs(input real r);
    return (r < 0.0) ? -r : r;
  endfunction

  function automatic real log2r(input real r);
    return $ln(r) / $ln(2.0);
  endfunction

endpackage
