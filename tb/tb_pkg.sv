// tb_pkg: helpers shared by the testbenches: FP32 <-> double conversion with
// round-to-nearest-even and flush-to-zero, done on the bit patterns, and
// conversion of small integers to FP32 so that expected sums can be formed
// exactly in integer arithmetic.
package tb_pkg;

  function automatic logic [63:0] f2d(input logic [31:0] f);
    if (f[30:23] == 0) return {f[31], 63'd0};
    return {f[31], 11'(f[30:23]) + 11'd896, f[22:0], 29'd0};
  endfunction

  function automatic logic [31:0] d2f(input logic [63:0] d);
    logic [52:0] m;
    logic [24:0] r;
    int e;
    if (d[62:0] == 0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 896;
    m = {1'b1, d[51:0]};
    r = {1'b0, m[52:29]} + 25'(m[28] && ((m[27:0] != 0) || m[29]));
    if (r[24]) begin r = r >> 1; e++; end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), r[22:0]};
  endfunction

  function automatic logic [31:0] i2f(input int v);
    return d2f($realtobits(real'(v)));
  endfunction

  function automatic int f2i(input logic [31:0] f);
    return int'($bitstoreal(f2d(f)));
  endfunction

endpackage
