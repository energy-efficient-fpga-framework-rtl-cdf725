// tb_fp32_arith: self-checking test of fp32_mul and fp32_add.
//
// Reference results are formed in double precision, where the product of two
// FP32 values is exact and so is the sum of two FP32 values whose exponents
// differ by at most 25; the exact double is then rounded to FP32 (nearest,
// ties to even, subnormals flushed) by bit manipulation on the double. Random
// normal operands are checked against that, plus directed cases: zeros,
// infinities, NaN, exact cancellation, ties, overflow, underflow and a far
// smaller addend.
module tb_fp32_arith;
  logic [31:0] a, b, ym, ya;
  int checks = 0, failures = 0;

  fp32_mul u_mul (.a(a), .b(b), .y(ym));
  fp32_add u_add (.a(a), .b(b), .y(ya));

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

  function automatic logic [31:0] rnd_norm(input int emin, input int emax);
    int e = emin + int'($urandom % (emax - emin + 1));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%h b=%h got=%h exp=%h", what, a, b, got, exp);
    end
  endtask

  initial begin
    // random multiplies, normal range results
    for (int i = 0; i < 3000; i++) begin
      a = rnd_norm(70, 180); b = rnd_norm(70, 180);
      #1 check("mul", ym, d2f($realtobits($bitstoreal(f2d(a)) * $bitstoreal(f2d(b)))));
    end
    // random adds with exponents close enough for an exact double sum
    for (int i = 0; i < 3000; i++) begin
      a = rnd_norm(100, 150);
      b = {1'($urandom), 8'(int'(a[30:23]) - 12 + int'($urandom % 25)), 23'($urandom)};
      #1 check("add", ya, d2f($realtobits($bitstoreal(f2d(a)) + $bitstoreal(f2d(b)))));
    end
    // near-cancelling adds
    for (int i = 0; i < 500; i++) begin
      a = rnd_norm(100, 150);
      b = {~a[31], a[30:23], a[22:0] ^ 23'($urandom % 64)};
      #1 check("cancel", ya, d2f($realtobits($bitstoreal(f2d(a)) + $bitstoreal(f2d(b)))));
    end
    // directed
    a = 32'h3F80_0000; b = 32'h4000_0000; #1 check("1*2", ym, 32'h4000_0000); check("1+2", ya, 32'h4040_0000);
    a = 32'h3F80_0000; b = 32'hBF80_0000; #1 check("1-1", ya, 32'h0000_0000);
    a = 32'h7F80_0000; b = 32'h0000_0000; #1 check("inf*0", ym, 32'h7FC0_0000); check("inf+0", ya, 32'h7F80_0000);
    a = 32'h7F80_0000; b = 32'hFF80_0000; #1 check("inf-inf", ya, 32'h7FC0_0000); check("inf*-inf", ym, 32'hFF80_0000);
    a = 32'h7FC0_1234; b = 32'h3F80_0000; #1 check("nan*1", ym, 32'h7FC0_0000); check("nan+1", ya, 32'h7FC0_0000);
    a = 32'h7F00_0000; b = 32'h7F00_0000; #1 check("ovf mul", ym, 32'h7F80_0000); check("ovf add", ya, 32'h7F80_0000);
    a = 32'h0080_0000; b = 32'h3F00_0000; #1 check("uf mul", ym, 32'h0000_0000);
    a = 32'h0000_0001; b = 32'h3F80_0000; #1 check("sub in", ym, 32'h0000_0000); check("sub in add", ya, 32'h3F80_0000);
    a = 32'h8000_0000; b = 32'h8000_0000; #1 check("-0+-0", ya, 32'h8000_0000);
    a = 32'h4B80_0000; b = 32'h3F80_0000; #1 check("tie even", ya, 32'h4B80_0000);   // 2^24 + 1
    a = 32'h4B80_0001; b = 32'h3F80_0000; #1 check("tie up", ya, 32'h4B80_0002);     // (2^24+2) + 1
    a = 32'h3F80_0000; b = 32'h2800_0000; #1 check("tiny add", ya, 32'h3F80_0000);
    a = 32'h3F80_0000; b = 32'hA800_0000; #1 check("tiny sub", ya, 32'h3F80_0000);
    a = 32'h3FFF_FFFF; b = 32'h3FFF_FFFF; #1 check("max mant", ym, d2f($realtobits($bitstoreal(f2d(a)) * $bitstoreal(f2d(b)))));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
