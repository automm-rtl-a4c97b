// tb_fp32_add: compares the adder with a reference built from double
// precision arithmetic (exact for the exponent gaps used here) and an
// independent round-to-nearest-even double->single conversion. Covers
// same and opposite signs, near-total cancellation, carries out of the
// significand, zero, infinity and NaN.
module tb_fp32_add;
  logic [31:0] a, b, s;
  int checks = 0, failures = 0;

  fp32_add dut (.a, .b, .s);

  function automatic real f2d(logic [31:0] f);
    if (f[30:23] == 0) return f[31] ? -0.0 : 0.0;
    return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
  endfunction

  // round a double to single, nearest even; flush tiny results to zero
  function automatic logic [31:0] d2f(real x);
    logic [63:0] d;
    int e;
    logic [23:0] m;
    logic [28:0] rest;
    logic up;
    d = $realtobits(x);
    if (d[62:0] == 0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:29]};
    rest = d[28:0];
    up = rest[28] && (rest[27:0] != 0 || m[0]);
    {e, m} = {e, m};
    if (up) begin
      if (m == 24'hFF_FFFF) begin m = 24'h80_0000; e++; end
      else m++;
    end
    if (e <= 0) return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] rnd_f(int emin, int emax);
    return {1'($urandom_range(0, 1)), 8'($urandom_range(emin, emax)), 23'($urandom)};
  endfunction

  task automatic check(logic [31:0] x, logic [31:0] y, logic [31:0] want);
    a = x; b = y; #1;
    checks++;
    if (s !== want) begin
      failures++;
      $display("%h + %h = %h want %h", x, y, s, want);
    end
  endtask

  initial begin
    // random pairs with exponent gap <= 28 (double sum exact)
    for (int n = 0; n < 20000; n++) begin
      logic [31:0] x, y;
      int ex;
      ex = $urandom_range(40, 200);
      x = rnd_f(ex, ex);
      y = rnd_f(ex - $urandom_range(0, 28), ex);
      if (n % 4 == 0) y = {~x[31], x[30:0] ^ 31'($urandom_range(0, 7))}; // cancellation
      check(x, y, d2f(f2d(x) + f2d(y)));
      check(y, x, d2f(f2d(x) + f2d(y)));
    end
    // integers as used by the accumulator tests
    for (int n = 0; n < 2000; n++) begin
      int p, q;
      p = $urandom_range(0, 1 << 20) - (1 << 19);
      q = $urandom_range(0, 1 << 20) - (1 << 19);
      check(d2f(real'(p)), d2f(real'(q)), d2f(real'(p + q)));
    end
    // large gap: result is the larger operand
    check(32'h4B80_0000, 32'h3F80_0000, 32'h4B80_0000);   // 2^24 + 1 -> 2^24 (tie to even)
    check(32'h4B80_0001, 32'h3F80_0000, 32'h4B80_0002);   // tie rounds up to even
    check(32'h3F80_0000, 32'h0000_0000, 32'h3F80_0000);
    check(32'h0000_0000, 32'h8000_0000, 32'h0000_0000);
    check(32'h7F80_0000, 32'h3F80_0000, 32'h7F80_0000);
    check(32'h7F80_0000, 32'hFF80_0000, 32'h7FC0_0000);
    check(32'h7F7F_FFFF, 32'h7F7F_FFFF, 32'h7F80_0000);   // overflow
    check(32'h4040_0000, 32'hC040_0000, 32'h0000_0000);   // 3 - 3
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
