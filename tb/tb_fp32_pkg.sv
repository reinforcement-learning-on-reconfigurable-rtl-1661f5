// tb_fp32_pkg: checks the single-precision helpers against real arithmetic.
// i2f of any integer up to 53 bits, fmul of any two floats and fadd of two
// floats whose exponents differ by at most 28 must equal the real result
// rounded to single precision (exactly representable in real before the
// rounding). f2fix must equal the real value times 2^12, rounded half away
// from zero and saturated to 16 bits.
module tb_fp32_pkg;
  import fp32_pkg::*;
  `include "fp32_ref.svh"
  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] rnd_f(int emin, int emax);
    return {1'($urandom), 8'(emin + int'($urandom % (emax - emin + 1))), 23'($urandom)};
  endfunction

  task automatic check(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    logic [31:0] a, b;
    longint v, fx;
    real x;
    // i2f
    check(i2f(0), 32'h0, "i2f 0");
    check(i2f(1), 32'h3F80_0000, "i2f 1");
    check(i2f(-3), 32'hC040_0000, "i2f -3");
    check(i2f(64'sd16777217), 32'h4B80_0000, "i2f 2^24+1 tie to even");
    for (int i = 0; i < 20000; i++) begin
      v = longint'({$urandom, $urandom}) >>> ($urandom % 64);
      if (v >= (longint'(1) << 52) || v <= -(longint'(1) << 52)) v = v >>> 12;
      check(i2f(v), r2f(real'(v)), "i2f");
    end
    // fmul
    check(fmul(32'h3FC0_0000, 32'h4000_0000), 32'h4040_0000, "1.5*2");
    for (int i = 0; i < 20000; i++) begin
      a = rnd_f(64, 190); b = rnd_f(64, 190);
      check(fmul(a, b), r2f(f2r(a) * f2r(b)), "fmul");
    end
    check(fmul(32'h0080_0000, 32'h3F00_0000), 32'h0, "fmul underflow flush");
    check(fmul(32'h7F00_0000, 32'h4000_0000), 32'h7F80_0000, "fmul overflow");
    // fadd
    check(fadd(32'h3F80_0000, 32'hBF80_0000), 32'h0, "1-1");
    check(fadd(32'h0, 32'h4040_0000), 32'h4040_0000, "0+3");
    for (int i = 0; i < 40000; i++) begin
      a = rnd_f(100, 150); b = rnd_f(100, 150);
      if (i % 4 == 0) b[30:23] = a[30:23];           // cancellation cases
      if (i % 8 == 1) b = {~a[31], a[30:1], ~a[0]};  // near-total cancellation
      if (int'(a[30:23]) - int'(b[30:23]) > 28 || int'(b[30:23]) - int'(a[30:23]) > 28) continue;
      check(fadd(a, b), r2f(f2r(a) + f2r(b)), "fadd");
    end
    // f2fix
    for (int i = 0; i < 20000; i++) begin
      a = rnd_f(100, 145);
      x = f2r(a) * 4096.0;
      if (x >= 0) fx = longint'($floor(x + 0.5)); else fx = -longint'($floor(-x + 0.5));
      if (fx > 32767) fx = 32767;
      if (fx < -32768) fx = -32768;
      checks++;
      if (f2fix(a, 12) !== 16'(fx)) begin
        failures++;
        if (failures < 10) $display("f2fix %h: got %0d expected %0d", a, f2fix(a, 12), fx);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
