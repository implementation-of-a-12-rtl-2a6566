// tb_fp32_units: checks the single-precision operators of hh_fp_pkg (fadd, fsub,
// fmul, fix2f, f2fix16) against real arithmetic on random and edge operands, and
// fadd/fmul bit-exactly against round-to-nearest, ties away from zero.
module tb_fp32_units;
  import hh_fp_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;

  task automatic chk(input string what, input real got, input real exp, input real rel, input real abs_tol);
    checks++;
    if (!close(got, exp, rel, abs_tol)) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %g expected %g", what, got, exp);
    end
  endtask

  function automatic real rnd_real();
    real m;
    int  e;
    m = real'($urandom_range(1000000, 1)) / 1000000.0;
    e = int'($urandom_range(20, 0)) - 10;
    m = m * (2.0 ** e);
    return ($urandom_range(1, 0) == 1) ? -m : m;
  endfunction

  // reference rounding of an exactly known value to single precision: round to
  // nearest, ties away from zero (the rounding the operators implement)
  function automatic real rna(input real x);
    real m, ulp;
    int  e;
    if (x == 0.0) return 0.0;
    m = (x < 0.0) ? -x : x;
    e = 0;
    while (m >= 2.0 ** (e + 1)) e++;
    while (m < 2.0 ** e) e--;
    ulp = 2.0 ** (e - 23);
    m = $floor(m / ulp + 0.5) * ulp;
    return (x < 0.0) ? -m : m;
  endfunction

  // watchdog
  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      real a, b;
      logic [31:0] fa, fb;
      a = rnd_real(); b = rnd_real();
      if (i % 7 == 0) b = -a * (1.0 + real'($urandom_range(100, 0)) * 1e-7);  // cancellation
      fa = r2f(a); fb = r2f(b);
      a = f2r(fa); b = f2r(fb);
      chk("fadd", f2r(fadd(fa, fb)), a + b, 2.0 ** -22, 1e-30);
      chk("fsub", f2r(fsub(fa, fb)), a - b, 2.0 ** -22, 1e-30);
      chk("fmul", f2r(fmul(fa, fb)), a * b, 2.0 ** -22, 1e-30);
    end
    // edge cases
    chk("add zero", f2r(fadd(32'd0, r2f(3.5))), 3.5, 0, 0);
    chk("x-x", f2r(fsub(r2f(1.25), r2f(1.25))), 0.0, 0, 0);
    chk("mul zero", f2r(fmul(32'd0, r2f(-7.0))), 0.0, 0, 0);
    // exact rounding: the operands' sum and product are exact in double precision
    for (int i = 0; i < 2000; i++) begin
      real a, b;
      a = f2r(r2f(rnd_real())); b = f2r(r2f(rnd_real()));
      chk("fadd exact", f2r(fadd(r2f(a), r2f(b))), rna(a + b), 0, 0);
      chk("fmul exact", f2r(fmul(r2f(a), r2f(b))), rna(a * b), 0, 0);
    end
    chk("1+1.5ulp", f2r(fadd(r2f(1.0), r2f(1.5 * 2.0 ** -23))), 1.0 + 2.0 ** -22, 0, 0);
    chk("1+half ulp", f2r(fadd(r2f(1.0), r2f(2.0 ** -24))), 1.0 + 2.0 ** -23, 0, 0);
    chk("1+2^-30", f2r(fadd(r2f(1.0), r2f(2.0 ** -30))), 1.0, 0, 0);
    for (int i = 0; i < 2000; i++) begin
      int v;
      v = int'($urandom) >>> $urandom_range(30, 0);
      chk("fix2f", f2r(fix2f(v, 8)), real'(v) / 256.0, 2.0 ** -23, 0);
    end
    for (int i = 0; i < 2000; i++) begin
      real v, e;
      v = (real'($urandom_range(400000, 0)) - 200000.0) / 1000.0;   // -200..200
      v = f2r(r2f(v));
      e = v * 256.0;
      e = (e < 0) ? -real'($rtoi(-e)) : real'($rtoi(e));
      if (e > 32767.0) e = 32767.0;
      if (e < -32768.0) e = -32768.0;
      chk("f2fix16", real'(f2fix16(r2f(v), 8)), e, 0, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
