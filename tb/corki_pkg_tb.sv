// corki_pkg_tb: checks the fixed-point helpers of corki_pkg against real
// arithmetic: conversion, multiply, cross and dot products on random values.
module corki_pkg_tb;
  import corki_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic real r(fx_t v); return real'(v) / 65536.0; endfunction
  function automatic real rnd(real s); return (real'($urandom_range(0, 20000)) - 10000.0) / 10000.0 * s; endfunction
  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    real ax, ay, az, bx, by, bz, e;
    vec3_t a, b, c;
    fx_t d;
    check(to_fx(1.0) == 32'sd65536, "to_fx(1)");
    check(to_fx(-0.5) == -32'sd32768, "to_fx(-0.5)");
    check(DH_D[0] == 32'sd21823, "d1 = 0.333 m");
    for (int n = 0; n < 200; n++) begin
      ax = rnd(3); ay = rnd(3); az = rnd(3); bx = rnd(3); by = rnd(3); bz = rnd(3);
      a = '{x: to_fx(ax), y: to_fx(ay), z: to_fx(az)};
      b = '{x: to_fx(bx), y: to_fx(by), z: to_fx(bz)};
      e = r(fx_mul(a.x, b.y)) - ax * by;
      check(e < 1e-4 && e > -1e-4, $sformatf("mul %f*%f", ax, by));
      c = v_cross(a, b);
      e = r(c.x) - (ay*bz - az*by); check(e < 2e-4 && e > -2e-4, "cross x");
      e = r(c.y) - (az*bx - ax*bz); check(e < 2e-4 && e > -2e-4, "cross y");
      e = r(c.z) - (ax*by - ay*bx); check(e < 2e-4 && e > -2e-4, "cross z");
      d = v_dot(a, b);
      e = r(d) - (ax*bx + ay*by + az*bz); check(e < 2e-4 && e > -2e-4, "dot");
      c = v_sub(v_add(a, b), b);
      check(c == a, "add/sub");
      check(fx_abs(to_fx(-ax)) == fx_abs(to_fx(ax)), "abs");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
