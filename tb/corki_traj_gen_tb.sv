// corki_traj_gen_tb: random cubic coefficients and times; checks x_d, its
// first and second derivative against real arithmetic and that done comes
// exactly two cycles after start.
module corki_traj_gen_tb;
  import corki_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, done;
  always #5 clk = ~clk;
  vec3_t ca, cb, cc, cd, xd, xd_dot, xd_ddot;
  fx_t t;
  corki_traj_gen dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic real rnd(real s); return (real'($urandom_range(0, 20000)) - 10000.0) / 10000.0 * s; endfunction
  function automatic real r(fx_t v); return real'(v) / 65536.0; endfunction
  function automatic fx_t f(real v); return fx_t'($rtoi(v * 65536.0)); endfunction
  initial begin
    real a[3], b[3], c[3], d[3], tt, e;
    int lat;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 50; n++) begin
      for (int k = 0; k < 3; k++) begin a[k] = rnd(2); b[k] = rnd(2); c[k] = rnd(1); d[k] = rnd(0.8); end
      tt = real'($urandom_range(0, 165)) / 1000.0;
      ca = '{x: f(a[0]), y: f(a[1]), z: f(a[2])}; cb = '{x: f(b[0]), y: f(b[1]), z: f(b[2])};
      cc = '{x: f(c[0]), y: f(c[1]), z: f(c[2])}; cd = '{x: f(d[0]), y: f(d[1]), z: f(d[2])};
      t = f(tt);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      check(lat == 2, $sformatf("latency %0d", lat));
      for (int k = 0; k < 3; k++) begin
        e = r(v_get(xd, k)) - (((a[k]*r(t) + b[k])*r(t) + c[k])*r(t) + d[k]);
        check(e < 5e-4 && e > -5e-4, "x_d");
        e = r(v_get(xd_dot, k)) - (3.0*a[k]*r(t)*r(t) + 2.0*b[k]*r(t) + c[k]);
        check(e < 5e-4 && e > -5e-4, "xdot_d");
        e = r(v_get(xd_ddot, k)) - (6.0*a[k]*r(t) + 2.0*b[k]);
        check(e < 5e-4 && e > -5e-4, "xddot_d");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
