// corki_joint_torque_unit_tb: random references, states, gains, Mx, hx and
// J^T; checks F = Mx (xdd_d + Kp e + Kv de) + hx and tau = J^T F against
// real arithmetic, and the start-to-done latency of three cycles.
module corki_joint_torque_unit_tb;
  import corki_pkg::*;
  import corki_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, done;
  always #5 clk = ~clk;
  vec3_t xd, xd_dot, xd_ddot, x, xdot, kp, kv, hx, f_task;
  mat3_t mx; jtmat_t jac_t; jvec_t tau;
  corki_joint_torque_unit dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic real rnd(real s); return (real'($urandom_range(0, 20000)) - 10000.0) / 10000.0 * s; endfunction
  function automatic vec3_t fv(v3_t a); return '{x: r2fx(a[0]), y: r2fx(a[1]), z: r2fx(a[2])}; endfunction
  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    v3_t XD, XDD, XDDD, X, XDOT, KP, KV, HX, acc, F; real MX[3][3], JT[7][3], t, e; int cyc;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      for (int d = 0; d < 3; d++) begin
        XD[d] = fx2r(r2fx(rnd(0.8))); X[d] = fx2r(r2fx(XD[d] + rnd(0.05)));
        XDD[d] = fx2r(r2fx(rnd(0.5))); XDOT[d] = fx2r(r2fx(rnd(0.5)));
        XDDD[d] = fx2r(r2fx(rnd(2.0))); HX[d] = fx2r(r2fx(rnd(20.0)));
        KP[d] = fx2r(r2fx(100.0 + rnd(50.0))); KV[d] = fx2r(r2fx(20.0 + rnd(5.0)));
        for (int c = 0; c < 3; c++) MX[d][c] = fx2r(r2fx(rnd(5.0)));
      end
      for (int j = 0; j < 7; j++) for (int d = 0; d < 3; d++) JT[j][d] = fx2r(r2fx(rnd(0.8)));
      xd = fv(XD); x = fv(X); xd_dot = fv(XDD); xdot = fv(XDOT); xd_ddot = fv(XDDD); hx = fv(HX);
      kp = fv(KP); kv = fv(KV);
      for (int d = 0; d < 3; d++) mx[d] = fv('{MX[d][0], MX[d][1], MX[d][2]});
      for (int j = 0; j < 7; j++) jac_t[j] = fv('{JT[j][0], JT[j][1], JT[j][2]});
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc == 3, $sformatf("latency %0d", cyc));
      for (int d = 0; d < 3; d++) acc[d] = XDDD[d] + KP[d] * (XD[d] - X[d]) + KV[d] * (XDD[d] - XDOT[d]);
      for (int d = 0; d < 3; d++) begin
        F[d] = HX[d];
        for (int c = 0; c < 3; c++) F[d] += MX[d][c] * acc[c];
        e = fx2r(v_get(f_task, d)) - F[d];
        check(e < 0.02 && e > -0.02, $sformatf("F[%0d] %f vs %f", d, fx2r(v_get(f_task, d)), F[d]));
      end
      for (int j = 0; j < 7; j++) begin
        t = JT[j][0] * F[0] + JT[j][1] * F[1] + JT[j][2] * F[2];
        e = fx2r(tau[j]) - t;
        check(e < 0.03 && e > -0.03, $sformatf("tau[%0d] %f vs %f", j, fx2r(tau[j]), t));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
