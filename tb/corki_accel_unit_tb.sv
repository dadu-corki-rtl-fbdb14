// corki_accel_unit_tb: builds velocity records for random poses and joint
// velocities, streams them through the acceleration unit and checks each
// mass point's acceleration (gravity included) and the end-effector bias
// acceleration Jdot*qd against the floating-point reference.
module corki_accel_unit_tb;
  import corki_pkg::*;
  import corki_ref_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_ready, out_valid, out_ready = 1, done;
  always #5 clk = ~clk;
  vel_rec_t in_rec = '0;
  acc_rec_t out_rec;
  vec3_t jdqd;
  corki_accel_unit dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic bit near(fx_t a, real b, real tol);
    real e; e = fx2r(a) - b; return e < tol && e > -tol;
  endfunction
  function automatic vec3_t fv(v3_t a); return '{x: r2fx(a[0]), y: r2fx(a[1]), z: r2fx(a[2])}; endfunction
  initial begin
    repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    jv_t th, qd, h; zt_t z; pt_t p; v3_t xd, jd, w, wp, zq, r, al, a, t1, t2;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 20; n++) begin
      for (int i = 0; i < 7; i++) begin
        th[i] = (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0 * 2.5;
        qd[i] = (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0 * 1.5;
      end
      fk(th, z, p);
      bias(z, p, qd, h, xd, jd);
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      w = '{0.0, 0.0, 0.0}; al = '{0.0, 0.0, 0.0}; a = '{0.0, 0.0, 9.81};
      for (int i = 0; i < 7; i++) begin
        wp = w;
        for (int k = 0; k < 3; k++) begin zq[k] = z[i][k] * qd[i]; w[k] = wp[k] + zq[k]; r[k] = p[i+1][k] - p[i][k]; end
        in_rec = '{idx: 3'(i), z: fv(z[i]), r: fv(r), w_prev: fv(wp), w: fv(w), zqd: fv(zq)};
        t1 = rcross(wp, zq);
        for (int k = 0; k < 3; k++) al[k] += t1[k];
        t1 = rcross(al, r); t2 = rcross(w, rcross(w, r));
        for (int k = 0; k < 3; k++) a[k] += t1[k] + t2[k];
        @(negedge clk); in_valid = 1;
        @(posedge clk);
        check(out_valid && in_ready, "handshake");
        check(near(out_rec.a.x, a[0], 5e-3) && near(out_rec.a.y, a[1], 5e-3) && near(out_rec.a.z, a[2], 5e-3),
              $sformatf("a_%0d", i));
        @(negedge clk); in_valid = 0;
      end
      @(posedge clk);
      check(near(jdqd.x, jd[0], 5e-3) && near(jdqd.y, jd[1], 5e-3) && near(jdqd.z, jd[2], 5e-3),
            $sformatf("jdqd %f vs %f", fx2r(jdqd.x), jd[0]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
