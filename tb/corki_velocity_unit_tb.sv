// corki_velocity_unit_tb: streams the link records of random arm poses with
// random joint velocities (and random output stalls) through the velocity
// unit; checks each record's angular velocities and z*qd and the final
// end-effector velocity against the floating-point reference, and that clear
// restarts the recursion.
module corki_velocity_unit_tb;
  import corki_pkg::*;
  import corki_ref_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_ready, out_valid, out_ready = 0, done;
  always #5 clk = ~clk;
  jvec_t thetad = '0;
  pose_rec_t in_rec = '0;
  vel_rec_t out_rec;
  vec3_t xdot;
  corki_velocity_unit dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic bit near(fx_t a, real b, real tol);
    real e; e = fx2r(a) - b; return e < tol && e > -tol;
  endfunction
  function automatic vec3_t fv(real a, real b, real c); return '{x: r2fx(a), y: r2fx(b), z: r2fx(c)}; endfunction
  initial begin
    repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    jv_t th, qd, h; zt_t z; pt_t p; v3_t xd, jd, w;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 20; n++) begin
      for (int i = 0; i < 7; i++) begin
        th[i] = (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0 * 2.5;
        qd[i] = (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0 * 1.5;
        thetad[i] = r2fx(qd[i]); qd[i] = fx2r(thetad[i]);
      end
      fk(th, z, p);
      bias(z, p, qd, h, xd, jd);
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      w = '{0.0, 0.0, 0.0};
      for (int i = 0; i < 7; i++) begin
        in_rec = '{idx: 3'(i), z: fv(z[i][0], z[i][1], z[i][2]),
                   r: fv(p[i+1][0]-p[i][0], p[i+1][1]-p[i][1], p[i+1][2]-p[i][2])};
        in_valid = 1;
        do begin @(negedge clk); out_ready = ($urandom_range(0, 2) != 0); #1; end while (!out_ready);
        check(out_valid && in_ready, "handshake");
        for (int k = 0; k < 3; k++) w[k] += fx2r(v_get(in_rec.z, k)) * qd[i];
        check(near(out_rec.w.x, w[0], 1e-3) && near(out_rec.w.y, w[1], 1e-3) && near(out_rec.w.z, w[2], 1e-3),
              $sformatf("w_%0d", i));
        check(near(out_rec.zqd.z, fx2r(in_rec.z.z) * qd[i], 1e-3), "zqd");
        @(posedge clk);
        @(negedge clk); in_valid = 0; out_ready = 0;
      end
      @(posedge clk);
      check(near(xdot.x, xd[0], 3e-3) && near(xdot.y, xd[1], 3e-3) && near(xdot.z, xd[2], 3e-3),
            $sformatf("xdot %f %f %f vs %f %f %f", fx2r(xdot.x), fx2r(xdot.y), fx2r(xdot.z), xd[0], xd[1], xd[2]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
