// corki_pose_unit_tb: random joint angles across the joint range; checks the
// stored joint axes and frame origins, x, J and J^T against a 4x4-matrix
// forward kinematics in floating point, the seven link records streamed out
// (with random back-pressure), the per-joint latency, and that replay mode
// re-sends the same records without changing x or J.
module corki_pose_unit_tb;
  import corki_pkg::*;
  import corki_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, full = 0, rec_valid, rec_ready = 0, done;
  always #5 clk = ~clk;
  jvec_t theta = '0;
  pose_rec_t rec;
  vec3_t x, z_tab [NJ], p_tab [NJ+1];
  jmat_t jac;
  jtmat_t jac_t;
  corki_pose_unit dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic bit near(fx_t a, real b, real tol);
    real e; e = fx2r(a) - b; return e < tol && e > -tol;
  endfunction
  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  pose_rec_t got[$];
  always @(posedge clk) if (rec_valid && rec_ready) got.push_back(rec);
  always @(negedge clk) rec_ready = ($urandom_range(0, 3) != 0);
  initial begin
    jv_t th; zt_t z; pt_t p; jm_t J; v3_t q;
    int lat;
    jmat_t jsave;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 12; n++) begin
      for (int i = 0; i < 7; i++) begin
        th[i] = (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0 * 2.8;
        theta[i] = r2fx(th[i]);
        th[i] = fx2r(theta[i]);
      end
      fk(th, z, p);
      q = '{p[7][0], p[7][1], p[7][2]};
      jac_of(z, p, q, 6, J);
      got.delete();
      @(negedge clk); start = 1; full = 1; @(negedge clk); start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      check(lat >= 7 * (16 + 3) && lat < 7 * (16 + 3) + 60, $sformatf("latency %0d", lat));
      check(got.size() == 7, $sformatf("7 records, got %0d", got.size()));
      for (int i = 0; i < 7; i++) begin
        check(got[i].idx == 3'(i), "record order");
        check(near(got[i].z.x, z[i][0], 2e-3) && near(got[i].z.y, z[i][1], 2e-3) && near(got[i].z.z, z[i][2], 2e-3),
              $sformatf("z_%0d", i));
        check(near(got[i].r.x, p[i+1][0] - p[i][0], 2e-3) && near(got[i].r.y, p[i+1][1] - p[i][1], 2e-3) &&
              near(got[i].r.z, p[i+1][2] - p[i][2], 2e-3), $sformatf("r_%0d", i));
        for (int d = 0; d < 3; d++) begin
          check(near(jac[d][i], J[d][i], 3e-3), $sformatf("J[%0d][%0d] %f vs %f", d, i, fx2r(jac[d][i]), J[d][i]));
          check(jac[d][i] == v_get(jac_t[i], d), "J^T copy");
        end
      end
      check(near(x.x, p[7][0], 2e-3) && near(x.y, p[7][1], 2e-3) && near(x.z, p[7][2], 2e-3), "x");
      // replay
      jsave = jac;
      for (int i = 0; i < 7; i++) theta[i] = '0;
      got.delete();
      @(negedge clk); start = 1; full = 0; @(negedge clk); start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      check(lat < 30, "replay is fast");
      check(got.size() == 7 && got[6].z == z_tab[6] && got[3].r == v_sub(p_tab[4], p_tab[3]), "replay records");
      check(jac == jsave, "J kept in replay");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
