// corki_workload_tb: the Corki-T workloads (T = 1, 3, 5, 7, 9 trajectory
// steps executed per inference) run on the accelerator at its default
// parameters.
//
// Each inference delivers a new set of cubic coefficients. The host then
// runs the controller for T steps of 3.3 ms, three control cycles per step
// (a 1.1 ms control period). Within a trajectory the time t restarts at 0
// and advances by 1.1 ms per cycle. The joint state moves along a smooth
// path at up to about 1.5 rad/s, which stands in for the arm following the
// trajectory. The ACE unit keeps its state across inferences.
// Every torque vector is compared with the floating-point model, using the
// same mix of fresh and reused matrices. The ACE decisions and the latency
// class of each cycle are checked too. Per variant the testbench reports
// the share of matrix updates that were avoided and the mean latency; the
// source reports that over half of the updates can be skipped, and that is
// checked over the whole run.
module corki_workload_tb;
  import corki_pkg::*;
  import corki_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        wr_en = 0, start = 0, tau_ack = 0;
  logic [5:0]  wr_addr = 0;
  fx_t         wr_data = 0;
  logic        busy, done, tau_valid, last_upd_pose, last_upd_mass;
  jvec_t       tau;
  vec3_t       x_ee;
  logic [15:0] tau_seq, tau_overrun, last_latency, n_pose_full, n_pose_reuse, n_mass_full, n_mass_reuse;

  corki_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, real v);
    @(negedge clk); wr_en = 1; wr_addr = 6'(a); wr_data = r2fx(v);
    @(negedge clk); wr_en = 0;
  endtask

  localparam real DT   = 0.0011;  // control period: three cycles per 3.3 ms step
  localparam real THR  = 0.4;
  localparam int  NINF = 2;       // inferences per variant

  jv_t W_P, W_M, ref_p, ref_m;
  bit  have_ref = 0;
  int  lat_max_full = 0;

  initial begin
    jv_t th0, th, qd, amp, tr;
    v3_t ca, cb, cc, cd, kp, kv, xd, xdd, xddd;
    zt_t z; pt_t p;
    real tt, time_s, pp, pm, err, tol;
    bit up, um;
    int lat, upd_all = 0, dec_all = 0;
    W_P = '{1.0, 1.5, 1.5, 1.0, 1.0, 1.0, 0.5};
    W_M = '{0.05, 1.5, 1.5, 1.0, 0.2, 0.2, 0.05};
    ref_p = '{default: 0.0}; ref_m = '{default: 0.0};
    th0 = '{0.0, -0.5, 0.0, -2.0, 0.0, 1.6, 0.8};
    amp = '{1.2, 0.9, 1.0, 1.5, 1.3, 1.4, 1.1};     // joint speed amplitudes, rad/s
    kp  = '{100.0, 100.0, 100.0}; kv = '{20.0, 20.0, 20.0};
    repeat (5) @(posedge clk);
    rst_n = 1;
    for (int d = 0; d < 3; d++) begin wr(ADDR_KP + d, kp[d]); wr(ADDR_KV + d, kv[d]); end
    time_s = 0.0;
    for (int T = 1; T <= 9; T += 2) begin
      int ncyc = 0, nupd = 0, latsum = 0;
      for (int inf = 0; inf < NINF; inf++) begin
        // new trajectory from the model: start at the current hand position
        for (int i = 0; i < 7; i++) th[i] = th0[i] + amp[i] / 3.0 * $sin(3.0 * time_s + i);
        fk(th, z, p);
        for (int d = 0; d < 3; d++) begin
          ca[d] = (real'($urandom_range(0, 200)) - 100.0) / 100.0;
          cb[d] = (real'($urandom_range(0, 200)) - 100.0) / 200.0;
          cc[d] = (real'($urandom_range(0, 200)) - 100.0) / 500.0;
          cd[d] = p[7][d];
          wr(ADDR_COEF + d, ca[d]); wr(ADDR_COEF + 3 + d, cb[d]);
          wr(ADDR_COEF + 6 + d, cc[d]); wr(ADDR_COEF + 9 + d, cd[d]);
        end
        for (int k = 0; k < 3 * T; k++) begin
          tt = k * DT;
          for (int i = 0; i < 7; i++) begin
            th[i] = th0[i] + amp[i] / 3.0 * $sin(3.0 * time_s + i);
            qd[i] = amp[i] * $cos(3.0 * time_s + i);
            // the values the hardware sees
            th[i] = fx2r(r2fx(th[i])); qd[i] = fx2r(r2fx(qd[i]));
            wr(ADDR_THETA + i, th[i]); wr(ADDR_THETAD + i, qd[i]);
          end
          wr(ADDR_T, tt);
          pp = ace_prob(th, ref_p, W_P);
          pm = ace_prob(th, ref_m, W_M);
          um = !have_ref || pm > THR;
          up = !have_ref || pp > THR || um;
          if (up) ref_p = th;
          if (um) ref_m = th;
          have_ref = 1;
          @(negedge clk); start = 1; @(negedge clk); start = 0;
          while (!done) @(posedge clk);
          @(negedge clk);
          lat = int'(last_latency);
          check(last_upd_pose == up && last_upd_mass == um,
                $sformatf("Corki-%0d cycle %0d: decisions %0d%0d expected %0d%0d", T, k, last_upd_pose, last_upd_mass, up, um));
          check(um ? (lat > 500) : up ? (lat > 100 && lat < 500) : (lat < 100),
                $sformatf("Corki-%0d: latency %0d for decisions %0d%0d", T, lat, up, um));
          if (um && lat > lat_max_full) lat_max_full = lat;
          for (int d = 0; d < 3; d++) begin
            xd[d]   = ((ca[d]*tt + cb[d])*tt + cc[d])*tt + cd[d];
            xdd[d]  = (3.0*ca[d]*tt + 2.0*cb[d])*tt + cc[d];
            xddd[d] = 6.0*ca[d]*tt + 2.0*cb[d];
          end
          control(ref_p, ref_m, qd, xd, xdd, xddd, kp, kv, tr);
          for (int i = 0; i < 7; i++) begin
            err = fx2r(tau[i]) - tr[i];
            tol = 0.05 + 0.02 * ((tr[i] < 0) ? -tr[i] : tr[i]);
            check(err < tol && err > -tol, $sformatf("Corki-%0d: tau[%0d] = %f, reference %f", T, i, fx2r(tau[i]), tr[i]));
          end
          @(negedge clk); tau_ack = 1; @(negedge clk); tau_ack = 0;
          ncyc++; latsum += lat; nupd += int'(up) + int'(um);
          time_s += DT;
        end
      end
      upd_all += nupd; dec_all += 2 * ncyc;
      $display("Corki-%0d: %0d control cycles over %0d inferences, %0d of %0d matrix updates avoided, mean latency %0d cycles",
               T, ncyc, NINF, 2 * ncyc - nupd, 2 * ncyc, latsum / ncyc);
    end
    check(tau_overrun == 0, "no result lost");
    check(2 * (dec_all - upd_all) > dec_all, $sformatf("over half of the matrix updates avoided (%0d of %0d)", dec_all - upd_all, dec_all));
    check(lat_max_full <= 771, $sformatf("full cycle within 771 cycles (%0d)", lat_max_full));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
