// corki_top_tb: end-to-end test of the TS-CTC accelerator at its default
// parameters.
//
// Runs a sequence of control cycles on a Panda-like arm around its usual
// working pose and compares every torque vector with the floating-point
// reference model (corki_ref_pkg). The sequence is chosen so that each
// mechanism happens: a full recompute, a cycle where both the poses and the
// mass matrix are reused (tiny motion), a cycle where only the poses are
// recomputed (joint 1 motion, which barely changes the mass matrix), a large
// middle-joint motion (everything recomputed), link records overlapping in
// the dataflow stages, the mass matrix unit running alongside the dataflow,
// the line buffer reversing order, and an output-buffer overrun. The TB
// tracks the reference angles of the ACE unit itself, from its own copy of
// the probability rule, and checks the decisions. It also checks that a
// reuse cycle is faster than a full one.
module corki_top_tb;
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

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters from inside the design
  int overlap_cycles = 0, mm_concurrent = 0, lb_reverse = 0;
  always @(posedge clk) if (rst_n) begin
    int n;
    n = int'(dut.u_vel.in_valid && dut.u_vel.out_ready) + int'(dut.u_acc.in_valid && dut.u_acc.out_ready)
      + int'(dut.u_frc.in_valid && dut.u_frc.in_ready) + int'(dut.u_tq.in_valid);
    if (n >= 2) overlap_cycles++;
    if (dut.u_mm.busy && (dut.u_vel.in_valid || dut.u_acc.in_valid || dut.u_tq.in_valid)) mm_concurrent++;
    if (dut.u_tq.in_valid && dut.u_tq.in_rec.idx == 3'd6) lb_reverse++;
  end

  task automatic wr(int a, real v);
    @(negedge clk); wr_en = 1; wr_addr = 6'(a); wr_data = r2fx(v);
    @(negedge clk); wr_en = 0;
  endtask

  jv_t W_P, W_M;
  jv_t ref_p, ref_m;
  bit  have_ref = 0;
  localparam real THR = 0.4;

  task automatic run_cycle(jv_t th, jv_t qd, v3_t ca, v3_t cb, v3_t cc, v3_t cd, real t,
                           v3_t kp, v3_t kv, bit do_ack, string name,
                           output bit up, output bit um, output int lat);
    v3_t xd, xdd, xddd;
    jv_t tr;
    real pp, pm, err, tol;
    for (int i = 0; i < 7; i++) wr(ADDR_THETA + i, th[i]);
    for (int i = 0; i < 7; i++) wr(ADDR_THETAD + i, qd[i]);
    for (int d = 0; d < 3; d++) begin
      wr(ADDR_COEF + d, ca[d]); wr(ADDR_COEF + 3 + d, cb[d]);
      wr(ADDR_COEF + 6 + d, cc[d]); wr(ADDR_COEF + 9 + d, cd[d]);
      wr(ADDR_KP + d, kp[d]); wr(ADDR_KV + d, kv[d]);
    end
    wr(ADDR_T, t);
    // expected ACE decision
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
    check(last_upd_pose == up, $sformatf("%s: pose update decision %0d expected %0d (p=%f)", name, last_upd_pose, up, pp));
    check(last_upd_mass == um, $sformatf("%s: mass update decision %0d expected %0d (p=%f)", name, last_upd_mass, um, pm));
    for (int d = 0; d < 3; d++) begin
      xd[d]   = ((ca[d]*t + cb[d])*t + cc[d])*t + cd[d];
      xdd[d]  = (3.0*ca[d]*t + 2.0*cb[d])*t + cc[d];
      xddd[d] = 6.0*ca[d]*t + 2.0*cb[d];
    end
    control(ref_p, ref_m, qd, xd, xdd, xddd, kp, kv, tr);
    for (int i = 0; i < 7; i++) begin
      err = fx2r(tau[i]) - tr[i];
      tol = 0.05 + 0.02 * ((tr[i] < 0) ? -tr[i] : tr[i]);
      check(err < tol && err > -tol, $sformatf("%s: tau[%0d] = %f, reference %f", name, i, fx2r(tau[i]), tr[i]));
    end
    check(tau_valid, {name, ": output valid"});
    $display("%s: upd_pose=%0d upd_mass=%0d latency=%0d tau0=%f ref=%f", name, up, um, lat, fx2r(tau[0]), tr[0]);
    if (do_ack) begin @(negedge clk); tau_ack = 1; @(negedge clk); tau_ack = 0; end
  endtask

  initial begin
    jv_t th0, th, qd;
    v3_t ca, cb, cc, cd, kp, kv;
    zt_t z; pt_t p;
    bit up, um;
    int lat_full, lat_reuse, lat_pose, lat;
    int n_full = 0, n_reuse = 0, n_pose_only = 0;
    W_P = '{1.0, 1.5, 1.5, 1.0, 1.0, 1.0, 0.5};
    W_M = '{0.05, 1.5, 1.5, 1.0, 0.2, 0.2, 0.05};
    ref_p = '{default: 0.0}; ref_m = '{default: 0.0};
    th0 = '{0.1, -0.6, 0.05, -2.2, 0.1, 1.6, 0.7};
    qd  = '{0.3, -0.2, 0.25, 0.4, -0.3, 0.5, -0.4};
    fk(th0, z, p);
    ca = '{0.4, -0.2, 0.3}; cb = '{-0.1, 0.15, 0.05}; cc = '{0.05, 0.02, -0.04};
    cd = '{p[7][0] + 0.01, p[7][1] - 0.02, p[7][2] + 0.015};
    kp = '{100.0, 120.0, 80.0}; kv = '{20.0, 22.0, 18.0};
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // 1: first cycle, full
    run_cycle(th0, qd, ca, cb, cc, cd, 0.033, kp, kv, 1, "full-1", up, um, lat_full);
    if (up && um) n_full++;
    // 2: tiny motion -> reuse both
    th = th0; th[1] += 0.02; th[3] += 0.01;
    run_cycle(th, qd, ca, cb, cc, cd, 0.066, kp, kv, 1, "reuse", up, um, lat_reuse);
    if (!up && !um) n_reuse++;
    // 3: joint 1 motion -> poses only
    th[0] += 0.45;
    run_cycle(th, qd, ca, cb, cc, cd, 0.099, kp, kv, 0, "pose-only", up, um, lat_pose);
    if (up && !um) n_pose_only++;
    // 4: large middle-joint motion -> full (not acked before: overrun)
    th[1] += 0.3; th[2] -= 0.2;
    qd = '{-0.2, 0.3, -0.1, 0.2, 0.4, -0.3, 0.2};
    run_cycle(th, qd, ca, cb, cc, cd, 0.132, kp, kv, 1, "full-2", up, um, lat);
    if (up && um) n_full++;
    // 5..8: random small walks
    for (int c = 0; c < 4; c++) begin
      for (int i = 0; i < 7; i++) begin
        th[i] += (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0 * 0.08;
        qd[i]  = (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0 * 0.6;
      end
      run_cycle(th, qd, ca, cb, cc, cd, 0.033 * (c + 1), kp, kv, 1, $sformatf("walk-%0d", c), up, um, lat);
      if (up && um) n_full++; else if (up) n_pose_only++; else n_reuse++;
    end

    check(lat_reuse < lat_full, $sformatf("reuse latency %0d below full latency %0d", lat_reuse, lat_full));
    check(lat_pose < lat_full, $sformatf("pose-only latency %0d below full latency %0d", lat_pose, lat_full));
    check(int'(n_pose_full) == n_full + n_pose_only, "pose recompute counter");
    check(int'(n_mass_reuse) == n_reuse + n_pose_only, "mass reuse counter");
    check(tau_overrun == 16'd1, $sformatf("overrun count %0d", tau_overrun));
    check(tau_seq == 16'd8, "sequence number");
    $display("mechanisms: full=%0d reuse=%0d pose_only=%0d overlap_cycles=%0d mm_concurrent=%0d lb_reverse=%0d overrun=%0d",
             n_full, n_reuse, n_pose_only, overlap_cycles, mm_concurrent, lb_reverse, tau_overrun);
    $display("latency: full=%0d pose_only=%0d reuse=%0d cycles", lat_full, lat_pose, lat_reuse);
    check(n_full > 0, "full recompute happened");
    check(n_reuse > 0, "approximate (reuse) cycle happened");
    check(n_pose_only > 0, "pose-only cycle happened");
    check(overlap_cycles > 0, "link records overlapped in dataflow stages");
    check(mm_concurrent > 0, "mass matrix unit ran alongside the dataflow");
    check(lb_reverse > 0, "line buffer delivered tip link first");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
