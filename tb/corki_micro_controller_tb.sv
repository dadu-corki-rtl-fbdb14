// corki_micro_controller_tb: plays the datapath units with random delays
// around the controller for full, pose-only and reuse decisions; checks
// the order of the start pulses, that the mass matrix unit is started only
// when asked for and after the pose unit, that the bias force unit waits for
// the torque, trajectory and mass results, the one write and done per
// cycle, the reported latency and the full/reuse counters.
module corki_micro_controller_tb;
  logic clk = 0, rst_n = 0, start = 0;
  logic ace_valid = 0, upd_pose = 0, upd_mass = 0, pose_done = 0, traj_done = 0, torque_done = 0,
        mass_done = 0, bias_done = 0, jt_done = 0;
  logic commit, ace_eval, traj_start, clear_df, pose_start, pose_full, mass_start, bias_start,
        jt_start, out_wr, busy, done;
  logic [15:0] last_latency, n_pose_full, n_pose_reuse, n_mass_full, n_mass_reuse;
  always #5 clk = ~clk;
  corki_micro_controller dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // event log: cycle of each pulse within the current control cycle
  int cyc, t_commit, t_ace, t_traj, t_pose, t_mass, t_bias, t_jt, t_wr, t_done, n_wr, n_mass, n_pose;
  int t_tq, t_tr, t_ms, t_pd;
  logic want_pose, want_mass;
  always @(posedge clk) begin
    cyc++;
    if (commit) t_commit = cyc;
    if (ace_eval) t_ace = cyc;
    if (traj_start) t_traj = cyc;
    if (pose_start) begin t_pose = cyc; n_pose++; check(pose_full == want_pose, "pose_full follows the decision"); end
    if (mass_start) begin t_mass = cyc; n_mass++; end
    if (bias_start) t_bias = cyc;
    if (jt_start) t_jt = cyc;
    if (out_wr) begin t_wr = cyc; n_wr++; end
    if (done) t_done = cyc;
  end

  // unit models: each answers a start with a done pulse after a random delay
  task automatic respond(ref logic d, input int lo, input int hi, output int when);
    repeat ($urandom_range(lo, hi)) @(negedge clk);
    d = 1; when = cyc; @(negedge clk); d = 0;
  endtask
  always begin
    @(posedge clk);
    if (ace_eval) fork begin
      repeat ($urandom_range(1, 3)) @(negedge clk);
      ace_valid = 1; upd_pose = want_pose; upd_mass = want_mass; @(negedge clk); ace_valid = 0;
    end join_none
    if (traj_start) fork begin int w; respond(traj_done, 1, 60, w); t_tr = w; end join_none
    if (pose_start) fork begin
      int w; respond(pose_done, 5, 40, w); t_pd = w;
      respond(torque_done, 10, 80, w); t_tq = w;
    end join_none
    if (mass_start) fork begin int w; respond(mass_done, 50, 200, w); t_ms = w; end join_none
    if (bias_start) fork begin int w; respond(bias_done, 1, 3, w); end join_none
    if (jt_start) fork begin int w; respond(jt_done, 1, 3, w); end join_none
  end

  initial begin
    int nf = 0, nr = 0, mf = 0, mr = 0, t0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      int kind; kind = (n < 3) ? n : $urandom_range(0, 2);
      want_pose = (kind != 2); want_mass = (kind == 0);
      n_wr = 0; n_mass = 0; n_pose = 0; t_ms = 0; t_mass = 0;
      repeat ($urandom_range(1, 5)) @(negedge clk);
      check(!busy, "idle between cycles");
      start = 1; t0 = cyc + 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      check(t_commit == t0 && t_ace == t0 + 1 && t_traj == t0 + 1, "commit then ace/traj");
      check(n_pose == 1 && t_pose > t_ace, "one pose start after the decision");
      check(n_mass == (want_mass ? 1 : 0), "mass unit started only on a mass update");
      if (want_mass) check(t_mass > t_pose && t_mass > t_pd - 1, "mass start after pose done");
      check(t_bias > t_tq && t_bias > t_tr && (!want_mass || t_bias > t_ms), "bias waits for torque, traj, mass");
      check(t_jt > t_bias && t_wr > t_jt && n_wr == 1 && t_done == t_wr + 1, "jt, write, done in order");
      check(last_latency == 16'(t_wr - t0), $sformatf("latency %0d vs %0d", last_latency, t_wr - t0));
      if (want_pose) nf++; else nr++;
      if (want_mass) mf++; else mr++;
      check(n_pose_full == 16'(nf) && n_pose_reuse == 16'(nr) && n_mass_full == 16'(mf) && n_mass_reuse == 16'(mr), "counters");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
