// corki_top: task-space computed-torque control (TS-CTC) accelerator.
//
// Turns a predicted end-effector trajectory (cubic coefficients from the
// inference server) and the arm's measured joint state into the seven joint
// torques
//     tau = J^T [ Mx (xdd_d + Kp e + Kv edot) + h_x ],  e = x_d - x.
// Structure (as in the paper's architecture figure):
//   input buffer -> pose unit -FIFO-> velocity unit -FIFO-> acceleration
//   unit -FIFO-> force unit -line buffer-> torque unit       (dataflow part)
//   task-space mass matrix unit, task-space bias force unit, joint torque
//   unit                                                      (custom part)
//   ACE unit, micro controller, output buffer.
// The dataflow part streams one link record per cycle, so different links
// are in different stages at once. Shared results are computed once: link
// poses feed the Jacobian and the mass matrix, the Newton-Euler pass gives
// h, xdot and Jdot*thetad. The ACE unit lets the pose unit and the mass
// matrix unit reuse their last results when the joints have moved little.
// Host side: write inputs with wr_en/wr_addr/wr_data (map in corki_pkg),
// pulse `start`, wait for `done`; `tau` is then valid in the output buffer
// (tau_valid until `tau_ack`). Status outputs report the latency of the last
// cycle and how often each reusable result was recomputed or reused.
// Departures from the paper: 3-D position-only task space (the paper's is
// up to 6-D), point-mass links, Q16.16 fixed point.
module corki_top
  import corki_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [5:0]  wr_addr,
  input  fx_t         wr_data,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output jvec_t       tau,
  output logic        tau_valid,
  input  logic        tau_ack,
  output logic [15:0] tau_seq,
  output logic [15:0] tau_overrun,
  output vec3_t       x_ee,
  output logic        last_upd_pose,
  output logic        last_upd_mass,
  output logic [15:0] last_latency,
  output logic [15:0] n_pose_full,
  output logic [15:0] n_pose_reuse,
  output logic [15:0] n_mass_full,
  output logic [15:0] n_mass_reuse
);
  ctrl_in_t act;

  logic commit, ace_eval, traj_start, clear_df, pose_start, pose_full, mass_start,
        bias_start, jt_start, out_wr;
  logic ace_valid, upd_pose, upd_mass, pose_done, traj_done, vel_done, acc_done,
        torque_done, mass_done, mass_busy, bias_done, jt_done;
  fx_t  p_pose, p_mass;

  corki_input_buffer u_ib (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .commit, .act);

  corki_ace_unit u_ace (.clk, .rst_n, .eval(ace_eval), .theta(act.theta), .valid(ace_valid),
                        .upd_pose, .upd_mass, .p_pose, .p_mass);

  vec3_t xd, xd_dot, xd_ddot;
  corki_traj_gen u_traj (.clk, .rst_n, .start(traj_start), .ca(act.ca), .cb(act.cb),
                         .cc(act.cc), .cd(act.cd), .t(act.t), .xd, .xd_dot, .xd_ddot,
                         .done(traj_done));

  // ------------------------------------------------------------ dataflow
  logic      ps_v, ps_r, pf_v, pf_r;
  pose_rec_t ps_d, pf_d;
  vec3_t     x, z_tab [NJ], p_tab [NJ+1];
  jmat_t     jac;
  jtmat_t    jac_t;
  corki_pose_unit u_pose (.clk, .rst_n, .start(pose_start), .full(pose_full), .theta(act.theta),
                          .rec_valid(ps_v), .rec_ready(ps_r), .rec(ps_d), .done(pose_done),
                          .x, .jac, .jac_t, .z_tab, .p_tab);
  corki_fifo #(.T(pose_rec_t), .DEPTH(FIFO_DEPTH)) u_fifo_pv (
    .clk, .rst_n, .clear(clear_df), .in_valid(ps_v), .in_ready(ps_r), .in_data(ps_d),
    .out_valid(pf_v), .out_ready(pf_r), .out_data(pf_d));

  logic     vs_v, vs_r, vf_v, vf_r;
  vel_rec_t vs_d, vf_d;
  vec3_t    xdot;
  corki_velocity_unit u_vel (.clk, .rst_n, .clear(clear_df), .thetad(act.thetad),
                             .in_valid(pf_v), .in_ready(pf_r), .in_rec(pf_d),
                             .out_valid(vs_v), .out_ready(vs_r), .out_rec(vs_d),
                             .xdot, .done(vel_done));
  corki_fifo #(.T(vel_rec_t), .DEPTH(FIFO_DEPTH)) u_fifo_va (
    .clk, .rst_n, .clear(clear_df), .in_valid(vs_v), .in_ready(vs_r), .in_data(vs_d),
    .out_valid(vf_v), .out_ready(vf_r), .out_data(vf_d));

  logic     as_v, as_r, af_v, af_r;
  acc_rec_t as_d, af_d;
  vec3_t    jdqd;
  corki_accel_unit u_acc (.clk, .rst_n, .clear(clear_df),
                          .in_valid(vf_v), .in_ready(vf_r), .in_rec(vf_d),
                          .out_valid(as_v), .out_ready(as_r), .out_rec(as_d),
                          .jdqd, .done(acc_done));
  corki_fifo #(.T(acc_rec_t), .DEPTH(FIFO_DEPTH)) u_fifo_af (
    .clk, .rst_n, .clear(clear_df), .in_valid(as_v), .in_ready(as_r), .in_data(as_d),
    .out_valid(af_v), .out_ready(af_r), .out_data(af_d));

  logic     fs_v, fs_r, lb_v, lb_r;
  frc_rec_t fs_d, lb_d;
  corki_force_unit u_frc (.clk, .rst_n, .clear(clear_df),
                          .in_valid(af_v), .in_ready(af_r), .in_rec(af_d),
                          .out_valid(fs_v), .out_ready(fs_r), .out_rec(fs_d));
  corki_line_buffer #(.T(frc_rec_t), .N(NJ)) u_lb (
    .clk, .rst_n, .clear(clear_df), .in_valid(fs_v), .in_ready(fs_r), .in_data(fs_d),
    .out_valid(lb_v), .out_ready(lb_r), .out_data(lb_d));

  jvec_t h;
  corki_torque_unit u_tq (.clk, .rst_n, .clear(clear_df), .in_valid(lb_v), .in_ready(lb_r),
                          .in_rec(lb_d), .h, .done(torque_done));

  // ------------------------------------------------------ custom circuits
  mat3_t mx;
  jmat_t jminv;
  corki_mass_matrix_unit u_mm (.clk, .rst_n, .start(mass_start), .z_tab, .p_tab, .jac, .jac_t,
                               .mx, .jminv, .done(mass_done), .busy(mass_busy));

  vec3_t hx;
  corki_bias_force_unit u_bf (.clk, .rst_n, .start(bias_start), .h, .jminv, .jdqd, .mx,
                              .hx, .done(bias_done));

  jvec_t tau_c;
  vec3_t f_task;
  corki_joint_torque_unit u_jt (.clk, .rst_n, .start(jt_start), .xd, .xd_dot, .xd_ddot, .x,
                                .xdot, .kp(act.kp), .kv(act.kv), .mx, .hx, .jac_t,
                                .tau(tau_c), .f_task, .done(jt_done));

  corki_output_buffer u_ob (.clk, .rst_n, .wr(out_wr), .tau_in(tau_c), .ack(tau_ack),
                            .tau, .valid(tau_valid), .seq(tau_seq), .overrun(tau_overrun));

  corki_micro_controller u_mc (
    .clk, .rst_n, .start, .ace_valid, .upd_pose, .upd_mass, .pose_done, .traj_done,
    .torque_done, .mass_done, .bias_done, .jt_done,
    .commit, .ace_eval, .traj_start, .clear_df, .pose_start, .pose_full, .mass_start,
    .bias_start, .jt_start, .out_wr, .busy, .done, .last_latency,
    .n_pose_full, .n_pose_reuse, .n_mass_full, .n_mass_reuse);

  assign x_ee = x;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_upd_pose <= 1'b0; last_upd_mass <= 1'b0;
    end else if (ace_valid) begin
      last_upd_pose <= upd_pose; last_upd_mass <= upd_mass;
    end
  end
endmodule
