// corki_joint_torque_unit: the computed-torque control law.
//
//     e = x_d - x,  edot = xd_d - xdot
//     F = Mx (xdd_d + Kp e + Kv edot) + h_x
//     tau = J^T F
// Kp and Kv are diagonal (one gain per task dimension). Three register
// stages after `start`: commanded acceleration, task force F, joint torques
// tau with a `done` pulse. The law is the paper's; the diagonal gains and
// the staging are this design's own.
module corki_joint_torque_unit
  import corki_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  vec3_t  xd,
  input  vec3_t  xd_dot,
  input  vec3_t  xd_ddot,
  input  vec3_t  x,
  input  vec3_t  xdot,
  input  vec3_t  kp,
  input  vec3_t  kv,
  input  mat3_t  mx,
  input  vec3_t  hx,
  input  jtmat_t jac_t,
  output jvec_t  tau,
  output vec3_t  f_task,
  output logic   done
);
  vec3_t acc, e, ed;
  logic  s1, s2;

  always_comb begin
    e  = v_sub(xd, x);
    ed = v_sub(xd_dot, xdot);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; s1 <= 1'b0; s2 <= 1'b0; tau <= '0; f_task <= '0; done <= 1'b0;
    end else begin
      s1   <= start;
      s2   <= s1;
      done <= s2;
      if (start)
        acc <= '{x: xd_ddot.x + fx_mul(kp.x, e.x) + fx_mul(kv.x, ed.x),
                 y: xd_ddot.y + fx_mul(kp.y, e.y) + fx_mul(kv.y, ed.y),
                 z: xd_ddot.z + fx_mul(kp.z, e.z) + fx_mul(kv.z, ed.z)};
      if (s1)
        f_task <= v_add('{x: v_dot(mx[0], acc), y: v_dot(mx[1], acc), z: v_dot(mx[2], acc)}, hx);
      if (s2)
        for (int a = 0; a < NJ; a++) tau[a] <= v_dot(jac_t[a], f_task);
    end
  end
endmodule
