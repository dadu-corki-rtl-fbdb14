// corki_bias_force_unit: task-space bias force h_x.
//
// Maps the joint-space bias torque h (from the torque unit) into task space
// and removes the end-effector bias acceleration:
//     h_x = Mx (J M^-1 h - Jdot thetad)
// reusing J M^-1 and Mx from the mass matrix unit and Jdot thetad from the
// acceleration unit, so no quantity is recomputed. Two register stages:
// `start`, then the 3-vector J M^-1 h - Jdot thetad, then h_x with `done`.
// The unit and its reuse of the torque and mass-matrix results follow the
// paper; the formula is the standard operational-space one.
module corki_bias_force_unit
  import corki_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  jvec_t h,
  input  jmat_t jminv,
  input  vec3_t jdqd,
  input  mat3_t mx,
  output vec3_t hx,
  output logic  done
);
  vec3_t u;
  logic  s1;

  function automatic fx_t row_dot(jmat_t m, int unsigned d, jvec_t v);
    fx_t s;
    s = '0;
    for (int a = 0; a < NJ; a++) s += fx_mul(m[d][a], v[a]);
    return s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u <= '0; s1 <= 1'b0; hx <= '0; done <= 1'b0;
    end else begin
      s1   <= start;
      done <= s1;
      if (start)
        u <= v_sub('{x: row_dot(jminv, 0, h), y: row_dot(jminv, 1, h), z: row_dot(jminv, 2, h)}, jdqd);
      if (s1)
        hx <= '{x: v_dot(mx[0], u), y: v_dot(mx[1], u), z: v_dot(mx[2], u)};
    end
  end
endmodule
