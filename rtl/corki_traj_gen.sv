// corki_traj_gen: reference values of the predicted trajectory.
//
// The inference server predicts, per task-space dimension, a cubic
// r(t) = a t^3 + b t^2 + c t + d (as in the paper). Computed torque control
// needs the reference position x_d = r(t), velocity xd_d = 3a t^2 + 2b t + c
// and acceleration xdd_d = 6a t + 2b. This unit evaluates all three with
// Horner's rule for the three position dimensions. `start` samples the
// inputs; results are registered and `done` pulses two cycles later.
// The evaluator itself is this design's own: the paper only says that the
// trajectory parameters are sent to the controller.
module corki_traj_gen
  import corki_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  vec3_t ca,
  input  vec3_t cb,
  input  vec3_t cc,
  input  vec3_t cd,
  input  fx_t   t,
  output vec3_t xd,
  output vec3_t xd_dot,
  output vec3_t xd_ddot,
  output logic  done
);
  localparam fx_t TWO   = to_fx(2.0);
  localparam fx_t THREE = to_fx(3.0);
  localparam fx_t SIX   = to_fx(6.0);

  vec3_t h1, h2;   // first Horner stages
  fx_t   tr;
  logic  s1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h1 <= '0; h2 <= '0; tr <= '0; s1 <= 1'b0; done <= 1'b0;
      xd <= '0; xd_dot <= '0; xd_ddot <= '0;
    end else begin
      s1   <= start;
      done <= s1;
      if (start) begin
        tr <= t;
        h1 <= v_add(v_scale(t, ca), cb);                      // a t + b
        h2 <= v_add(v_scale(t, v_scale(THREE, ca)), v_scale(TWO, cb)); // 3a t + 2b
        xd_ddot <= v_add(v_scale(t, v_scale(SIX, ca)), v_scale(TWO, cb));
      end
      if (s1) begin
        xd     <= v_add(v_scale(tr, v_add(v_scale(tr, h1), cc)), cd);
        xd_dot <= v_add(v_scale(tr, h2), cc);
      end
    end
  end
endmodule
