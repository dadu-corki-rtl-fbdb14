// corki_accel_unit: acceleration of each link (dataflow stage 3).
//
// Outward acceleration recursion with zero joint acceleration:
//     alpha_i = alpha_{i-1} + w_{i-1} x (z_i qd_i)
//     a_{i+1} = a_i + alpha_i x r_i + w_i x (w_i x r_i)
// starting from a_1 = (0, 0, g): gravity enters as an upward acceleration of
// the base, so the force and torque stages deliver the joint-space bias
// torque h = C(theta, thetad) thetad + g(theta). One record per cycle. After
// link 7, a_8 - (0,0,g) is the end-effector bias acceleration Jdot*thetad,
// registered as `jdqd` with a `done` pulse; the task-space bias force unit
// uses it. `clear` restarts the recursion. The stage follows the paper; the
// recursion is textbook Newton-Euler, and qdd = 0 is this design's way of
// obtaining h from the same pipeline. Like the velocity unit it is
// combinational between two FIFOs: handshake, idx, z and r pass straight
// through and only the running sums are registered.
module corki_accel_unit
  import corki_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clear,
  input  logic     in_valid,
  output logic     in_ready,
  input  vel_rec_t in_rec,
  output logic     out_valid,
  input  logic     out_ready,
  output acc_rec_t out_rec,
  output vec3_t    jdqd,
  output logic     done
);
  localparam vec3_t A0 = '{x: '0, y: '0, z: GRAVITY};

  vec3_t al_acc, a_acc;
  vec3_t al, an;
  logic  fire;

  always_comb begin
    al = v_add(al_acc, v_cross(in_rec.w_prev, in_rec.zqd));
    an = v_add(v_add(a_acc, v_cross(al, in_rec.r)),
               v_cross(in_rec.w, v_cross(in_rec.w, in_rec.r)));
    out_rec = '{idx: in_rec.idx, z: in_rec.z, r: in_rec.r, a: an};
  end
  assign in_ready  = out_ready;
  assign out_valid = in_valid;
  assign fire      = in_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      al_acc <= '0; a_acc <= A0; jdqd <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (clear) begin
        al_acc <= '0; a_acc <= A0;
      end else if (fire) begin
        al_acc <= al;
        a_acc  <= an;
        if (in_rec.idx == lidx_t'(NJ - 1)) begin jdqd <= v_sub(an, A0); done <= 1'b1; end
      end
    end
  end
endmodule
