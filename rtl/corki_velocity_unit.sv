// corki_velocity_unit: velocity of each link (dataflow stage 2).
//
// Takes link records (joint axis z_i, link vector r_i) from the pose FIFO in
// base-to-tip order and runs the outward velocity recursion
//     w_i = w_{i-1} + z_i qd_i,    v_{i+1} = v_i + w_i x r_i
// (angular velocity of link i and velocity of its mass point at the far end
// of r_i; the base is at rest). One record per cycle when the output FIFO
// has room; the record passed on also carries w_{i-1} and z_i qd_i for the
// acceleration unit. After link 7 the end-effector velocity xdot = v_8 is
// registered and `done` pulses. `clear` resets the recursion at the start of
// a control cycle. The stage is combinational between its two FIFOs: the
// handshake and the record's idx, z and r fields pass straight through, and
// only the running sums are registered. The stage follows the paper; the
// recursion is standard rigid-body kinematics.
module corki_velocity_unit
  import corki_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      clear,
  input  jvec_t     thetad,
  input  logic      in_valid,
  output logic      in_ready,
  input  pose_rec_t in_rec,
  output logic      out_valid,
  input  logic      out_ready,
  output vel_rec_t  out_rec,
  output vec3_t     xdot,
  output logic      done
);
  vec3_t w_acc, v_acc;
  vec3_t zqd, w, vn;
  logic  fire;

  always_comb begin
    zqd  = v_scale(thetad[in_rec.idx], in_rec.z);
    w    = v_add(w_acc, zqd);
    vn   = v_add(v_acc, v_cross(w, in_rec.r));
    out_rec = '{idx: in_rec.idx, z: in_rec.z, r: in_rec.r, w_prev: w_acc, w: w, zqd: zqd};
  end
  assign in_ready  = out_ready;
  assign out_valid = in_valid;
  assign fire      = in_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_acc <= '0; v_acc <= '0; xdot <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (clear) begin
        w_acc <= '0; v_acc <= '0;
      end else if (fire) begin
        w_acc <= w;
        v_acc <= vn;
        if (in_rec.idx == lidx_t'(NJ - 1)) begin xdot <= vn; done <= 1'b1; end
      end
    end
  end
endmodule
