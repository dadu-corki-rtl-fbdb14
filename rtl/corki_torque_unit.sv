// corki_torque_unit: joint torques from link forces (dataflow stage 5).
//
// Reads the force records from the line buffer tip-to-base and runs the
// backward Newton-Euler recursion for point masses:
//     f_i = F_i + f_{i+1},   n_i = n_{i+1} + r_i x f_i,   tau_i = z_i . n_i
// (f_i: force carried by joint i, n_i: moment about frame origin p_i). One
// record per cycle. Because the accelerations had qdd = 0 and gravity, the
// result is the joint-space bias torque h(theta, thetad). `done` pulses after
// joint 1; `h` holds until the next control cycle. `clear` restarts.
module corki_torque_unit
  import corki_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clear,
  input  logic     in_valid,
  output logic     in_ready,
  input  frc_rec_t in_rec,
  output jvec_t    h,
  output logic     done
);
  vec3_t f_acc, n_acc, fn, nn;

  always_comb begin
    fn = v_add(in_rec.f, f_acc);
    nn = v_add(n_acc, v_cross(in_rec.r, fn));
  end
  assign in_ready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_acc <= '0; n_acc <= '0; h <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (clear) begin
        f_acc <= '0; n_acc <= '0;
      end else if (in_valid) begin
        f_acc <= fn;
        n_acc <= nn;
        h[in_rec.idx] <= v_dot(in_rec.z, nn);
        if (in_rec.idx == '0) done <= 1'b1;
      end
    end
  end
endmodule
