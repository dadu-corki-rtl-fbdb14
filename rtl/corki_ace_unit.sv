// corki_ace_unit: approximate computing enable (ACE).
//
// Between control cycles the joints move little, and joints differ in how
// much their motion changes the Jacobian and the mass matrix. For each of the
// two reusable results (link poses with the Jacobian, and the mass matrix)
// this unit keeps the joint angles at which it was last recomputed and forms
//     p = min(1, sum_i w_i * |theta_i - theta_ref_i|)
// with per-joint impact factors w_i (per radian). The matrix is recomputed
// when p exceeds THRESH, otherwise the previous one is reused. A mass-matrix
// update forces a pose update, since M is built from the poses. The first
// cycle after reset always recomputes. `eval` samples theta; one cycle later
// `valid` pulses with `upd_pose`/`upd_mass`, and the reference angles of each
// updated matrix are replaced by theta.
// Per the paper: a per-matrix probability from joint-weighted movement, a
// threshold test, and the 40 % threshold. This design's own: the formula
// above and the impact factors (joints 2-4 large, 1 and 7 small, matching the
// paper's mass-matrix study).
module corki_ace_unit
  import corki_pkg::*;
#(
  parameter fx_t   THRESH = to_fx(0.4),
  // joint 7 .. joint 1; joint 1 rotates the whole arm, which moves x and J
  // but hardly changes M, so the two tables differ there
  parameter jvec_t W_POSE = {to_fx(0.5), to_fx(1.0), to_fx(1.0), to_fx(1.0),
                             to_fx(1.5), to_fx(1.5), to_fx(1.0)},
  parameter jvec_t W_MASS = {to_fx(0.05), to_fx(0.2), to_fx(0.2), to_fx(1.0),
                             to_fx(1.5), to_fx(1.5), to_fx(0.05)}
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  eval,
  input  jvec_t theta,
  output logic  valid,
  output logic  upd_pose,
  output logic  upd_mass,
  output fx_t   p_pose,
  output fx_t   p_mass
);
  localparam fx_t ONE = to_fx(1.0);

  jvec_t ref_pose, ref_mass;
  logic  have_ref;

  function automatic fx_t prob(jvec_t th, jvec_t rf, jvec_t w);
    fx_t s;
    s = '0;
    for (int i = 0; i < NJ; i++) s += fx_mul(w[i], fx_abs(th[i] - rf[i]));
    return (s > ONE) ? ONE : s;
  endfunction

  fx_t  pp, pm;
  logic um, up;
  always_comb begin
    pp = prob(theta, ref_pose, W_POSE);
    pm = prob(theta, ref_mass, W_MASS);
    um = !have_ref || (pm > THRESH);
    up = !have_ref || (pp > THRESH) || um;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ref_pose <= '0; ref_mass <= '0; have_ref <= 1'b0;
      valid <= 1'b0; upd_pose <= 1'b0; upd_mass <= 1'b0; p_pose <= '0; p_mass <= '0;
    end else begin
      valid <= eval;
      if (eval) begin
        upd_pose <= up;
        upd_mass <= um;
        p_pose   <= pp;
        p_mass   <= pm;
        have_ref <= 1'b1;
        if (up) ref_pose <= theta;
        if (um) ref_mass <= theta;
      end
    end
  end
endmodule
