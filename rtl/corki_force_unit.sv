// corki_force_unit: inertial force of each link (dataflow stage 4).
//
// With each link modelled as a point mass m_i (kg, from corki_pkg), the force
// the link needs is F_i = m_i a_i, where a_i already contains gravity. The
// record is registered: a result leaves one cycle after it is accepted, and
// the unit accepts a new record whenever its output register is empty or
// being drained (valid/ready both sides). The stage follows the paper; the
// point-mass model (no rotational inertia term) is this design's own.
module corki_force_unit
  import corki_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clear,
  input  logic     in_valid,
  output logic     in_ready,
  input  acc_rec_t in_rec,
  output logic     out_valid,
  input  logic     out_ready,
  output frc_rec_t out_rec
);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_rec <= '0;
    end else if (clear) begin
      out_valid <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid)
        out_rec <= '{idx: in_rec.idx, z: in_rec.z, r: in_rec.r,
                     f: v_scale(LINK_MASS[in_rec.idx], in_rec.a)};
    end
  end
endmodule
