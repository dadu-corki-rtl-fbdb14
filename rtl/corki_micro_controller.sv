// corki_micro_controller: sequences one control cycle of the accelerator.
//
// On `start`: commit the input buffer; next cycle start the ACE decision,
// the trajectory evaluator and clear the dataflow stages; when the ACE
// decision arrives, start the pose unit (full or replay); when the pose unit
// is done, start the mass matrix unit if the ACE unit asked for it (it then
// runs alongside the velocity..torque dataflow); when the torque, trajectory
// and mass results are all in, run the bias force unit, then the joint
// torque unit, then write the output buffer and pulse `done`.
// It also reports the latency of the last cycle in clock cycles and counts
// full and approximate cycles. The paper calls this block a simple
// micro-controller; a fixed state machine is this design's choice.
module corki_micro_controller (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        ace_valid,
  input  logic        upd_pose,
  input  logic        upd_mass,
  input  logic        pose_done,
  input  logic        traj_done,
  input  logic        torque_done,
  input  logic        mass_done,
  input  logic        bias_done,
  input  logic        jt_done,
  output logic        commit,
  output logic        ace_eval,
  output logic        traj_start,
  output logic        clear_df,
  output logic        pose_start,
  output logic        pose_full,
  output logic        mass_start,
  output logic        bias_start,
  output logic        jt_start,
  output logic        out_wr,
  output logic        busy,
  output logic        done,
  output logic [15:0] last_latency,
  output logic [15:0] n_pose_full,
  output logic [15:0] n_pose_reuse,
  output logic [15:0] n_mass_full,
  output logic [15:0] n_mass_reuse
);
  typedef enum logic [2:0] {S_IDLE, S_COMMIT, S_ACE, S_POSE, S_GATHER, S_BIAS, S_JT} state_e;
  state_e st;

  logic        do_mass, tq_seen, tr_seen, ms_seen;
  logic [15:0] lat;

  assign busy       = (st != S_IDLE);
  assign commit     = (st == S_IDLE) && start;
  assign ace_eval   = (st == S_COMMIT);
  assign traj_start = (st == S_COMMIT);
  assign clear_df   = (st == S_COMMIT);
  assign pose_start = (st == S_ACE) && ace_valid;
  assign pose_full  = upd_pose;
  assign mass_start = (st == S_POSE) && pose_done && do_mass;
  assign bias_start = (st == S_GATHER) && tq_seen && tr_seen && ms_seen;
  assign jt_start   = (st == S_BIAS) && bias_done;
  assign out_wr     = (st == S_JT) && jt_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; do_mass <= 1'b0; tq_seen <= 1'b0; tr_seen <= 1'b0; ms_seen <= 1'b0;
      lat <= '0; last_latency <= '0; done <= 1'b0;
      n_pose_full <= '0; n_pose_reuse <= '0; n_mass_full <= '0; n_mass_reuse <= '0;
    end else begin
      done <= 1'b0;
      if (st != S_IDLE) lat <= lat + 1'b1;
      if (torque_done) tq_seen <= 1'b1;
      if (traj_done)   tr_seen <= 1'b1;
      if (mass_done)   ms_seen <= 1'b1;
      unique case (st)
        S_IDLE: if (start) begin
          st <= S_COMMIT; lat <= 16'd1;
        end
        S_COMMIT: begin
          tq_seen <= 1'b0; tr_seen <= 1'b0; ms_seen <= 1'b0;
          st <= S_ACE;
        end
        S_ACE: if (ace_valid) begin
          do_mass <= upd_mass;
          if (upd_pose) n_pose_full <= n_pose_full + 1'b1; else n_pose_reuse <= n_pose_reuse + 1'b1;
          if (upd_mass) n_mass_full <= n_mass_full + 1'b1; else n_mass_reuse <= n_mass_reuse + 1'b1;
          st <= S_POSE;
        end
        S_POSE: if (pose_done) begin
          if (!do_mass) ms_seen <= 1'b1;
          st <= S_GATHER;
        end
        S_GATHER: if (bias_start) st <= S_BIAS;
        S_BIAS:   if (bias_done)  st <= S_JT;
        S_JT: if (jt_done) begin
          st <= S_IDLE; done <= 1'b1; last_latency <= lat;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
