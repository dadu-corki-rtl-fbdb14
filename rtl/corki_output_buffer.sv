// corki_output_buffer: holds the joint torques for the motor drivers.
//
// On `wr` the torque vector of the finished control cycle is captured, the
// sequence number is incremented and `valid` is raised. The reader (motor
// interface) takes `tau` and pulses `ack`, which clears `valid`. If a new
// vector arrives before the old one was acknowledged, the old one is
// overwritten and `overrun` counts it. The block's place follows the paper;
// its behaviour is this design's own.
module corki_output_buffer
  import corki_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr,
  input  jvec_t       tau_in,
  input  logic        ack,
  output jvec_t       tau,
  output logic        valid,
  output logic [15:0] seq,
  output logic [15:0] overrun
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tau <= '0; valid <= 1'b0; seq <= '0; overrun <= '0;
    end else if (wr) begin
      tau   <= tau_in;
      valid <= 1'b1;
      seq   <= seq + 1'b1;
      if (valid && !ack) overrun <= overrun + 1'b1;
    end else if (ack) begin
      valid <= 1'b0;
    end
  end
endmodule
