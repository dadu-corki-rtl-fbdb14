// corki_line_buffer: the buffer between the force unit and the torque unit.
//
// The force unit produces link records base-to-tip, one per cycle, while the
// torque unit's backward recursion must consume them tip-to-base and cannot
// start before the last link has arrived. The line buffer absorbs that
// mismatch: it accepts N records in arrival order and, once full, delivers
// them in reverse order (last written first). Handshake is valid/ready on
// both sides; after the N-th read it is empty and accepts the next control
// cycle's records. `clear` resets it. Its place follows the paper; the
// reverse-order readout is this design's reading of its role.
module corki_line_buffer #(
  parameter type         T = logic [31:0],
  parameter int unsigned N = 7
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);
  localparam int unsigned AW = $clog2(N + 1);

  T              mem [N];
  logic [AW-1:0] fill;     // entries written
  logic          draining;

  assign in_ready  = !draining;
  assign out_valid = draining;
  assign out_data  = mem[(fill == '0) ? '0 : fill - 1'b1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill <= '0; draining <= 1'b0;
    end else if (clear) begin
      fill <= '0; draining <= 1'b0;
    end else if (!draining) begin
      if (in_valid) begin
        fill <= fill + 1'b1;
        if (fill == AW'(N - 1)) draining <= 1'b1;
      end
    end else if (out_ready) begin
      fill <= fill - 1'b1;
      if (fill == AW'(1)) draining <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (!draining && in_valid) mem[fill[$clog2(N)-1:0]] <= in_data;
  end
endmodule
