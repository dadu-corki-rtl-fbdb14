// corki_cordic: sine and cosine of a joint angle for the pose unit.
//
// Rotation-mode CORDIC, one micro-rotation per cycle, ITER cycles per angle.
// The input angle (Q16.16 radians, |theta| < pi) is first folded into
// [-pi/2, pi/2] by subtracting or adding pi, which negates both results. The
// vector starts at (K, 0) with K = 0.607253, the inverse CORDIC gain, so no
// final scaling is needed. `start` loads an angle; `done` pulses one cycle
// when `cos_o`/`sin_o` (Q16.16) are valid; they hold until the next start.
// The paper does not say how trigonometry is computed; CORDIC is this
// design's choice.
module corki_cordic
  import corki_pkg::*;
#(
  parameter int unsigned ITER = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  theta,
  output logic busy,
  output logic done,
  output fx_t  cos_o,
  output fx_t  sin_o
);
  localparam fx_t PI     = to_fx(3.14159265358979);
  localparam fx_t HALFPI = to_fx(1.57079632679490);
  localparam fx_t KINV   = to_fx(0.607252935008881);

  // atan(2^-i) in Q16.16
  function automatic fx_t atan_tab(int unsigned i);
    case (i)
      0: return 32'sd51472;  1: return 32'sd30386;  2: return 32'sd16055;
      3: return 32'sd8150;   4: return 32'sd4091;   5: return 32'sd2047;
      6: return 32'sd1024;   7: return 32'sd512;    8: return 32'sd256;
      9: return 32'sd128;    10: return 32'sd64;    11: return 32'sd32;
      12: return 32'sd16;    13: return 32'sd8;     14: return 32'sd4;
      default: return 32'sd2;
    endcase
  endfunction

  fx_t         x, y, zr;
  logic        neg;
  logic [4:0]  it;

  assign cos_o = neg ? -x : x;
  assign sin_o = neg ? -y : y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; y <= '0; zr <= '0; neg <= 1'b0; it <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        x    <= KINV;
        y    <= '0;
        it   <= '0;
        busy <= 1'b1;
        if (theta > HALFPI)       begin zr <= theta - PI; neg <= 1'b1; end
        else if (theta < -HALFPI) begin zr <= theta + PI; neg <= 1'b1; end
        else                      begin zr <= theta;      neg <= 1'b0; end
      end else if (busy) begin
        if (zr >= 0) begin
          x  <= x - (y >>> it);
          y  <= y + (x >>> it);
          zr <= zr - atan_tab(it);
        end else begin
          x  <= x + (y >>> it);
          y  <= y - (x >>> it);
          zr <= zr + atan_tab(it);
        end
        it <= it + 1'b1;
        if (it == 5'(ITER - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
