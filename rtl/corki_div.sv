// corki_div: sequential signed Q16.16 divider, q = a / b.
//
// Used by the mass matrix unit for the Gauss-Jordan pivots and the 3x3
// determinant. Restoring division on magnitudes, one quotient bit per cycle:
// the dividend |a| << 16 has 48 bits, so a result takes 48 cycles after
// `start`, then `done` pulses and `q` holds. The sign is applied at the end;
// a quotient that does not fit is saturated, and b = 0 returns the largest
// value of a's sign. Not described by the paper; this design's own helper.
module corki_div
  import corki_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  a,
  input  fx_t  b,
  output logic busy,
  output logic done,
  output fx_t  q
);
  localparam int unsigned NB = 48;

  logic [NB-1:0] dvd;     // remaining dividend bits (shifted out MSB first)
  logic [NB-1:0] quo;
  logic [32:0]   rem;
  logic [31:0]   dsr;
  logic          neg, dz;
  logic [5:0]    cnt;

  logic [32:0]   trial;
  assign trial = {rem[31:0], dvd[NB-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dvd <= '0; quo <= '0; rem <= '0; dsr <= '0; neg <= 1'b0; dz <= 1'b0;
      cnt <= '0; busy <= 1'b0; done <= 1'b0; q <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        dvd  <= {16'(0), (a < 0) ? 32'(-a) : 32'(a)} << 16;
        dsr  <= (b < 0) ? 32'(-b) : 32'(b);
        neg  <= (a < 0) ^ (b < 0);
        dz   <= (b == 0);
        quo  <= '0;
        rem  <= '0;
        cnt  <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        dvd <= dvd << 1;
        if (trial >= {1'b0, dsr}) begin
          rem <= trial - {1'b0, dsr};
          quo <= {quo[NB-2:0], 1'b1};
        end else begin
          rem <= trial;
          quo <= {quo[NB-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (cnt == 6'(NB - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
      if (busy && cnt == 6'(NB - 1)) begin
        // final quotient bit is folded in here
        logic [NB-1:0] qf;
        qf = {quo[NB-2:0], (trial >= {1'b0, dsr})};
        if (dz || qf > 48'h7FFF_FFFF) q <= neg ? 32'sh8000_0001 : 32'sh7FFF_FFFF;
        else                          q <= neg ? -fx_t'(qf[31:0]) : fx_t'(qf[31:0]);
      end
    end
  end
endmodule
