// corki_input_buffer: the accelerator's input register bank.
//
// The host (robot computer / network interface) writes joint angles, joint
// velocities, the cubic trajectory coefficients received from the inference
// server, the trajectory time and the gains into a shadow copy, one 32-bit
// Q16.16 word per write (register map in corki_pkg). A `commit` pulse from
// the micro controller copies the whole shadow set into the active set in one
// cycle, so the host can prepare the next cycle's inputs while the current
// one is computed. The active set `act` is what all units read. Unmapped
// addresses are ignored. The block's place follows the paper; the double
// buffering and the register map are this design's own.
module corki_input_buffer
  import corki_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     wr_en,
  input  logic [5:0] wr_addr,
  input  fx_t      wr_data,
  input  logic     commit,
  output ctrl_in_t act
);
  ctrl_in_t shadow;

  function automatic vec3_t set_k(vec3_t v, int unsigned k, fx_t d);
    vec3_t r;
    r = v;
    if (k == 0) r.x = d; else if (k == 1) r.y = d; else r.z = d;
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shadow <= '0;
    end else if (wr_en) begin
      int unsigned a;
      a = 32'(wr_addr);
      if (a < ADDR_THETAD)                shadow.theta[a - ADDR_THETA]   <= wr_data;
      else if (a < ADDR_COEF)             shadow.thetad[a - ADDR_THETAD] <= wr_data;
      else if (a < ADDR_COEF + 3)         shadow.ca <= set_k(shadow.ca, a - ADDR_COEF, wr_data);
      else if (a < ADDR_COEF + 6)         shadow.cb <= set_k(shadow.cb, a - ADDR_COEF - 3, wr_data);
      else if (a < ADDR_COEF + 9)         shadow.cc <= set_k(shadow.cc, a - ADDR_COEF - 6, wr_data);
      else if (a < ADDR_T)                shadow.cd <= set_k(shadow.cd, a - ADDR_COEF - 9, wr_data);
      else if (a == ADDR_T)               shadow.t  <= wr_data;
      else if (a < ADDR_KV)               shadow.kp <= set_k(shadow.kp, a - ADDR_KP, wr_data);
      else if (a < ADDR_KV + 3)           shadow.kv <= set_k(shadow.kv, a - ADDR_KV, wr_data);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) act <= '0;
    else if (commit) act <= shadow;
  end
endmodule
