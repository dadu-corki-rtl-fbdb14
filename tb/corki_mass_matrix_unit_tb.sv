// corki_mass_matrix_unit_tb: for random arm poses, drives the unit with the
// pose table and Jacobian (from the floating-point model, quantized) and
// checks the task-space mass matrix Mx = (J M^-1 J^T)^-1 and the product
// J M^-1 against the reference; also checks busy/done framing and that a
// second start while idle gives the same answer.
module corki_mass_matrix_unit_tb;
  import corki_pkg::*;
  import corki_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, done, busy;
  always #5 clk = ~clk;
  vec3_t z_tab [NJ];
  vec3_t p_tab [NJ+1];
  jmat_t jac;
  jtmat_t jac_t;
  mat3_t mx;
  jmat_t jminv;
  corki_mass_matrix_unit dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic bit close(fx_t a, real b, real scale);
    real e; e = fx2r(a) - b; return e < 0.01 + 0.02 * scale && e > -(0.01 + 0.02 * scale);
  endfunction
  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    jv_t th; zt_t z; pt_t p; jm_t J, JMi; m3_t L; v3_t q;
    real big, bigj; int cyc; mat3_t first;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 25; n++) begin
      for (int i = 0; i < 7; i++) th[i] = (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0 * 2.0;
      if (n == 0) th = '{0.0, -0.785, 0.0, -2.356, 0.0, 1.571, 0.785};  // ready pose
      fk(th, z, p);
      for (int i = 0; i < 7; i++) for (int k = 0; k < 3; k++) z[i][k] = fx2r(r2fx(z[i][k]));
      for (int i = 0; i < 8; i++) for (int k = 0; k < 3; k++) p[i][k] = fx2r(r2fx(p[i][k]));
      q = '{p[7][0], p[7][1], p[7][2]};
      jac_of(z, p, q, 6, J);
      task_mass(z, p, L, JMi);
      for (int i = 0; i < 7; i++) z_tab[i] = '{x: r2fx(z[i][0]), y: r2fx(z[i][1]), z: r2fx(z[i][2])};
      for (int i = 0; i < 8; i++) p_tab[i] = '{x: r2fx(p[i][0]), y: r2fx(p[i][1]), z: r2fx(p[i][2])};
      for (int d = 0; d < 3; d++) for (int j = 0; j < 7; j++) jac[d][j] = r2fx(J[d][j]);
      for (int j = 0; j < 7; j++) jac_t[j] = '{x: jac[0][j], y: jac[1][j], z: jac[2][j]};
      big = 0.0; bigj = 0.0;
      for (int d = 0; d < 3; d++) for (int e = 0; e < 3; e++) if ((L[d][e] > 0 ? L[d][e] : -L[d][e]) > big) big = (L[d][e] > 0 ? L[d][e] : -L[d][e]);
      for (int d = 0; d < 3; d++) for (int j = 0; j < 7; j++) if ((JMi[d][j] > 0 ? JMi[d][j] : -JMi[d][j]) > bigj) bigj = (JMi[d][j] > 0 ? JMi[d][j] : -JMi[d][j]);
      if (big > 2000.0) continue;  // near-singular pose: Q16.16 range exceeded
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      check(busy, "busy after start");
      cyc = 0;
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc > 100 && cyc < 2000, $sformatf("latency %0d", cyc));
      @(negedge clk);
      check(!busy, "idle after done");
      for (int d = 0; d < 3; d++) for (int e = 0; e < 3; e++)
        check(close(v_get(mx[d], e), L[d][e], big), $sformatf("pose %0d Mx[%0d][%0d] %f vs %f", n, d, e, fx2r(v_get(mx[d], e)), L[d][e]));
      for (int d = 0; d < 3; d++) for (int j = 0; j < 7; j++)
        check(close(jminv[d][j], JMi[d][j], bigj), $sformatf("pose %0d JMinv[%0d][%0d] %f vs %f", n, d, j, fx2r(jminv[d][j]), JMi[d][j]));
      if (n == 0) begin
        first = mx;
        @(negedge clk); start = 1; @(negedge clk); start = 0;
        while (!done) @(negedge clk);
        @(negedge clk);
        check(mx == first, "repeatable");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
