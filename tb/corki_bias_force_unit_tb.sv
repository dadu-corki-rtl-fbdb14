// corki_bias_force_unit_tb: random bias torques h, J M^-1, Jdot*qd and Mx;
// checks hx = Mx (J M^-1 h - Jdot*qd) against real arithmetic and the
// start-to-done latency of two cycles.
module corki_bias_force_unit_tb;
  import corki_pkg::*;
  import corki_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, done;
  always #5 clk = ~clk;
  jvec_t h; jmat_t jminv; vec3_t jdqd, hx; mat3_t mx;
  corki_bias_force_unit dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic real rnd(real s); return (real'($urandom_range(0, 20000)) - 10000.0) / 10000.0 * s; endfunction
  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    real H[7], JM[3][7], JD[3], MX[3][3], u[3], ref_hx, e; int cyc;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      for (int j = 0; j < 7; j++) begin H[j] = fx2r(r2fx(rnd(30.0))); h[j] = r2fx(H[j]); end
      for (int d = 0; d < 3; d++) begin
        JD[d] = fx2r(r2fx(rnd(3.0))); jdqd = v_set(jdqd, d, r2fx(JD[d]));
        for (int j = 0; j < 7; j++) begin JM[d][j] = fx2r(r2fx(rnd(2.0))); jminv[d][j] = r2fx(JM[d][j]); end
        for (int c = 0; c < 3; c++) begin MX[d][c] = fx2r(r2fx(rnd(10.0))); mx[d] = v_set(mx[d], c, r2fx(MX[d][c])); end
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc == 2, $sformatf("latency %0d", cyc));
      for (int d = 0; d < 3; d++) begin
        u[d] = -JD[d];
        for (int j = 0; j < 7; j++) u[d] += JM[d][j] * H[j];
      end
      for (int d = 0; d < 3; d++) begin
        ref_hx = 0.0;
        for (int c = 0; c < 3; c++) ref_hx += MX[d][c] * u[c];
        e = fx2r(v_get(hx, d)) - ref_hx;
        check(e < 0.02 && e > -0.02, $sformatf("hx[%0d] %f vs %f", d, fx2r(v_get(hx, d)), ref_hx));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic vec3_t v_set(vec3_t v, int k, fx_t a);
    if (k == 0) v.x = a; else if (k == 1) v.y = a; else v.z = a;
    return v;
  endfunction
endmodule
