// corki_torque_unit_tb: random link forces, axes and link vectors delivered
// tip to base; checks every joint torque against the direct sum
// tau_i = z_i . sum_{k>=i} (p_{k+1} - p_i) x F_k in real arithmetic, and that
// clear restarts the accumulation.
module corki_torque_unit_tb;
  import corki_pkg::*;
  import corki_ref_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_ready, done;
  always #5 clk = ~clk;
  frc_rec_t in_rec = '0;
  jvec_t h;
  corki_torque_unit dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic real rnd(real s); return (real'($urandom_range(0, 20000)) - 10000.0) / 10000.0 * s; endfunction
  function automatic vec3_t fv(v3_t a); return '{x: r2fx(a[0]), y: r2fx(a[1]), z: r2fx(a[2])}; endfunction
  initial begin
    repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    v3_t z[7], r[7], F[7], n, d, t1;
    real tr, e;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int b = 0; b < 30; b++) begin
      for (int i = 0; i < 7; i++) begin
        for (int k = 0; k < 3; k++) begin r[i][k] = rnd(0.3); F[i][k] = rnd(40.0); end
        z[i] = '{rnd(1.0), rnd(1.0), rnd(1.0)};
        begin real l; l = $sqrt(rdot(z[i], z[i])); for (int k = 0; k < 3; k++) z[i][k] /= l; end
        // values as the RTL sees them
        for (int k = 0; k < 3; k++) begin r[i][k] = fx2r(r2fx(r[i][k])); F[i][k] = fx2r(r2fx(F[i][k])); z[i][k] = fx2r(r2fx(z[i][k])); end
      end
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int i = 6; i >= 0; i--) begin
        @(negedge clk); in_valid = 1; in_rec = '{idx: 3'(i), z: fv(z[i]), r: fv(r[i]), f: fv(F[i])};
        check(in_ready, "always ready");
      end
      @(negedge clk); in_valid = 0;
      check(done, "done after joint 1");
      for (int i = 0; i < 7; i++) begin
        n = '{0.0, 0.0, 0.0};
        d = '{0.0, 0.0, 0.0};
        for (int k = i; k < 7; k++) begin
          for (int c = 0; c < 3; c++) d[c] += r[k][c];   // p_{k+1} - p_i
          t1 = rcross(d, F[k]);
          for (int c = 0; c < 3; c++) n[c] += t1[c];
        end
        tr = rdot(z[i], n);
        e = fx2r(h[i]) - tr;
        check(e < 5e-3 && e > -5e-3, $sformatf("tau_%0d %f vs %f", i, fx2r(h[i]), tr));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
