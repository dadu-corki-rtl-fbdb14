// corki_ace_unit_tb: random joint walks with steps of varied size; a model of
// the rule (probability = saturated weighted sum of |theta - theta_ref|,
// update when above 0.4, mass update implies pose update, first call always
// updates) predicts each decision and the reported probabilities.
module corki_ace_unit_tb;
  import corki_pkg::*;
  logic clk = 0, rst_n = 0, eval = 0, valid, upd_pose, upd_mass;
  always #5 clk = ~clk;
  jvec_t theta = '0;
  fx_t p_pose, p_mass;
  corki_ace_unit dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  real WP[7] = '{1.0, 1.5, 1.5, 1.0, 1.0, 1.0, 0.5};
  real WM[7] = '{0.05, 1.5, 1.5, 1.0, 0.2, 0.2, 0.05};
  initial begin
    real th[7], rp[7], rm[7], pp, pm, sc;
    bit first, up, um;
    int n_up = 0, n_um = 0, n_skip = 0;
    first = 1;
    for (int i = 0; i < 7; i++) begin th[i] = 0.0; rp[i] = 0.0; rm[i] = 0.0; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      sc = (n % 5 == 0) ? 0.3 : 0.03;
      for (int i = 0; i < 7; i++) begin
        th[i] += (real'($urandom_range(0, 2000)) - 1000.0) / 1000.0 * sc;
        theta[i] = fx_t'($rtoi(th[i] * 65536.0));
      end
      pp = 0; pm = 0;
      for (int i = 0; i < 7; i++) begin
        real d; d = real'(theta[i]) / 65536.0;
        pp += WP[i] * ((d > rp[i]) ? d - rp[i] : rp[i] - d);
        pm += WM[i] * ((d > rm[i]) ? d - rm[i] : rm[i] - d);
      end
      if (pp > 1.0) pp = 1.0;
      if (pm > 1.0) pm = 1.0;
      um = first || pm > 0.4;
      up = first || pp > 0.4 || um;
      @(negedge clk); eval = 1; @(negedge clk); eval = 0;
      check(valid, "valid one cycle after eval");
      if ((pm - 0.4) > 1e-3 || (0.4 - pm) > 1e-3) check(upd_mass == um, $sformatf("mass decision %0d p=%f", n, pm));
      if ((pp - 0.4) > 1e-3 || (0.4 - pp) > 1e-3) check(upd_pose == up, $sformatf("pose decision %0d p=%f", n, pp));
      check(!upd_mass || upd_pose, "mass update implies pose update");
      check((real'(p_mass) / 65536.0 - pm) < 1e-3 && (pm - real'(p_mass) / 65536.0) < 1e-3, "p_mass value");
      if (upd_pose) begin for (int i = 0; i < 7; i++) rp[i] = real'(theta[i]) / 65536.0; n_up++; end
      if (upd_mass) begin for (int i = 0; i < 7; i++) rm[i] = real'(theta[i]) / 65536.0; n_um++; end
      if (!upd_pose) n_skip++;
      first = 0;
    end
    $display("pose updates %0d, mass updates %0d, skipped %0d", n_up, n_um, n_skip);
    check(n_skip > 0 && n_um > 0 && n_up > n_um, "all decision kinds seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
