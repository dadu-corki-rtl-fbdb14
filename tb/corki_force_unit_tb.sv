// corki_force_unit_tb: random acceleration records for each link index with
// random output stalls; checks F = m_i a against the link masses in real
// arithmetic, that records pass in order, and the one-cycle register delay.
module corki_force_unit_tb;
  import corki_pkg::*;
  import corki_ref_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  always #5 clk = ~clk;
  acc_rec_t in_rec = '0;
  frc_rec_t out_rec;
  corki_force_unit dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic bit near(fx_t a, real b, real tol);
    real e; e = fx2r(a) - b; return e < tol && e > -tol;
  endfunction
  initial begin
    repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  acc_rec_t sent[$];
  int nsent = 0, ngot = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      acc_rec_t e;
      e = sent.pop_front();
      check(out_rec.idx == e.idx && out_rec.z == e.z && out_rec.r == e.r, "order and pass-through");
      check(near(out_rec.f.x, MASS[e.idx] * fx2r(e.a.x), 1e-3) && near(out_rec.f.y, MASS[e.idx] * fx2r(e.a.y), 1e-3) &&
            near(out_rec.f.z, MASS[e.idx] * fx2r(e.a.z), 1e-3), $sformatf("F = m a, link %0d", e.idx));
      ngot++;
    end
    if (in_valid && in_ready) begin sent.push_back(in_rec); nsent++; end
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); in_valid = 1; out_ready = 0; in_rec.a.z = r2fx(1.0);
    @(negedge clk); in_valid = 0;
    check(out_valid && !in_ready, "registered: valid after one cycle, holds under stall");
    while (ngot < 200) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 3) != 0);
      if (!in_valid || in_ready) begin
        in_valid = (nsent < 200) && ($urandom_range(0, 3) != 0);
        in_rec = '{idx: 3'($urandom_range(0, 6)), z: '{x: $urandom, y: $urandom, z: $urandom},
                   r: '{x: $urandom, y: $urandom, z: $urandom},
                   a: '{x: r2fx(real'($urandom_range(0, 4000)) / 100.0 - 20.0),
                        y: r2fx(real'($urandom_range(0, 4000)) / 100.0 - 20.0),
                        z: r2fx(real'($urandom_range(0, 4000)) / 100.0 - 20.0)}};
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
