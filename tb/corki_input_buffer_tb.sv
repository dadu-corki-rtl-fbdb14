// corki_input_buffer_tb: writes every mapped register with a distinct value,
// checks that the active set is unchanged until commit and equal to the
// written values after it, and that unmapped addresses change nothing.
module corki_input_buffer_tb;
  import corki_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0, commit = 0;
  always #5 clk = ~clk;
  logic [5:0] wr_addr = 0;
  fx_t wr_data = 0;
  ctrl_in_t act;
  corki_input_buffer dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic fx_t val(int a, int round); return fx_t'(32'(a * 1000 + round * 7 + 1)); endfunction
  function automatic fx_t comp(vec3_t v, int k); return (k == 0) ? v.x : (k == 1) ? v.y : v.z; endfunction
  function automatic fx_t get(ctrl_in_t s, int a);
    if (a < 7) return s.theta[a];
    if (a < 14) return s.thetad[a - 7];
    if (a < 17) return comp(s.ca, a - 14);
    if (a < 20) return comp(s.cb, a - 17);
    if (a < 23) return comp(s.cc, a - 20);
    if (a < 26) return comp(s.cd, a - 23);
    if (a == 26) return s.t;
    if (a < 30) return comp(s.kp, a - 27);
    return comp(s.kv, a - 30);
  endfunction
  initial begin
    ctrl_in_t prev_act;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      prev_act = act;
      for (int a = 0; a < 33; a++) begin
        @(negedge clk); wr_en = 1; wr_addr = 6'(a); wr_data = val(a, round);
      end
      @(negedge clk); wr_addr = 6'd40; wr_data = 32'hDEAD;
      @(negedge clk); wr_en = 0;
      check(act == prev_act, "active set unchanged prev_act commit");
      commit = 1; @(negedge clk); commit = 0;
      for (int a = 0; a < 33; a++) check(get(act, a) == val(a, round), $sformatf("register %0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
