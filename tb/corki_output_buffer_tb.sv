// corki_output_buffer_tb: random writes and acknowledges against a model of
// the buffer: the last written torque vector is held, valid rises on a write
// and falls on an acknowledge, seq counts writes and overrun counts writes
// that replaced an unacknowledged result (write and ack in the same cycle
// counts as consumed).
module corki_output_buffer_tb;
  import corki_pkg::*;
  logic clk = 0, rst_n = 0, wr = 0, ack = 0, valid;
  always #5 clk = ~clk;
  jvec_t tau_in = '0, tau;
  logic [15:0] seq, overrun;
  corki_output_buffer dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    jvec_t m_tau = '0; logic m_valid = 0; int m_seq = 0, m_ovr = 0;
    repeat (3) @(posedge clk);
    check(!valid && seq == 0 && overrun == 0, "reset state");
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      wr = ($urandom_range(0, 2) == 0); ack = ($urandom_range(0, 1) == 0);
      for (int j = 0; j < 7; j++) tau_in[j] = $urandom;
      @(posedge clk);
      if (wr) begin
        if (m_valid && !ack) m_ovr++;
        m_tau = tau_in; m_valid = 1; m_seq++;
      end else if (ack) m_valid = 0;
      #1;
      check(valid == m_valid && seq == 16'(m_seq) && overrun == 16'(m_ovr) && (!m_valid || tau == m_tau),
            $sformatf("step %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
