// corki_fifo_tb: random push/pop traffic with random back-pressure through a
// 4-deep FIFO; every word must come out once, in order. Also checks that a
// full FIFO refuses a push, that data is valid the cycle after the push, and
// that clear empties it.
module corki_fifo_tb;
  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [31:0] in_data = 0, out_data;
  corki_fifo #(.T(logic [31:0]), .DEPTH(4)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [31:0] q[$];
  int sent = 0, got = 0;
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    // fill to full
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); in_valid = 1; in_data = 32'(100 + i);
      check(in_ready, "ready while not full");
    end
    @(negedge clk); in_valid = 0;
    check(!in_ready, "full FIFO not ready");
    check(out_valid && out_data == 32'd100, "head after fill");
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    check(!out_valid && in_ready, "clear empties");
    // random traffic
    while (got < 300) begin
      @(negedge clk);
      in_valid  = (sent < 300) && ($urandom_range(0, 3) != 0);
      in_data   = $urandom;
      out_ready = ($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (in_valid && in_ready) begin q.push_back(in_data); sent++; end
      if (out_valid && out_ready) begin
        check(q.size() > 0 && out_data == q[0], "order");
        void'(q.pop_front()); got++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
