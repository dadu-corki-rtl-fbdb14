// corki_line_buffer_tb: writes seven records, checks that the buffer stops
// accepting, that they come out in reverse order, and that it accepts the
// next batch afterwards; a random-stall read side is used in later batches.
module corki_line_buffer_tb;
  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [31:0] in_data = 0, out_data;
  corki_line_buffer #(.T(logic [31:0]), .N(7)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [31:0] v[7];
    repeat (3) @(posedge clk); rst_n = 1;
    for (int b = 0; b < 5; b++) begin
      for (int i = 0; i < 7; i++) begin
        v[i] = $urandom;
        @(negedge clk); check(in_ready && !out_valid, "accepting"); in_valid = 1; in_data = v[i];
      end
      @(negedge clk); in_valid = 0;
      check(!in_ready && out_valid, "full, draining");
      for (int i = 6; i >= 0; i--) begin
        while (1) begin
          @(negedge clk); out_ready = (b == 0) || ($urandom_range(0, 1) == 1);
          @(posedge clk);
          if (out_valid && out_ready) break;
        end
        check(out_data == v[i], $sformatf("reverse order entry %0d", i));
      end
      @(negedge clk); out_ready = 0;
      check(in_ready && !out_valid, "empty after drain");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
