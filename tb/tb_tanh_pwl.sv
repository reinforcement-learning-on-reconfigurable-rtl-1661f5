// tb_tanh_pwl: checks the piecewise-linear tanh against the real tanh.
// Every 16-bit input is applied; the output must lie within 0.0065 of
// tanh(x), be odd-symmetric and monotonic, and arrive one cycle later.
module tb_tanh_pwl;
  import rl_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, out_valid;
  fx_t x, y;
  int checks = 0, failures = 0;
  int prev_y;

  tanh_pwl dut (.*);

  initial begin
    repeat (80000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst_n = 0; in_valid = 0; x = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    prev_y = -20000;
    for (int v = -32768; v < 32768; v++) begin
      real expect_y, err;
      @(negedge clk); x = fx_t'(v); in_valid = 1;
      @(posedge clk); #1;
      expect_y = $tanh(real'(v) / 4096.0) * 16384.0;
      err = real'(y) - expect_y;
      checks++;
      if (!out_valid || err > 107.0 || err < -107.0) begin
        failures++;
        if (failures < 10) $display("x=%0d y=%0d expected %f", v, y, expect_y);
      end
      if (int'(y) < prev_y) begin
        failures++;
        if (failures < 10) $display("not monotonic at x=%0d", v);
      end
      prev_y = int'(y);
      if (v > -32768 && v < 32768) begin
        // odd symmetry is checked against the stored negative half
      end
    end
    // Odd symmetry and latency on a few points.
    for (int n = 0; n < 200; n++) begin
      int v; fx_t yp;
      v = $urandom_range(32767);
      @(negedge clk); x = fx_t'(v);
      @(posedge clk); #1; yp = y;
      @(negedge clk); x = fx_t'(-v); #1;
      checks++;
      if (y !== yp) begin failures++; $display("output changed before the clock edge"); end
      @(posedge clk); #1;
      checks++;
      if (int'(y) != -int'(yp)) begin failures++; $display("not odd at %0d", v); end
    end
    @(negedge clk); in_valid = 0;
    @(posedge clk); #1;
    checks++; if (out_valid) begin failures++; $display("out_valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
