// tb_action_head: checks conversion, scaling, reparameterisation, squashing
// and the DAC mapping of the action head.
// For random accumulators, scale factors and eps the pre-squash action must
// equal a reference built from real arithmetic, rounded to single precision
// after every operation as the hardware does, then to Q4.12. The DAC code
// must lie within the tanh approximation error (60 codes) of
// (tanh(a)+1)/2*16383 computed in real arithmetic. The outputs must arrive
// exactly 7 cycles after in_valid. Mean-only mode must ignore eps; random
// mode must give a_pre = 0 and codes spread over the whole range.
module tb_action_head;
  import rl_pkg::*;
  import fp32_pkg::*;
  `include "fp32_ref.svh"
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, out_valid;
  acc_t acc_mu, acc_sigma;
  act_mode_e mode;
  f32_t mu_scale, sg_scale, eps;
  fx_t a_pre;
  logic [DAC_W-1:0] dac_code;
  int checks = 0, failures = 0;
  int n_sat = 0, n_tail = 0;

  action_head dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Q4.12, rounded half away from zero, saturated
  function automatic longint to_fx(real x);
    longint v;
    x = x * 4096.0;
    if (x > 40000.0) return 32767;
    if (x < -40000.0) return -32768;
    if (x >= 0) v = longint'($floor(x + 0.5)); else v = -longint'($floor(-x + 0.5));
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  task automatic one(act_mode_e m, longint amu, longint asg, real ms, real ss, real e);
    logic [31:0] fmu, fsg, fe, fms, fss, fa;
    longint pre;
    real y, code_r, d;
    int lat;
    fms = r2f(ms); fss = r2f(ss); fe = r2f(e);
    fmu = r2f(real'(amu) * f2r(fms));
    fsg = r2f(real'(asg) * f2r(fss));
    if (fsg[31]) fsg = '0;
    if (m == MODE_POLICY) fa = r2f(f2r(fmu) + f2r(r2f(f2r(fsg) * f2r(fe))));
    else if (m == MODE_MEAN) fa = fmu;
    else fa = '0;
    pre = to_fx(f2r(fa));
    if (pre == 32767 || pre == -32768) n_sat++;
    if (pre >= 4*4096 || pre <= -4*4096) n_tail++;
    @(negedge clk);
    in_valid = 1; mode = m; acc_mu = acc_t'(amu); acc_sigma = acc_t'(asg);
    mu_scale = fms; sg_scale = fss; eps = fe;
    @(negedge clk);
    in_valid = 0; acc_mu = '0; acc_sigma = '0; eps = '0;
    lat = 1;
    while (!out_valid && lat < 20) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 7) begin failures++; $display("latency %0d", lat); end
    checks++;
    if (longint'(a_pre) != pre) begin failures++; $display("a_pre %0d expected %0d (mode %0d)", a_pre, pre, m); end
    if (m != MODE_RANDOM) begin
      y = $tanh(real'(pre) / 4096.0);
      code_r = (y + 1.0) / 2.0 * 16383.0;
      d = real'(dac_code) - code_r;
      checks++;
      if (d > 60.0 || d < -60.0) begin failures++; $display("code %0d expected %f (a=%0d)", dac_code, code_r, pre); end
    end
  endtask

  initial begin
    int hist [4];
    rst_n = 0; in_valid = 0; mode = MODE_POLICY; acc_mu = '0; acc_sigma = '0;
    mu_scale = F32_ONE; sg_scale = F32_ONE; eps = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // Policy mode, moderate values.
    for (int n = 0; n < 300; n++) begin
      automatic longint amu = longint'($urandom_range(2000000)) - 1000000;
      automatic longint asg = longint'($urandom_range(2000000)) - 500000;
      one(MODE_POLICY, amu, asg, (real'($urandom_range(4000)) - 2000.0) / real'(1 << (20 + $urandom_range(6))),
          real'($urandom_range(2000)) / real'(1 << (20 + $urandom_range(6))),
          (real'($urandom_range(24000)) - 12000.0) / 4096.0);
    end
    // Huge accumulators: saturation.
    for (int n = 0; n < 50; n++) begin
      automatic longint amu = (longint'($urandom) << 8) - (longint'(1) << 39);
      one(MODE_POLICY, amu, longint'($urandom), 32767.0, 1.0, (real'($urandom_range(65535)) - 32768.0) / 4096.0);
    end
    // Mean mode: eps must not matter.
    for (int n = 0; n < 100; n++)
      one(MODE_MEAN, longint'($urandom_range(2000000)) - 1000000, 999999,
          (real'($urandom_range(4000)) - 2000.0) / real'(1 << 22), 1000.0 / 1024.0,
          real'($urandom_range(30000)) / 4096.0);
    // Random mode.
    hist = '{0, 0, 0, 0};
    for (int n = 0; n < 200; n++) begin
      one(MODE_RANDOM, 0, 0, 1.0, 1.0, 0.0);
      hist[dac_code[13:12]]++;
    end
    for (int q = 0; q < 4; q++) begin
      checks++;
      if (hist[q] < 25) begin failures++; $display("random codes not spread: quarter %0d has %0d", q, hist[q]); end
    end
    checks++;
    if (n_sat == 0 || n_tail == 0) begin failures++; $display("saturation not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
