// action_head: from output-layer integers to a laser power code.
//
// The MLP delivers two wide integers. They are converted to single-precision
// floating point and multiplied by scale factors (float32) exported by the
// training side's quantisation-aware model. The first is the action mean mu,
// the second the standard deviation sigma (clamped at zero). The action
// before squashing is, in floating point,
//   MODE_POLICY : a = mu + sigma * eps  (eps from eps_buffer, float32)
//   MODE_MEAN   : a = mu                (test episodes)
// and is then rounded to 16-bit fixed point with 12 fraction bits (Q4.12),
// squashed into [-1, 1] by tanh_pwl and mapped linearly onto the DAC:
//   code = ((y + 1) / 2) * (2^14 - 1),   y = tanh(a),
// so that code 0 is the lowest (25 W) and 16383 the highest (100 W) power.
//   MODE_RANDOM : code is 14 bits of a 32-bit xorshift generator (a uniform
//                 random power), a_pre reads 0. The generator advances once
//                 per action in this mode.
//
// Timing: seven register stages (convert, scale, sigma*eps, add, to fixed
// point, tanh, map); out_valid and the outputs follow in_valid by exactly 7
// cycles. acc_mu, acc_sigma, eps and mode are sampled in the in_valid cycle.
//
// Published: conversion of the outputs to floating point, scaling by a factor
// from the training model, the reparameterisation a = mu + sigma*eps with eps
// supplied from outside, mean-only test episodes, random exploration
// episodes, tanh squashing, and the power range spanning the full control
// voltage. This design's own: sigma taken directly from the second output,
// fixed point for the squashing, the on-chip random generator and the code
// mapping.
module action_head
  import rl_pkg::*;
  import fp32_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  acc_t        acc_mu,
  input  acc_t        acc_sigma,
  input  act_mode_e   mode,
  input  f32_t        mu_scale,
  input  f32_t        sg_scale,
  input  f32_t        eps,
  output logic        out_valid,
  output fx_t         a_pre,
  output logic [DAC_W-1:0] dac_code
);
  localparam int unsigned NS = 5;   // stages before tanh

  // Valid and mode travel along the float stages.
  logic      v   [NS];
  act_mode_e md  [NS];
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NS; i++) begin
        v[i]  <= 1'b0;
        md[i] <= MODE_POLICY;
      end
    end else begin
      v[0]  <= in_valid;
      md[0] <= mode;
      for (int i = 1; i < NS; i++) begin
        v[i]  <= v[i-1];
        md[i] <= md[i-1];
      end
    end
  end

  // Stage 1: integers to float; random generator.
  f32_t mu1, sg1, eps1;
  logic [31:0] rng;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mu1  <= '0;
      sg1  <= '0;
      eps1 <= '0;
      rng  <= 32'h2545_F491;
    end else if (in_valid) begin
      mu1  <= i2f(64'(acc_mu));
      sg1  <= i2f(64'(acc_sigma));
      eps1 <= eps;
      if (mode == MODE_RANDOM) begin
        automatic logic [31:0] r = rng;
        r = r ^ (r << 13);
        r = r ^ (r >> 17);
        r = r ^ (r << 5);
        rng <= r;
      end
    end
  end

  // Stage 2: scale; sigma clamped at zero.
  f32_t mu2, sg2, eps2, sgs;
  always_comb sgs = fmul(sg1, sg_scale);
  always_ff @(posedge clk) begin
    mu2  <= fmul(mu1, mu_scale);
    sg2  <= sgs[31] ? '0 : sgs;
    eps2 <= eps1;
  end

  // Stage 3: sigma * eps.
  f32_t mu3, se3;
  always_ff @(posedge clk) begin
    mu3 <= mu2;
    se3 <= fmul(sg2, eps2);
  end

  // Stage 4: a = mu + sigma * eps, or a = mu.
  f32_t a4;
  always_ff @(posedge clk) begin
    unique case (md[2])
      MODE_POLICY: a4 <= fadd(mu3, se3);
      MODE_MEAN:   a4 <= mu3;
      default:     a4 <= '0;
    endcase
  end

  // Stage 5: to Q4.12.
  fx_t pre5;
  always_ff @(posedge clk) pre5 <= f2fix(a4, FX_FRAC);

  // Stage 6: tanh (one register inside tanh_pwl).
  logic      v6;
  fx_t       y6, pre6;
  act_mode_e mode6;
  tanh_pwl u_tanh (.clk, .rst_n, .in_valid(v[NS-1]), .x(pre5), .out_valid(v6), .y(y6));
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pre6  <= '0;
      mode6 <= MODE_POLICY;
    end else begin
      pre6  <= pre5;
      mode6 <= md[NS-1];
    end
  end

  // Stage 7: map [-1, 1] to the DAC code.
  logic [31:0] lin;
  always_comb lin = 32'(17'(signed'(y6) + 17'sd16384)) * 32'((1 << DAC_W) - 1);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      a_pre     <= '0;
      dac_code  <= '0;
    end else begin
      out_valid <= v6;
      a_pre     <= pre6;
      dac_code  <= (mode6 == MODE_RANDOM) ? rng[DAC_W-1:0] : DAC_W'(lin >> (TH_FRAC + 1));
    end
  end
endmodule
