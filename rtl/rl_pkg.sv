// rl_pkg: types, sizes and helper functions shared by the laser-welding policy
// controller.
//
// The network sizes (2 inputs, hidden layers of 32 and 64, 2 outputs), the
// 8-bit weights, the 14-bit converters, the 80-step episode and the
// 1000 x 1000 cycle acquisition window are the published figures of the
// controller. The lane count, the fixed-point formats, the trajectory record
// and the weight memory layout are this implementation's own choices.
package rl_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_IN   = 2;    // OR and OE photodiodes
  localparam int unsigned N_H1   = 32;   // first hidden layer
  localparam int unsigned N_H2   = 64;   // second hidden layer
  localparam int unsigned N_OUT  = 2;    // mean and standard deviation
  localparam int unsigned WB     = 8;    // weight and bias width
  localparam int unsigned ADC_W  = 14;   // AD9648 sample width
  localparam int unsigned DAC_W  = 14;   // AD9717 code width
  localparam int unsigned N_STEPS_DEF = 80;
  localparam int unsigned CLKS_PER_SAMPLE_DEF    = 1000; // 100 MHz / 100 kS/s
  localparam int unsigned SAMPLES_PER_WINDOW_DEF = 1000; // decimation factor
  localparam int unsigned LANES_DEF = 16;  // parallel MAC lanes (own choice)

  // Growing activation widths: each layer adds the weight width and the
  // growth of a sum of N_in+1 terms (products plus bias). No requantisation.
  function automatic int unsigned grow(int unsigned in_w, int unsigned n_in);
    return in_w + WB + $clog2(n_in + 1);
  endfunction
  localparam int unsigned A0_W = ADC_W;             // 14
  localparam int unsigned A1_W = grow(A0_W, N_IN);  // 24
  localparam int unsigned A2_W = grow(A1_W, N_H1);  // 38
  localparam int unsigned A3_W = grow(A2_W, N_H2);  // 53

  // Fixed point for the action after the float stages: 16-bit signed, 12
  // fraction bits.
  localparam int unsigned FX_W    = 16;
  localparam int unsigned FX_FRAC = 12;
  // tanh output: 16-bit signed, 14 fraction bits, range [-1, 1].
  localparam int unsigned TH_FRAC = 14;

  typedef logic signed [A0_W-1:0] obs_t;
  typedef logic signed [A3_W-1:0] acc_t;
  typedef logic signed [FX_W-1:0] fx_t;

  // Action selection per episode.
  typedef enum logic [1:0] {
    MODE_POLICY = 2'd0,  // a = mu + sigma * eps   (training episodes)
    MODE_MEAN   = 2'd1,  // a = mu                 (test episodes)
    MODE_RANDOM = 2'd2   // uniform random power   (exploration episodes)
  } act_mode_e;

  // One record of the trajectory FIFO, one per step.
  typedef struct packed {
    logic               last;      // final step of the episode
    logic signed [15:0] obs_or;    // OR observation, sign-extended
    logic signed [15:0] obs_oe;    // OE observation, sign-extended
    logic signed [15:0] a_pre;     // action before tanh, Q4.12
    logic        [15:0] dac_code;  // code applied to the laser
  } traj_t;

  // ------------------------------------------------ weight memory layout
  // The memory holds words of LANES bytes; lane k of a word belongs to
  // output neuron g*LANES+k of the layer. Per layer: groups*n_in weight
  // words (word g*n_in+i holds input i), then, after all layers, one bias
  // word per group of each layer.
  function automatic int unsigned n_groups(int unsigned n_out, int unsigned lanes);
    return (n_out + lanes - 1) / lanes;
  endfunction
  function automatic int unsigned layer_in(int unsigned l);
    return (l == 0) ? N_IN : (l == 1) ? N_H1 : N_H2;
  endfunction
  function automatic int unsigned layer_out(int unsigned l);
    return (l == 0) ? N_H1 : (l == 1) ? N_H2 : N_OUT;
  endfunction
  function automatic int unsigned w_base(int unsigned l, int unsigned lanes);
    int unsigned b = 0;
    for (int unsigned k = 0; k < l; k++) b += n_groups(layer_out(k), lanes) * layer_in(k);
    return b;
  endfunction
  function automatic int unsigned b_base(int unsigned l, int unsigned lanes);
    int unsigned b = w_base(3, lanes);
    for (int unsigned k = 0; k < l; k++) b += n_groups(layer_out(k), lanes);
    return b;
  endfunction
  function automatic int unsigned wmem_depth(int unsigned lanes);
    return b_base(3, lanes);
  endfunction
  // Cycles from start to done of the MLP engine (see policy_mlp).
  function automatic int unsigned mlp_latency(int unsigned lanes);
    int unsigned c = 1;
    for (int unsigned l = 0; l < 3; l++) c += n_groups(layer_out(l), lanes) * (layer_in(l) + 3);
    return c;
  endfunction

endpackage
