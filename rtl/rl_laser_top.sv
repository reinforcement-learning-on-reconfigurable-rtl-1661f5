// rl_laser_top: real-time reinforcement-learning laser power controller.
//
// A welding laser is steered along a line while two photodiodes watch the
// process zone: optical reflection (OR) and optical emission (OE). Every
// 10 ms this controller turns the last window of photodiode samples into an
// observation, runs the learned policy network on it and sets the laser
// power for the next window, all in a few hundred clock cycles. Learning
// itself happens off chip: after each episode the processor reads the
// recorded (observation, action) pairs, a server trains the policy, and the
// processor loads the new weights and the next episode's noise samples.
//
// Data path (one 100 MHz clock):
//   ADC -> obs_acquisition (100 kS/s, 1000-sample window means)
//       -> policy_mlp (2-32-64-2 integer MLP, weights in weight_bram)
//       -> action_head (scale, a = mu + sigma*eps, tanh, DAC code;
//                       eps from eps_buffer)
//       -> episode_ctrl (applies the code to the DAC) and traj_fifo
// Control: host_regs (processor port), episode_ctrl (trigger on OR,
// N_STEPS steps, done interrupt).
//
// Ports: adc_or/adc_oe are the two ADC channels (14-bit two's complement,
// one word per clock). dac_code is the laser power (0 = 25 W ... 16383 =
// 100 W). The host_* port is described in host_regs; m_* is the trajectory
// stream to the processor's DMA (64-bit records {OR, OE, a_pre, code},
// m_last on the last step); irq_done pulses at the end of an episode.
// From the window's end (obs_valid) to the new DAC code takes
// rl_pkg::mlp_latency(LANES) + 9 = 227 cycles at the default parameters.
module rl_laser_top
  import rl_pkg::*;
  import fp32_pkg::*;
#(
  parameter int unsigned CLKS_PER_SAMPLE    = CLKS_PER_SAMPLE_DEF,
  parameter int unsigned SAMPLES_PER_WINDOW = SAMPLES_PER_WINDOW_DEF,
  parameter int unsigned N_STEPS            = N_STEPS_DEF,
  parameter int unsigned LANES              = LANES_DEF,
  parameter int unsigned FIFO_DEPTH         = 128
) (
  input  logic               clk,
  input  logic               rst_n,
  // ADC
  input  obs_t               adc_or,
  input  obs_t               adc_oe,
  // DAC
  output logic [DAC_W-1:0]   dac_code,
  // processor register port
  input  logic               host_wr_en,
  input  logic [11:0]        host_wr_addr,
  input  logic [31:0]        host_wr_data,
  input  logic               host_rd_en,
  input  logic [11:0]        host_rd_addr,
  output logic [31:0]        host_rd_data,
  // trajectory stream to DMA
  output logic               m_valid,
  input  logic               m_ready,
  output logic [63:0]        m_data,
  output logic               m_last,
  output logic               irq_done
);
  localparam int unsigned WAW = $clog2(wmem_depth(LANES));
  localparam int unsigned EAW = $clog2(N_STEPS);
  localparam int unsigned FAW = $clog2(FIFO_DEPTH);

  // host registers
  logic               arm;
  act_mode_e          mode;
  obs_t               or_threshold;
  f32_t               mu_scale, sg_scale;
  logic [31:0]        status;
  logic               w_we;
  logic [WAW-1:0]     w_addr;
  logic [LANES-1:0]   w_be;
  logic [LANES*8-1:0] w_data;
  logic               e_we;
  logic [EAW-1:0]     e_addr;
  f32_t               e_data;

  // data path
  logic sample_stb, obs_valid, win_restart, infer_start, mlp_busy, mlp_done;
  obs_t sample_or, obs_or, obs_oe;
  acc_t acc_mu, acc_sigma;
  f32_t eps;
  fx_t  a_pre;
  logic act_valid, apply, last_step, active, waiting;
  logic [DAC_W-1:0] act_code;
  logic [EAW-1:0]   step;
  logic [FAW:0]     fifo_count;
  logic             fifo_full;

  host_regs #(.LANES(LANES), .N_STEPS(N_STEPS)) u_host (
    .clk, .rst_n,
    .wr_en(host_wr_en), .wr_addr(host_wr_addr), .wr_data(host_wr_data),
    .rd_en(host_rd_en), .rd_addr(host_rd_addr), .rd_data(host_rd_data),
    .arm, .mode, .or_threshold, .mu_scale, .sg_scale, .status,
    .w_we, .w_addr, .w_be, .w_data, .e_we, .e_addr, .e_data
  );

  assign status = {16'(fifo_count), 8'(step), 5'd0, fifo_full, waiting, active};

  obs_acquisition #(
    .CLKS_PER_SAMPLE(CLKS_PER_SAMPLE), .SAMPLES_PER_WINDOW(SAMPLES_PER_WINDOW)
  ) u_acq (
    .clk, .rst_n, .adc_or, .adc_oe, .restart(win_restart),
    .sample_stb, .sample_or, .obs_valid, .obs_or, .obs_oe
  );

  episode_ctrl #(.N_STEPS(N_STEPS)) u_ctrl (
    .clk, .rst_n, .arm, .sample_stb, .sample_or, .or_threshold,
    .obs_valid, .act_valid, .act_code,
    .win_restart, .infer_start, .apply, .step, .last_step, .active, .waiting,
    .episode_done(irq_done), .dac_code
  );

  policy_mlp #(.LANES(LANES)) u_mlp (
    .clk, .rst_n, .start(infer_start), .obs_or, .obs_oe,
    .busy(mlp_busy), .done(mlp_done), .out_mu(acc_mu), .out_sigma(acc_sigma),
    .w_we, .w_addr, .w_be, .w_data
  );

  eps_buffer #(.DEPTH(N_STEPS), .W(32)) u_eps (
    .clk, .we(e_we), .waddr(e_addr), .wdata(e_data), .raddr(step), .rdata(eps)
  );

  action_head u_head (
    .clk, .rst_n, .in_valid(mlp_done), .acc_mu, .acc_sigma, .mode,
    .mu_scale, .sg_scale, .eps, .out_valid(act_valid), .a_pre, .dac_code(act_code)
  );

  // The record of step t: the observation the policy saw and the action
  // that was applied (registered in episode_ctrl in the same cycle).
  traj_t rec;
  fx_t   a_pre_q;
  always_ff @(posedge clk) if (act_valid) a_pre_q <= a_pre;
  always_comb begin
    rec.last     = last_step;
    rec.obs_or   = 16'(signed'(obs_or));
    rec.obs_oe   = 16'(signed'(obs_oe));
    rec.a_pre    = a_pre_q;
    rec.dac_code = 16'(dac_code);
  end

  traj_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .wr_en(apply), .wr_data(rec), .full(fifo_full), .count(fifo_count),
    .m_valid, .m_ready, .m_data, .m_last
  );

  // Weights may only change between episodes.
  assert property (@(posedge clk) disable iff (!rst_n) mlp_busy |-> !w_we)
    else $error("rl_laser_top: weight write during inference");
endmodule
