// tb_rl_laser_top_full: end-to-end test of rl_laser_top with every parameter at its default: 100 kS/s sampling, one-million-cycle (10 ms) windows, 80 steps, so one episode is about 81 million cycles. One episode in policy mode.
// Stimulus, reference model and checks are in tb_top_body.svh.
module tb_rl_laser_top_full;
  import rl_pkg::*;
  localparam int CPS = CLKS_PER_SAMPLE_DEF, SPW = SAMPLES_PER_WINDOW_DEF, NST = N_STEPS_DEF, LANES = LANES_DEF;
  localparam int N_EPISODES = 1;
  logic clk = 0, rst_n;
  obs_t adc_or, adc_oe;
  logic [DAC_W-1:0] dac_code;
  logic host_wr_en = 0, host_rd_en = 0;
  logic [11:0] host_wr_addr = 0, host_rd_addr = 0;
  logic [31:0] host_wr_data = 0, host_rd_data;
  logic m_valid, m_ready = 0, m_last, irq_done;
  logic [63:0] m_data;

  rl_laser_top dut (.*);

`include "tb_top_body.svh"

  initial begin
    rst_n = 0;
    repeat (4) @(posedge clk);
    @(negedge clk); rst_n = 1;
    load_weights(20);
    set_scales(1.0 / 33554432.0, -1.0 / 33554432.0);
    run_episode(MODE_POLICY, 100);
    check(n_mode[MODE_POLICY] == 1, "policy episode");
    check(n_trigger == N_EPISODES, $sformatf("triggers %0d", n_trigger));
    check(n_below > 0, "waiting below threshold never happened");
    check(n_irq == N_EPISODES && n_tail == N_EPISODES, $sformatf("irq %0d tail %0d", n_irq, n_tail));
    check(n_overlap == N_EPISODES * NST, $sformatf("overlapped windows %0d", n_overlap));
    check(n_latency == N_EPISODES * NST, "latency checks");
    $display("mechanisms: triggers=%0d waits=%0d tails=%0d irqs=%0d overlapped_windows=%0d stalls=%0d saturated_actions=%0d reloads=%0d modes(policy,mean,random)=(%0d,%0d,%0d)",
             n_trigger, n_below, n_tail, n_irq, n_overlap, n_stall, n_pre_sat, n_reload,
             n_mode[0], n_mode[1], n_mode[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
