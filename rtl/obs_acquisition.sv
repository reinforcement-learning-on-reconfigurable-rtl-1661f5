// obs_acquisition: photodiode sampling and window decimation.
//
// The two photodiode channels, optical reflection (OR) and optical emission
// (OE), arrive from the ADC as 14-bit two's-complement words on every cycle of
// the 100 MHz clock. A divider takes one sample every CLKS_PER_SAMPLE cycles
// (100 kS/s) and an accumulator sums SAMPLES_PER_WINDOW of them (a 10 ms
// window, one million cycles). At the end of a window the per-channel sums are
// turned into means and presented as the observation with a one-cycle
// obs_valid pulse, while the next window already accumulates: the policy
// computes on window t while window t+1 is acquired.
//
// The sampling rate, the window length and the 14-bit width follow the
// published controller. Using the mean as the decimation filter, and computing
// it as floor(sum * round(2^30 / SAMPLES_PER_WINDOW) / 2^30) (at most one LSB
// from the exact mean), are this design's choices.
//
// Interface: `restart` (one cycle) starts a new window and a new sample period
// at once; the first sample of the new window is taken CLKS_PER_SAMPLE cycles
// later. sample_stb pulses with every 100 kS/s sample, sample_or holds it.
// obs_valid pulses in the cycle after the last sample of a window.
module obs_acquisition
  import rl_pkg::*;
#(
  parameter int unsigned CLKS_PER_SAMPLE    = CLKS_PER_SAMPLE_DEF,
  parameter int unsigned SAMPLES_PER_WINDOW = SAMPLES_PER_WINDOW_DEF
) (
  input  logic clk,
  input  logic rst_n,
  input  obs_t adc_or,
  input  obs_t adc_oe,
  input  logic restart,
  output logic sample_stb,
  output obs_t sample_or,
  output logic obs_valid,
  output obs_t obs_or,
  output obs_t obs_oe
);
  localparam int unsigned CW  = $clog2(CLKS_PER_SAMPLE + 1);
  localparam int unsigned SW  = $clog2(SAMPLES_PER_WINDOW + 1);
  localparam int unsigned SUM_W = ADC_W + SW;
  localparam int unsigned RSH = 30;
  localparam longint unsigned NS = longint'(SAMPLES_PER_WINDOW);
  localparam longint unsigned RECIP = ((longint'(1) << RSH) + NS / 2) / NS;
  localparam int unsigned PROD_W = SUM_W + 32;

  logic [CW-1:0] clk_cnt;
  logic [SW-1:0] smp_cnt;
  logic signed [SUM_W-1:0] sum_or, sum_oe;
  logic signed [SUM_W-1:0] fin_or, fin_oe;
  logic fin_valid;

  wire take = (clk_cnt == CW'(CLKS_PER_SAMPLE - 1));
  wire last = take && (smp_cnt == SW'(SAMPLES_PER_WINDOW - 1));

  always_ff @(posedge clk) begin
    if (!rst_n || restart) begin
      clk_cnt   <= '0;
      smp_cnt   <= '0;
      sum_or    <= '0;
      sum_oe    <= '0;
      fin_valid <= 1'b0;
      sample_stb <= 1'b0;
      if (!rst_n) sample_or <= '0;
    end else begin
      sample_stb <= take;
      fin_valid  <= last;
      clk_cnt    <= take ? '0 : clk_cnt + 1'b1;
      if (take) begin
        sample_or <= adc_or;
        if (last) begin
          smp_cnt <= '0;
          sum_or  <= '0;
          sum_oe  <= '0;
          fin_or  <= sum_or + SUM_W'(adc_or);
          fin_oe  <= sum_oe + SUM_W'(adc_oe);
        end else begin
          smp_cnt <= smp_cnt + 1'b1;
          sum_or  <= sum_or + SUM_W'(adc_or);
          sum_oe  <= sum_oe + SUM_W'(adc_oe);
        end
      end
    end
  end

  // Mean by reciprocal multiplication (arithmetic shift: floor).
  logic signed [PROD_W-1:0] p_or, p_oe;
  always_comb begin
    p_or = PROD_W'(fin_or) * $signed({1'b0, 31'(RECIP)});
    p_oe = PROD_W'(fin_oe) * $signed({1'b0, 31'(RECIP)});
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      obs_valid <= 1'b0;
      obs_or    <= '0;
      obs_oe    <= '0;
    end else begin
      obs_valid <= fin_valid && !restart;
      if (fin_valid) begin
        obs_or <= obs_t'(p_or >>> RSH);
        obs_oe <= obs_t'(p_oe >>> RSH);
      end
    end
  end
endmodule
