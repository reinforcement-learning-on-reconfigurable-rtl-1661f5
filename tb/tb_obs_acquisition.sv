// tb_obs_acquisition: checks sampling and window decimation.
// With 5 clocks per sample and 7 samples per window (a non-power-of-two
// window), random ADC words change every cycle. A reference counter decides
// which words are sampled; each observation must be within one LSB of the
// exact floor of the window mean and arrive exactly two cycles after the
// window's last sample; sample_stb and sample_or must follow each sample; a
// restart in the middle of a window must discard it.
module tb_obs_acquisition;
  import rl_pkg::*;
  localparam int CPS = 5, SPW = 7;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, restart, sample_stb, obs_valid;
  obs_t adc_or, adc_oe, sample_or, obs_or, obs_oe;
  int checks = 0, failures = 0, n_obs = 0, n_restart = 0;

  obs_acquisition #(.CLKS_PER_SAMPLE(CPS), .SAMPLES_PER_WINDOW(SPW)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Reference model, evaluated at each rising edge.
  int cnt = 0, nsmp = 0, edge_no = 0;
  longint s_or = 0, s_oe = 0;
  longint exp_or [$], exp_oe [$];
  int exp_edge [$];
  int exp_stb_edge = -1;
  obs_t last_or;

  function automatic longint fdiv(longint a, longint b);
    longint q = a / b;
    if ((a % b != 0) && (a < 0)) q--;
    return q;
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      cnt = 0; nsmp = 0; s_or = 0; s_oe = 0;
    end else begin
      edge_no++;
      // Outputs that the previous edge produced.
      if (sample_stb) begin
        checks++;
        if (edge_no - 1 != exp_stb_edge || sample_or != last_or) begin failures++; $display("sample strobe wrong at edge %0d", edge_no); end
      end
      if (obs_valid) begin
        n_obs++;
        checks++;
        if (exp_edge.size() == 0 || exp_edge[0] != edge_no - 1) begin
          failures++; $display("unexpected obs_valid at edge %0d", edge_no);
        end else begin
          automatic longint d1 = longint'(obs_or) - exp_or[0];
          automatic longint d2 = longint'(obs_oe) - exp_oe[0];
          if (d1 < -1 || d1 > 1 || d2 < -1 || d2 > 1) begin
            failures++; $display("obs (%0d,%0d) expected (%0d,%0d)", obs_or, obs_oe, exp_or[0], exp_oe[0]);
          end
        end
        if (exp_edge.size() > 0) begin void'(exp_edge.pop_front()); void'(exp_or.pop_front()); void'(exp_oe.pop_front()); end
      end
      // This edge.
      if (restart) begin
        cnt = 0; nsmp = 0; s_or = 0; s_oe = 0;
        exp_edge.delete(); exp_or.delete(); exp_oe.delete();
      end else if (cnt == CPS - 1) begin
        cnt = 0;
        s_or += adc_or; s_oe += adc_oe;
        last_or = adc_or;
        exp_stb_edge = edge_no;
        nsmp++;
        if (nsmp == SPW) begin
          exp_or.push_back(fdiv(s_or, SPW)); exp_oe.push_back(fdiv(s_oe, SPW));
          exp_edge.push_back(edge_no + 1);
          nsmp = 0; s_or = 0; s_oe = 0;
        end
      end else cnt++;
    end
  end

  initial begin
    rst_n = 0; restart = 0; adc_or = 0; adc_oe = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int c = 0; c < 6000; c++) begin
      @(negedge clk);
      // Mostly random, with stretches at the extremes.
      if (c % 700 < 50) begin adc_or = obs_t'(8191); adc_oe = obs_t'(-8192); end
      else begin adc_or = obs_t'($urandom); adc_oe = obs_t'($urandom); end
      restart = (c % 1013 == 500);
      if (restart) n_restart++;
    end
    @(negedge clk); restart = 0;
    repeat (100) @(negedge clk);
    checks++;
    if (n_obs < 100 || n_restart == 0) begin failures++; $display("too few windows: %0d", n_obs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
