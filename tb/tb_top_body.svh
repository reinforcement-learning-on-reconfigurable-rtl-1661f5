// Body of the end-to-end testbenches of rl_laser_top, included by
// tb_rl_laser_top (short windows, four episodes) and tb_rl_laser_top_full
// (default parameters, one episode). The including module declares CPS, SPW,
// NST, LANES, N_EPISODES, the DUT and its port signals.
//
// A toy plant closes the loop: once the TB switches the laser on, the OR
// photodiode reads 600 + code/16 and OE 200 + code/32 (in ADC codes, code
// being the DAC output), plus uniform noise; with the laser off both read
// nearly zero. A reference model mirrors the 100 kS/s sampling and the window
// means, a 64-bit integer forward pass of the network, the action head's
// single-precision arithmetic rebuilt from real arithmetic, and tanh in real
// arithmetic. Every trajectory record coming out of
// the stream is checked against it, and so are the DAC code and the cycle at
// which it changes (the processing latency, which must be at most 354
// cycles). Each mechanism of the design is counted and must occur.

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("%0t: %s", $time, what); end
  endtask

  always #5 clk = ~clk;

`include "fp32_ref.svh"

  // ------------------------------------------------------------ network
  int w1 [N_H1][N_IN], b1 [N_H1];
  int w2 [N_H2][N_H1], b2 [N_H2];
  int w3 [N_OUT][N_H2], b3 [N_OUT];
  logic [31:0] eps_v [NST];
  logic [31:0] mu_f, sg_f;
  act_mode_e cur_mode;

  function automatic int rnd(int mag);
    return int'($urandom_range(2 * mag)) - mag;
  endfunction

  task automatic host_wr(int a, logic [31:0] d);
    @(negedge clk); host_wr_en = 1; host_wr_addr = 12'(a); host_wr_data = d;
    @(negedge clk); host_wr_en = 0;
  endtask

  localparam int DEPTH = wmem_depth(LANES);
  logic [7:0] img [DEPTH][LANES];
  int n_reload = 0;

  task automatic load_weights(int mag);
    for (int a = 0; a < DEPTH; a++) for (int k = 0; k < LANES; k++) img[a][k] = 8'd0;
    for (int j = 0; j < N_H1; j++) begin
      b1[j] = rnd(mag); img[b_base(0, LANES) + j / LANES][j % LANES] = 8'(b1[j]);
      for (int i = 0; i < N_IN; i++) begin w1[j][i] = rnd(mag); img[w_base(0, LANES) + (j / LANES) * N_IN + i][j % LANES] = 8'(w1[j][i]); end
    end
    for (int j = 0; j < N_H2; j++) begin
      b2[j] = rnd(mag); img[b_base(1, LANES) + j / LANES][j % LANES] = 8'(b2[j]);
      for (int i = 0; i < N_H1; i++) begin w2[j][i] = rnd(mag); img[w_base(1, LANES) + (j / LANES) * N_H1 + i][j % LANES] = 8'(w2[j][i]); end
    end
    for (int j = 0; j < N_OUT; j++) begin
      b3[j] = rnd(mag); img[b_base(2, LANES) + j / LANES][j % LANES] = 8'(b3[j]);
      for (int i = 0; i < N_H2; i++) begin w3[j][i] = rnd(mag); img[w_base(2, LANES) + (j / LANES) * N_H2 + i][j % LANES] = 8'(w3[j][i]); end
    end
    for (int a = 0; a < DEPTH; a++)
      for (int q = 0; q < LANES / 4; q++)
        host_wr(12'h400 + a * (LANES / 4) + q, {img[a][4*q+3], img[a][4*q+2], img[a][4*q+1], img[a][4*q]});
    for (int t = 0; t < NST; t++) begin
      eps_v[t] = r2f(real'(rnd(8192)) / 4096.0);
      host_wr(12'h800 + t, eps_v[t]);
    end
    n_reload++;
  endtask

  task automatic set_scales(real mu_scale, real sg_scale);
    mu_f = r2f(mu_scale); sg_f = r2f(sg_scale);
    host_wr(2, mu_f); host_wr(3, sg_f);
  endtask

  // Q4.12, rounded half away from zero, saturated
  function automatic longint to_fx(real x);
    longint v;
    x = x * 4096.0;
    if (x > 40000.0) return 32767;
    if (x < -40000.0) return -32768;
    if (x >= 0) v = longint'($floor(x + 0.5)); else v = -longint'($floor(-x + 0.5));
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
  endfunction

  // Expected pre-squash action for an observation at step t: integer forward
  // pass, then single-precision scaling and reparameterisation.
  function automatic longint ref_pre(longint xo, longint xe, int t);
    longint h1 [N_H1], h2 [N_H2], o [N_OUT];
    logic [31:0] fmu, fsg, fa;
    for (int j = 0; j < N_H1; j++) begin
      h1[j] = b1[j] + longint'(w1[j][0]) * xo + longint'(w1[j][1]) * xe;
      if (h1[j] < 0) h1[j] = 0;
    end
    for (int j = 0; j < N_H2; j++) begin
      h2[j] = b2[j];
      for (int i = 0; i < N_H1; i++) h2[j] += longint'(w2[j][i]) * h1[i];
      if (h2[j] < 0) h2[j] = 0;
    end
    for (int j = 0; j < N_OUT; j++) begin
      o[j] = b3[j];
      for (int i = 0; i < N_H2; i++) o[j] += longint'(w3[j][i]) * h2[i];
    end
    fmu = r2f(f2r(r2f(real'(o[0]))) * f2r(mu_f));
    fsg = r2f(f2r(r2f(real'(o[1]))) * f2r(sg_f));
    if (fsg[31]) fsg = '0;
    if (cur_mode == MODE_POLICY) fa = r2f(f2r(fmu) + f2r(r2f(f2r(fsg) * f2r(eps_v[t]))));
    else fa = fmu;
    return to_fx(f2r(fa));
  endfunction

  // -------------------------------------------------------------- plant
  bit laser_on = 0;
  always @(negedge clk) begin
    if (laser_on) begin
      adc_or <= obs_t'(600 + int'(dac_code) / 16 + rnd(64));
      adc_oe <= obs_t'(200 + int'(dac_code) / 32 + rnd(32));
    end else begin
      adc_or <= obs_t'($urandom_range(7));
      adc_oe <= obs_t'($urandom_range(3));
    end
  end

  // ------------------------------------------- acquisition mirror model
  longint cyc = 0;
  int cnt = 0, nsmp = 0;
  longint s_or = 0, s_oe = 0;
  int win_idx = -1;                   // window index within the episode
  longint exp_or [NST], exp_oe [NST];
  longint win_end [NST + 1];
  longint thr = 33;
  bit was_waiting = 0;
  int n_below = 0, n_trigger = 0, n_overlap = 0, n_stall = 0, n_irq = 0, n_tail = 0;
  int n_pre_sat = 0, n_latency = 0;
  int n_mode [3] = '{0, 0, 0};

  function automatic longint fdiv(longint a, longint b);
    longint q = a / b;
    if ((a % b != 0) && (a < 0)) q--;
    return q;
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      cnt = 0; nsmp = 0; s_or = 0; s_oe = 0; cyc = 0;
    end else begin
      cyc++;
      if (dut.apply && apply_idx < NST) begin
        first_seen[apply_idx] = cyc - 1;
        apply_idx++;
        check(dac_code == DAC_W'(dut.rec.dac_code), "DAC port differs from the recorded code");
      end
      if (irq_done) n_irq++;
      if (m_valid && !m_ready) n_stall++;
      // The window is aligned to the trigger: the design restarts it there.
      if (dut.win_restart) begin
        cnt = 0; nsmp = 0; s_or = 0; s_oe = 0; win_idx = 0;
        n_trigger++;
        check(dut.sample_or >= obs_t'(thr), "trigger below threshold");
      end else if (cnt == CPS - 1) begin
        cnt = 0;
        s_or += adc_or; s_oe += adc_oe;
        nsmp++;
        if (nsmp == SPW) begin
          if (win_idx >= 0 && win_idx < NST) begin
            exp_or[win_idx] = fdiv(s_or, SPW); exp_oe[win_idx] = fdiv(s_oe, SPW);
          end
          if (win_idx >= 0 && win_idx <= NST) win_end[win_idx] = cyc + 1;  // obs_valid after this
          if (win_idx == NST) n_tail++;
          if (win_idx >= 0) win_idx++;
          nsmp = 0; s_or = 0; s_oe = 0;
        end
      end else cnt++;
    end
  end

  // ---------------------------------------------------- record checking
  // Cycle at which each action was applied (DAC register and FIFO write);
  // recorded in the mirror's always block, after its cycle count.
  int apply_idx = 0;
  longint first_seen [NST];

  // Drain and check one episode's records; ready_pct sets back-pressure.
  task automatic check_episode(int ready_pct);
    logic [63:0] d;
    logic last;
    for (int t = 0; t < NST; t++) begin
      longint ro, re, pre, lat;
      int code;
      real y, code_r;
      do begin
        @(negedge clk); m_ready = (int'($urandom_range(99)) < ready_pct);
        #1;
      end while (!(m_valid && m_ready));
      d = m_data; last = m_last;
      ro = longint'(signed'(d[63:48])); re = longint'(signed'(d[47:32]));
      pre = longint'(signed'(d[31:16])); code = int'(d[15:0]);
      check(ro - exp_or[t] <= 1 && exp_or[t] - ro <= 1 && re - exp_oe[t] <= 1 && exp_oe[t] - re <= 1,
            $sformatf("step %0d: obs (%0d,%0d) expected (%0d,%0d)", t, ro, re, exp_or[t], exp_oe[t]));
      check(last == (t == NST - 1), $sformatf("step %0d: last flag %0d", t, last));
      if (cur_mode == MODE_RANDOM) begin
        check(pre == 0, "random mode: a_pre not zero");
      end else begin
        longint e = ref_pre(ro, re, t);
        check(pre == e, $sformatf("step %0d: a_pre %0d expected %0d", t, pre, e));
        if (pre >= 4 * 4096 || pre <= -4 * 4096) n_pre_sat++;
        y = $tanh(real'(pre) / 4096.0);
        code_r = (y + 1.0) / 2.0 * 16383.0;
        check(real'(code) - code_r < 60.0 && code_r - real'(code) < 60.0,
              $sformatf("step %0d: code %0d expected %f", t, code, code_r));
      end
      // Latency from the end of window t to the record (= the DAC update).
      lat = first_seen[t] - win_end[t];
      check(lat == longint'(mlp_latency(LANES) + 9) && lat <= 354,
            $sformatf("step %0d: latency %0d", t, lat));
      n_latency++;
    end
  endtask

  task automatic run_episode(act_mode_e m, int ready_pct);
    longint on_at;
    cur_mode = m;
    for (int t = 0; t < NST; t++) first_seen[t] = -1;
    apply_idx = 0;
    win_idx = -1;
    host_wr(0, {29'd0, 2'(m), 1'b1});   // arm with mode
    repeat (3 * CPS + 5) begin
      @(negedge clk);
      if (dut.waiting) n_below++;
    end
    check(!dut.active, "episode started with the laser off");
    laser_on = 1;
    on_at = cyc;
    fork
      check_episode(ready_pct);
      begin
        @(posedge irq_done);
      end
    join
    // Each action is in place before the next window ends: processing of
    // window t overlapped the acquisition of window t+1.
    for (int t = 0; t < NST; t++) begin
      if (first_seen[t] < win_end[t + 1]) n_overlap++;
      check(first_seen[t] < win_end[t + 1], "action later than the next window");
    end
    check(n_trigger > 0 && win_end[0] - on_at <= longint'(CPS * SPW + CPS + 4),
          "trigger not at the first sample above threshold");
    @(negedge clk);
    check(dac_code == 0, "DAC not back to code 0 after the episode");
    check(!m_valid, "stream not empty after the episode");
    laser_on = 0;
    n_mode[m]++;
    repeat (2 * CPS) @(negedge clk);
  endtask

  initial begin
    repeat (longint'(N_EPISODES) * (NST + 3) * CPS * SPW + N_EPISODES * 40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
