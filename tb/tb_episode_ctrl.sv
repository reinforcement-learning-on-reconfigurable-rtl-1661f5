// tb_episode_ctrl: checks the episode sequence of the controller.
// Triggers are ignored until armed and below the threshold; the trigger
// restarts the window; every window end starts exactly one inference in the
// next cycle; every action is applied to the DAC in the cycle after it
// arrives, with the matching step number and last-step flag; the last action
// is held for one more window, after which episode_done pulses and the DAC
// returns to code 0. Two episodes are run.
module tb_episode_ctrl;
  import rl_pkg::*;
  localparam int N = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, arm, sample_stb, obs_valid, act_valid;
  obs_t sample_or, or_threshold;
  logic [DAC_W-1:0] act_code, dac_code;
  logic win_restart, infer_start, apply, last_step, active, waiting, episode_done;
  logic [$clog2(N)-1:0] step;
  int checks = 0, failures = 0;

  episode_ctrl #(.N_STEPS(N)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("%0t: %s", $time, what); end
  endtask

  // One cycle with the given inputs; returns after the edge (outputs updated).
  task automatic tick(bit s_stb = 0, int s_or = 0, bit ov = 0, bit av = 0, int code = 0, bit a = 0);
    @(negedge clk);
    sample_stb = s_stb; sample_or = obs_t'(s_or); obs_valid = ov; act_valid = av;
    act_code = DAC_W'(code); arm = a;
    @(posedge clk); #1;
    sample_stb = 0; obs_valid = 0; act_valid = 0; arm = 0;
  endtask

  task automatic episode(int thr);
    int codes [N];
    // Below threshold: still waiting.
    tick(.a(1));
    check(waiting && !active, "not waiting after arm");
    repeat (5) begin
      tick(.s_stb(1), .s_or(thr - 1));
      check(!win_restart && waiting, "triggered below threshold");
    end
    tick(.s_or(thr + 50));  // no strobe: no trigger
    check(waiting, "triggered without a sample strobe");
    tick(.s_stb(1), .s_or(thr));
    check(win_restart && active && step == 0, "no trigger at threshold");
    check(dac_code == 0, "DAC not at code 0 at episode start");
    tick();
    check(!win_restart, "restart longer than one cycle");
    for (int t = 0; t < N; t++) begin
      repeat (3 + $urandom_range(5)) begin
        tick(); check(!infer_start && !apply, "spurious start/apply");
      end
      tick(.ov(1));
      check(infer_start, "no inference after window end");
      tick();
      check(!infer_start, "inference start longer than one cycle");
      repeat ($urandom_range(6)) tick();
      codes[t] = int'($urandom_range(16383));
      tick(.av(1), .code(codes[t]));
      check(apply && dac_code == DAC_W'(codes[t]) && int'(step) == t && last_step == (t == N-1),
            $sformatf("step %0d not applied (apply %0d code %0d step %0d)", t, apply, dac_code, step));
      tick();
      check(!apply && dac_code == DAC_W'(codes[t]), "DAC code not held");
      // A stray act_valid with nothing in flight is ignored.
      tick(.av(1), .code(1));
      check(!apply && dac_code == DAC_W'(codes[t]), "stray action applied");
    end
    // Tail window: last action held until the window ends.
    repeat (4) begin tick(); check(active && !episode_done && dac_code == DAC_W'(codes[N-1]), "tail not held"); end
    tick(.ov(1));
    check(!infer_start, "inference started after the last step");
    check(episode_done && dac_code == 0 && !active, "episode did not end after the tail window");
    tick();
    check(!episode_done && !active && !waiting, "not idle after the episode");
  endtask

  initial begin
    rst_n = 0; arm = 0; sample_stb = 0; obs_valid = 0; act_valid = 0; act_code = 0;
    sample_or = 0; or_threshold = 33;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // Not armed: nothing happens.
    tick(.s_stb(1), .s_or(5000));
    tick(.ov(1));
    check(!active && !waiting && !win_restart && !infer_start, "reacted while not armed");
    episode(33);
    or_threshold = 1000;
    episode(1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
