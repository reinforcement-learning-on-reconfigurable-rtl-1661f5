// tb_policy_mlp: checks the integer MLP against a reference model.
// Random 8-bit weights and biases are loaded through the write port in the
// word layout of rl_pkg; for random observations the two outputs must equal
// an exact 64-bit integer forward pass (ReLU on the hidden layers), and done
// must rise exactly mlp_latency(16) = 218 cycles after start, inside the
// 354-cycle window-processing budget.
module tb_policy_mlp;
  import rl_pkg::*;
  localparam int LANES = 16;
  localparam int DEPTH = wmem_depth(LANES);
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done, w_we;
  obs_t obs_or, obs_oe;
  acc_t out_mu, out_sigma;
  logic [$clog2(DEPTH)-1:0] w_addr;
  logic [LANES-1:0] w_be;
  logic [LANES*8-1:0] w_data;
  int checks = 0, failures = 0;

  // Reference parameters.
  int w1 [N_H1][N_IN], b1 [N_H1];
  int w2 [N_H2][N_H1], b2 [N_H2];
  int w3 [N_OUT][N_H2], b3 [N_OUT];

  policy_mlp #(.LANES(LANES)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int rnd8(int mag);
    return int'($urandom_range(2*mag)) - mag;
  endfunction

  // Put one byte into the memory at (word, lane).
  task automatic wbyte(int word, int lane, int val);
    @(negedge clk);
    w_we = 1; w_addr = $bits(w_addr)'(word); w_be = LANES'(1) << lane;
    w_data = '0; w_data[lane*8 +: 8] = 8'(val);
  endtask

  task automatic load(int mag);
    for (int j = 0; j < N_H1; j++) begin b1[j] = rnd8(mag); for (int i = 0; i < N_IN; i++) w1[j][i] = rnd8(mag); end
    for (int j = 0; j < N_H2; j++) begin b2[j] = rnd8(mag); for (int i = 0; i < N_H1; i++) w2[j][i] = rnd8(mag); end
    for (int j = 0; j < N_OUT; j++) begin b3[j] = rnd8(mag); for (int i = 0; i < N_H2; i++) w3[j][i] = rnd8(mag); end
    for (int j = 0; j < N_H1; j++) begin
      wbyte(b_base(0, LANES) + j / LANES, j % LANES, b1[j]);
      for (int i = 0; i < N_IN; i++) wbyte(w_base(0, LANES) + (j / LANES) * N_IN + i, j % LANES, w1[j][i]);
    end
    for (int j = 0; j < N_H2; j++) begin
      wbyte(b_base(1, LANES) + j / LANES, j % LANES, b2[j]);
      for (int i = 0; i < N_H1; i++) wbyte(w_base(1, LANES) + (j / LANES) * N_H1 + i, j % LANES, w2[j][i]);
    end
    for (int j = 0; j < N_OUT; j++) begin
      wbyte(b_base(2, LANES) + j / LANES, j % LANES, b3[j]);
      for (int i = 0; i < N_H2; i++) wbyte(w_base(2, LANES) + (j / LANES) * N_H2 + i, j % LANES, w3[j][i]);
    end
    @(negedge clk); w_we = 0;
  endtask

  task automatic reference(int xo, int xe, output longint mu, output longint sg);
    longint h1 [N_H1], h2 [N_H2], o [N_OUT];
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
    mu = o[0]; sg = o[1];
  endtask

  task automatic run_one(int xo, int xe);
    longint emu, esg;
    int cyc;
    reference(xo, xe, emu, esg);
    @(negedge clk); obs_or = obs_t'(xo); obs_oe = obs_t'(xe); start = 1;
    @(negedge clk); start = 0; obs_or = '0; obs_oe = '0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (longint'(out_mu) != emu || longint'(out_sigma) != esg) begin
      failures++;
      $display("x=(%0d,%0d): got (%0d,%0d) expected (%0d,%0d)", xo, xe, out_mu, out_sigma, emu, esg);
    end
    checks++;
    if (cyc != int'(mlp_latency(LANES)) || cyc > 354) begin
      failures++; $display("latency %0d, expected %0d", cyc, mlp_latency(LANES));
    end
  endtask

  initial begin
    rst_n = 0; start = 0; w_we = 0; w_addr = '0; w_be = '0; w_data = '0;
    obs_or = '0; obs_oe = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // Full-range weights: exercises the widest activations.
    load(128 - 1);
    run_one(8191, 8191);
    run_one(-8192, 8191);
    run_one(0, 0);
    for (int n = 0; n < 20; n++) run_one(int'($urandom_range(16383)) - 8192, int'($urandom_range(16383)) - 8192);
    // Small weights: many neurons near zero, ReLU decides.
    load(3);
    for (int n = 0; n < 20; n++) run_one(int'($urandom_range(2000)) - 1000, int'($urandom_range(2000)) - 1000);
    // A start while busy is ignored.
    @(negedge clk); obs_or = 100; obs_oe = 200; start = 1;
    @(negedge clk); start = 0;
    repeat (10) @(negedge clk);
    obs_or = 1; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    begin
      longint emu, esg;
      reference(100, 200, emu, esg);
      checks++;
      if (longint'(out_mu) != emu || longint'(out_sigma) != esg) begin failures++; $display("start while busy was not ignored"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
