// policy_mlp: integer multilayer perceptron of the welding policy.
//
// The policy maps the observation (mean OR and OE of the last 10 ms window)
// through two hidden layers of 32 and 64 ReLU neurons to two outputs, the
// raw pre-activations of the action mean and standard deviation. Weights and
// biases are 8-bit signed integers held in weight_bram. The arithmetic is
// exact integer arithmetic whose width grows from layer to layer instead of
// being requantised: 14-bit inputs, 24-bit first-layer activations, 38-bit
// second-layer activations and 53-bit outputs (rl_pkg::grow). The outputs are
// scaled to real values downstream, in action_head.
//
// Schedule: LANES multiply-accumulate lanes compute LANES neurons of a layer
// at once, one input per cycle. For each group of LANES neurons the engine
// reads the bias word, then one weight word per input, and writes the ReLU of
// the accumulators back into the next layer's activation registers; a group
// takes n_in + 3 cycles. With LANES = 16 the network takes 2*5 + 4*35 + 1*67
// = 217 cycles and `done` rises rl_pkg::mlp_latency(LANES) = 218 cycles after
// the `start` cycle, well inside the 354-cycle budget of the published
// controller for processing one window.
//
// Published: the 2-32-64-2 shape, ReLU, 8-bit integer weights and biases,
// growing activation width. This design's own: the lane schedule, the memory
// layout (rl_pkg), and adding each bias at the accumulator's integer scale.
//
// Interface: start (one cycle, ignored while busy) latches obs_or/obs_oe;
// done pulses for one cycle when out_mu/out_sigma are valid; they hold until
// the next done. The w_* port writes weight_bram and must not be used while
// busy.
module policy_mlp
  import rl_pkg::*;
#(
  parameter int unsigned LANES = LANES_DEF,
  localparam int unsigned DEPTH = wmem_depth(LANES),
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  obs_t               obs_or,
  input  obs_t               obs_oe,
  output logic               busy,
  output logic               done,
  output acc_t               out_mu,
  output acc_t               out_sigma,
  input  logic               w_we,
  input  logic [AW-1:0]      w_addr,
  input  logic [LANES-1:0]   w_be,
  input  logic [LANES*8-1:0] w_data
);
  localparam int unsigned KW = $clog2(N_H2 + 4);
  localparam int unsigned GW = $clog2(n_groups(N_H2, LANES) + 1);

  typedef logic signed [A1_W-1:0] a1_t;
  typedef logic signed [A2_W-1:0] a2_t;

  // Per-layer constants.
  function automatic int unsigned nin(logic [1:0] l);
    return layer_in(int'(l));
  endfunction
  function automatic int unsigned nout(logic [1:0] l);
    return layer_out(int'(l));
  endfunction

  logic [1:0]    layer;
  logic [GW-1:0] grp;
  logic [KW-1:0] k;
  logic          running;

  obs_t x0 [N_IN];
  a1_t  h1 [N_H1];
  a2_t  h2 [N_H2];
  acc_t acc [LANES];

  logic [AW-1:0]        raddr;
  logic [LANES*8-1:0]   rdata;
  a2_t                  xin;
  int unsigned          n_in_cur, n_out_cur, idx;

  weight_bram #(.LANES(LANES), .DEPTH(DEPTH)) u_wmem (
    .clk, .we(w_we), .waddr(w_addr), .wbe(w_be), .wdata(w_data),
    .raddr, .rdata
  );

  // Address of the word needed at phase k, and the input that goes with the
  // word arriving at phase k (read one cycle earlier).
  always_comb begin
    n_in_cur  = nin(layer);
    n_out_cur = nout(layer);
    if (k == '0) raddr = AW'(b_base(int'(layer), LANES) + int'(grp));
    else         raddr = AW'(w_base(int'(layer), LANES) + int'(grp) * n_in_cur + int'(k) - 1);
    idx = (int'(k) >= 2) ? int'(k) - 2 : 0;
    unique case (layer)
      2'd0:    xin = a2_t'(x0[idx[0:0]]);
      2'd1:    xin = a2_t'(h1[idx[4:0]]);
      default: xin = h2[idx[5:0]];
    endcase
  end

  assign busy = running;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running <= 1'b0;
      done    <= 1'b0;
      layer   <= '0;
      grp     <= '0;
      k       <= '0;
      out_mu    <= '0;
      out_sigma <= '0;
    end else begin
      done <= 1'b0;
      if (!running) begin
        if (start) begin
          x0[0]   <= obs_or;
          x0[1]   <= obs_oe;
          running <= 1'b1;
          layer   <= '0;
          grp     <= '0;
          k       <= '0;
        end
      end else begin
        // Accumulate.
        if (k == KW'(1)) begin
          for (int ln = 0; ln < LANES; ln++)
            acc[ln] <= acc_t'($signed(rdata[ln*8 +: 8]));
        end else if (int'(k) >= 2 && int'(k) <= int'(n_in_cur) + 1) begin
          for (int ln = 0; ln < LANES; ln++)
            acc[ln] <= acc[ln] + acc_t'($signed(rdata[ln*8 +: 8])) * acc_t'(xin);
        end
        // Write back and advance.
        if (int'(k) == int'(n_in_cur) + 2) begin
          for (int ln = 0; ln < LANES; ln++) begin
            automatic int unsigned n = int'(grp) * LANES + ln;
            if (n < n_out_cur) begin
              unique case (layer)
                2'd0: h1[n % N_H1] <= acc[ln][A3_W-1] ? '0 : a1_t'(acc[ln]);
                2'd1: h2[n % N_H2] <= acc[ln][A3_W-1] ? '0 : a2_t'(acc[ln]);
                default: begin
                  if (n == 0) out_mu    <= acc[ln];
                  if (n == 1) out_sigma <= acc[ln];
                end
              endcase
            end
          end
          k <= '0;
          if (int'(grp) + 1 < int'(n_groups(n_out_cur, LANES))) begin
            grp <= grp + 1'b1;
          end else begin
            grp <= '0;
            if (layer == 2'd2) begin
              running <= 1'b0;
              done    <= 1'b1;
            end else begin
              layer <= layer + 1'b1;
            end
          end
        end else begin
          k <= k + 1'b1;
        end
      end
    end
  end

  // The host must not rewrite the weights during an inference.
  assert property (@(posedge clk) disable iff (!rst_n) running |-> !w_we)
    else $error("policy_mlp: weight write while busy");
endmodule
