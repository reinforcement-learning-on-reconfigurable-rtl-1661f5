// host_regs: the processor's window into the controller.
//
// Between episodes the processor loads new weights and noise samples sent by
// the training server, sets the scale factors and the mode of the next
// episode, and arms it. This block decodes a simple 32-bit word-addressed
// port (a write in any cycle with wr_en; a read returns rd_data one cycle
// after rd_en) into those registers and memory write ports:
//
//   0x000 CTRL     W: bit 0 = 1 arms an episode (pulse), bits 2:1 mode
//                  (0 policy, 1 mean only, 2 random); R: mode
//   0x001 OR_THR   OR trigger level, ADC codes (reset 33, about 0.1 V on a
//                  +-25 V input range)
//   0x002 MU_SCALE mean scale factor, float32        (reset 1.0)
//   0x003 SG_SCALE sigma scale factor, float32       (reset 1.0)
//   0x006 STATUS   R: bit 0 episode active, bit 1 waiting for trigger,
//                  bit 2 trajectory FIFO full, bits 15:8 step,
//                  bits 31:16 trajectory FIFO count
//   0x400 + w*(LANES/4) + q   weight word w, bytes 4q..4q+3 (byte j of
//                  the 32-bit data goes to lane 4q+j)
//   0x800 + t      eps for step t, float32
//
// The processor loading weights and eps into block RAM by DMA follows the
// published controller; the register map and the bus are this design's
// choice (a stand-in for an AXI4-Lite slave).
module host_regs
  import rl_pkg::*;
  import fp32_pkg::*;
#(
  parameter int unsigned LANES   = LANES_DEF,
  parameter int unsigned N_STEPS = N_STEPS_DEF,
  localparam int unsigned WAW = $clog2(wmem_depth(LANES)),
  localparam int unsigned EAW = $clog2(N_STEPS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wr_en,
  input  logic [11:0]        wr_addr,
  input  logic [31:0]        wr_data,
  input  logic               rd_en,
  input  logic [11:0]        rd_addr,
  output logic [31:0]        rd_data,
  // control
  output logic               arm,
  output act_mode_e          mode,
  output obs_t               or_threshold,
  output f32_t               mu_scale,
  output f32_t               sg_scale,
  input  logic [31:0]        status,
  // weight memory write port
  output logic               w_we,
  output logic [WAW-1:0]     w_addr,
  output logic [LANES-1:0]   w_be,
  output logic [LANES*8-1:0] w_data,
  // eps buffer write port
  output logic               e_we,
  output logic [EAW-1:0]     e_addr,
  output f32_t               e_data
);
  localparam int unsigned QUADS = LANES / 4;
  localparam logic [11:0] A_CTRL = 12'h000, A_THR = 12'h001, A_MUS = 12'h002,
                          A_SGS = 12'h003, A_STAT = 12'h006, A_W = 12'h400, A_E = 12'h800;

  logic [10:0] woff;
  always_comb begin
    woff   = 11'(wr_addr - A_W);
    w_we   = wr_en && wr_addr >= A_W && wr_addr < A_E &&
             int'(woff) < int'(wmem_depth(LANES) * QUADS);
    w_addr = WAW'(int'(woff) / QUADS);
    w_be   = LANES'(4'hF) << (4 * (int'(woff) % QUADS));
    w_data = {QUADS{wr_data}};
    e_we   = wr_en && wr_addr >= A_E && int'(wr_addr - A_E) < int'(N_STEPS);
    e_addr = EAW'(wr_addr - A_E);
    e_data = wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      arm          <= 1'b0;
      mode         <= MODE_POLICY;
      or_threshold <= obs_t'(33);
      mu_scale     <= F32_ONE;
      sg_scale     <= F32_ONE;
      rd_data      <= '0;
    end else begin
      arm <= 1'b0;
      if (wr_en) begin
        unique case (wr_addr)
          A_CTRL: begin
            arm  <= wr_data[0];
            mode <= act_mode_e'(wr_data[2:1]);
          end
          A_THR: or_threshold  <= obs_t'(wr_data);
          A_MUS: mu_scale      <= wr_data;
          A_SGS: sg_scale      <= wr_data;
          default: ;
        endcase
      end
      if (rd_en) begin
        unique case (rd_addr)
          A_CTRL:  rd_data <= 32'({mode, 1'b0});
          A_THR:   rd_data <= 32'(signed'(or_threshold));
          A_MUS:   rd_data <= mu_scale;
          A_SGS:   rd_data <= sg_scale;
          A_STAT:  rd_data <= status;
          default: rd_data <= '0;
        endcase
      end
    end
  end
endmodule
