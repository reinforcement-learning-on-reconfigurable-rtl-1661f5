// eps_buffer: the per-step noise samples of one episode.
//
// The stochastic policy draws its action as a = mu + sigma * eps with eps a
// standard normal sample. No normal generator is built in hardware: the
// training server draws one eps per step of the coming episode and sends them
// with the weights, and this buffer holds them, indexed by the step number.
// Each entry is a single-precision float (32 bits).
//
// Interface: write port from the host (we, waddr, wdata); synchronous read,
// rdata holds entry raddr one cycle after raddr is presented. DEPTH defaults
// to the 80 steps of an episode. Streaming eps from the server follows the
// published controller; the buffer is this design's.
module eps_buffer #(
  parameter int unsigned DEPTH = 80,
  parameter int unsigned W     = 32,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
