// weight_bram: block RAM holding the policy network's 8-bit weights and biases.
//
// The memory is LANES byte-wide banks sharing one address, so that a single
// read returns one byte per multiply-accumulate lane of the MLP engine: the
// weights of LANES output neurons for one input (or their LANES biases). The
// host writes it between episodes through a byte-enabled port (`wbe` selects
// the lanes written). Reads are synchronous: rdata holds the word addressed by
// raddr in the previous cycle, as a block RAM does. A read and a write to the
// same word in one cycle return the old contents.
//
// That the weights live in on-chip block RAM written by the processor follows
// the published controller; the banked organisation is this design's own.
module weight_bram #(
  parameter int unsigned LANES = 16,
  parameter int unsigned DEPTH = 203,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [AW-1:0]        waddr,
  input  logic [LANES-1:0]     wbe,
  input  logic [LANES*8-1:0]   wdata,
  input  logic [AW-1:0]        raddr,
  output logic [LANES*8-1:0]   rdata
);
  logic [LANES*8-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int k = 0; k < LANES; k++)
        if (wbe[k]) mem[waddr][k*8 +: 8] <= wdata[k*8 +: 8];
    end
    rdata <= mem[raddr];
  end
endmodule
