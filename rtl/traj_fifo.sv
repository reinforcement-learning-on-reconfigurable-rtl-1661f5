// traj_fifo: first-in first-out buffer of the episode's trajectory.
//
// At every step the controller stores the observation it acted on and the
// action it applied, one traj_t record per step. After the episode the
// processor's DMA drains the buffer through a valid/ready stream (in the
// manner of AXI4-Stream: a beat moves in a cycle where m_valid and m_ready are
// both high); m_last marks the record of the episode's final step. The
// training server turns these records into (s, a, r, s') transitions.
//
// Storage is a DEPTH-entry array with read and write pointers one bit wider
// than the address; m_data is read combinationally from the head entry.
// Writing while full drops the record and is flagged by an assertion.
// DEPTH = 128 holds one 80-step episode; the depth, the record layout and
// the stream handshake are this design's choices, storing (s_t, a_t) pairs in
// a FIFO read by DMA follows the published controller.
module traj_fifo
  import rl_pkg::*;
#(
  parameter int unsigned DEPTH = 128,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  traj_t       wr_data,
  output logic        full,
  output logic [AW:0] count,
  output logic        m_valid,
  input  logic        m_ready,
  output logic [63:0] m_data,
  output logic        m_last
);
  traj_t mem [DEPTH];
  logic [AW:0] wp, rp;

  assign count   = wp - rp;
  assign full    = (count == (AW+1)'(DEPTH));
  assign m_valid = (count != '0);
  assign m_data  = {mem[rp[AW-1:0]].obs_or, mem[rp[AW-1:0]].obs_oe,
                    mem[rp[AW-1:0]].a_pre,  mem[rp[AW-1:0]].dac_code};
  assign m_last  = mem[rp[AW-1:0]].last;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_en && !full) begin
        mem[wp[AW-1:0]] <= wr_data;
        wp <= wp + 1'b1;
      end
      if (m_valid && m_ready) rp <= rp + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full)
    else $error("traj_fifo: write while full, record dropped");
  // A stream beat, once offered, stays until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n) m_valid && !m_ready |=> m_valid)
    else $error("traj_fifo: m_valid withdrawn");
endmodule
