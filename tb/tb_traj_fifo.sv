// tb_traj_fifo: checks order, full flag, count, last flag and the
// valid/ready stream of the trajectory FIFO against a reference queue, with
// random write and read activity including runs to full and to empty.
module tb_traj_fifo;
  import rl_pkg::*;
  localparam int DEPTH = 128;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, wr_en, full, m_valid, m_ready, m_last;
  traj_t wr_data;
  logic [7:0] count;
  logic [63:0] m_data;
  traj_t q [$];
  int checks = 0, failures = 0, n_full = 0, n_stall = 0;

  traj_fifo #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic cycle(int p_wr, int p_rd);
    traj_t d;
    @(negedge clk);
    d = traj_t'({$urandom, $urandom, 1'($urandom)});
    wr_en = (int'($urandom_range(99)) < p_wr) && (q.size() < DEPTH);
    wr_data = d;
    m_ready = (int'($urandom_range(99)) < p_rd);
    #1;
    checks++;
    if (int'(count) != q.size() || full != (q.size() == DEPTH) || m_valid != (q.size() != 0)) begin
      failures++; $display("count %0d full %0d valid %0d, queue %0d", count, full, m_valid, q.size());
    end
    if (full) n_full++;
    if (m_valid && !m_ready) n_stall++;
    if (m_valid) begin
      checks++;
      if (m_data !== {q[0].obs_or, q[0].obs_oe, q[0].a_pre, q[0].dac_code} || m_last !== q[0].last) begin
        failures++; $display("head mismatch");
      end
    end
    @(posedge clk);
    if (m_valid && m_ready) void'(q.pop_front());
    if (wr_en) q.push_back(d);
  endtask

  initial begin
    rst_n = 0; wr_en = 0; m_ready = 0; wr_data = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    repeat (400) cycle(90, 10);   // fill up
    repeat (400) cycle(10, 90);   // drain
    repeat (2000) cycle(50, 50);
    repeat (300) cycle(0, 100);
    checks++;
    if (n_full == 0 || n_stall == 0) begin failures++; $display("full or stall never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
