// tb_eps_buffer: self-checking test of the per-step noise buffer.
// Fills the 80 entries with random values, overwrites some, reads all back
// with one cycle of latency and compares with a reference copy.
module tb_eps_buffer;
  localparam int DEPTH = 80;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we; logic [6:0] waddr, raddr; logic [31:0] wdata, rdata;
  logic [31:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  eps_buffer #(.DEPTH(DEPTH), .W(32)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 7'(a); wdata = $urandom; ref_mem[a] = wdata;
    end
    for (int n = 0; n < 50; n++) begin
      @(negedge clk); we = 1; waddr = 7'($urandom_range(DEPTH-1)); wdata = $urandom;
      ref_mem[waddr] = wdata;
    end
    @(negedge clk); we = 0;
    for (int a = DEPTH-1; a >= 0; a--) begin
      @(negedge clk); raddr = 7'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata !== ref_mem[a]) begin failures++; $display("entry %0d: %h vs %h", a, rdata, ref_mem[a]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
