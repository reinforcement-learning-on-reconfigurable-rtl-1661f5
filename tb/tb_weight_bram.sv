// tb_weight_bram: self-checking test of the banked weight memory.
// Writes random words with random lane enables, keeps a reference copy, and
// reads every word back, checking the contents and the one-cycle read latency.
module tb_weight_bram;
  localparam int LANES = 16, DEPTH = 203;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we; logic [7:0] waddr, raddr; logic [LANES-1:0] wbe;
  logic [LANES*8-1:0] wdata, rdata;
  logic [LANES*8-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  weight_bram #(.LANES(LANES), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; wbe = '0; wdata = '0; waddr = 0; raddr = 0;
    // Initialise every word fully.
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 8'(a); wbe = '1;
      for (int k = 0; k < LANES/4; k++) wdata[k*32 +: 32] = $urandom;
      ref_mem[a] = wdata;
    end
    // Partial writes.
    for (int n = 0; n < 600; n++) begin
      @(negedge clk); we = 1; waddr = 8'($urandom_range(DEPTH-1)); wbe = LANES'($urandom);
      for (int k = 0; k < LANES/4; k++) wdata[k*32 +: 32] = $urandom;
      for (int k = 0; k < LANES; k++) if (wbe[k]) ref_mem[waddr][k*8 +: 8] = wdata[k*8 +: 8];
    end
    @(negedge clk); we = 0;
    // Read back: data for raddr appears after the next edge.
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); raddr = 8'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata !== ref_mem[a]) begin failures++; $display("word %0d mismatch", a); end
    end
    // Latency: changing raddr must not change rdata before the edge.
    @(negedge clk); raddr = 0; @(posedge clk); #1;
    @(negedge clk); raddr = 1; #1;
    checks++; if (rdata !== ref_mem[0]) begin failures++; $display("read not registered"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
