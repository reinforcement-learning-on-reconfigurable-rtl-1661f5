// tb_host_regs: checks the processor register port.
// Register writes are read back; CTRL with bit 0 gives a one-cycle arm
// pulse; weight writes land on the right word and lanes with the data
// replicated; eps writes land on the right entry; writes outside the windows
// reach neither memory; status is passed through; reset values are as
// documented (scale factors 1.0).
module tb_host_regs;
  import rl_pkg::*;
  import fp32_pkg::*;
  localparam int LANES = 16, N = 80;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, wr_en, rd_en, arm, w_we, e_we;
  logic [11:0] wr_addr, rd_addr;
  logic [31:0] wr_data, rd_data, status;
  act_mode_e mode;
  obs_t or_threshold;
  f32_t mu_scale, sg_scale;
  logic [7:0] w_addr;
  logic [LANES-1:0] w_be;
  logic [LANES*8-1:0] w_data;
  logic [6:0] e_addr;
  f32_t e_data;
  int checks = 0, failures = 0;

  host_regs #(.LANES(LANES), .N_STEPS(N)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("%0t: %s", $time, what); end
  endtask

  task automatic wr(int a, logic [31:0] d);
    @(negedge clk); wr_en = 1; wr_addr = 12'(a); wr_data = d;
    #1;
  endtask

  task automatic rd(int a, output logic [31:0] d);
    @(negedge clk); wr_en = 0; rd_en = 1; rd_addr = 12'(a);
    @(posedge clk); #1; rd_en = 0; d = rd_data;
  endtask

  initial begin
    logic [31:0] d;
    rst_n = 0; wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = 0; status = 32'hCAFE_0102;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    check(or_threshold == 33 && mode == MODE_POLICY && mu_scale == F32_ONE
          && sg_scale == F32_ONE && !arm, "reset values");
    // Registers.
    wr(1, 32'd1234); wr(2, 32'hBA80_0000); wr(3, 32'h3A42_4000);
    wr(0, 32'b100);   // mode random, no arm
    @(posedge clk); #1;
    check(!arm && mode == MODE_RANDOM, "mode write armed or mode wrong");
    check(or_threshold == 1234 && mu_scale == 32'hBA80_0000
          && sg_scale == 32'h3A42_4000, "register outputs");
    rd(1, d); check(d == 1234, "read OR_THR");
    rd(2, d); check(d == 32'hBA80_0000, "read MU_SCALE");
    rd(3, d); check(d == 32'h3A42_4000, "read SG_SCALE");
    rd(0, d); check(d == 32'b100, "read CTRL");
    rd(6, d); check(d == 32'hCAFE_0102, "read STATUS");
    wr(0, 32'b011);   // arm, mode mean
    @(posedge clk); #1;
    check(arm && mode == MODE_MEAN, "arm pulse");
    @(negedge clk); wr_en = 0;
    @(posedge clk); #1;
    check(!arm, "arm longer than one cycle");
    // Weight window: address 0x400 + word*4 + quad.
    for (int n = 0; n < 200; n++) begin
      automatic int word = $urandom_range(202);
      automatic int quad = $urandom_range(3);
      automatic logic [31:0] v = $urandom;
      wr(12'h400 + word * 4 + quad, v);
      check(w_we && !e_we && int'(w_addr) == word && w_be == (16'hF << (4 * quad))
            && w_data[quad*32 +: 32] == v, $sformatf("weight write word %0d quad %0d", word, quad));
    end
    wr(12'h400 + 203 * 4, 32'h1);
    check(!w_we && !e_we, "write past the weight memory accepted");
    // Eps window.
    for (int t = 0; t < N; t += 7) begin
      wr(12'h800 + t, 32'hBF00_0000 ^ 32'(t * 12345));
      check(e_we && !w_we && int'(e_addr) == t && e_data == (32'hBF00_0000 ^ 32'(t * 12345)), "eps write");
    end
    wr(12'h800 + N, 32'h1);
    check(!e_we, "write past the eps buffer accepted");
    wr(12'h010, 32'h1);
    check(!e_we && !w_we, "unmapped write reached a memory");
    @(negedge clk); wr_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
