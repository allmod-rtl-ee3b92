// tb_allmod_fuse: self-checking test of the fusion adder.
// Random and extreme operands; checks the N+3-bit sum one cycle later and
// the valid pipeline.
module tb_allmod_fuse;
  import allmod_pkg::*;
  localparam int unsigned N = N_DEF;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, in_valid = 0, out_valid;
  logic [N-1:0] acc_lo, lut2;
  logic [N:0] iter;
  logic [N+1:0] sum;
  int checks = 0, failures = 0;

  allmod_fuse dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N+1:0] exp;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 500; it++) begin
      for (int w = 0; w < N/32; w++) begin
        acc_lo[32*w +: 32] = $urandom; lut2[32*w +: 32] = $urandom; iter[32*w +: 32] = $urandom;
      end
      iter[N] = 1'($urandom);
      if (it == 0) begin acc_lo = '1; lut2 = '1; iter = '1; end
      exp = (N+2)'(acc_lo) + (N+2)'(lut2) + (N+2)'(iter);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || sum !== exp) begin failures++; $display("FAIL %h exp %h", sum, exp); end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
