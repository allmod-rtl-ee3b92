// tb_allmod_iter_sub: self-checking test of the iterative subtractor.
// Random moduli with the top bit set and random N+MS-bit operands (plus the
// extremes all-ones and zero); checks done exactly MS cycles after the
// start cycle, result congruent to the operand mod M, and result below 2M.
module tb_allmod_iter_sub;
  import allmod_pkg::*;
  localparam int unsigned N = N_DEF, MS = MS_DEF;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0, done;
  logic [N+MS-1:0] x_in;
  logic [N-1:0] modulus;
  logic [N:0] result;
  int checks = 0, failures = 0;

  allmod_iter_sub dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N+MS-1:0] x;
    int cyc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      for (int w = 0; w < N/32; w++) modulus[32*w +: 32] = $urandom;
      modulus[N-1] = 1'b1;
      if (it == 1) modulus = {1'b1, {(N-1){1'b0}}};
      for (int w = 0; w < (N+MS+31)/32; w++) x[32*w +: 32] = $urandom;
      if (it == 0) x = '1;
      if (it == 2) x = '0;
      x_in = x;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0; x_in = '0;
      cyc = 1;
      while (!done && cyc < 3*MS) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != MS) begin failures++; $display("FAIL latency %0d", cyc); end
      checks++;
      if ((N+MS)'(result) % (N+MS)'(modulus) != x % (N+MS)'(modulus)) begin
        failures++; $display("FAIL residue x=%h m=%h r=%h", x, modulus, result);
      end
      checks++;
      if ((N+2)'(result) >= ((N+2)'(modulus) << 1)) begin
        failures++; $display("FAIL bound r=%h m=%h", result, modulus);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
