// tb_allmod_adjust: self-checking test of one adjustment pass.
// For random moduli (top bit set) and inputs spread over [0, min(5M, 2^(N+2))), checks
// that the output is congruent to the input, below 3M, and below M when the
// input was below 3M; counts inputs in each selection range.
module tb_allmod_adjust;
  import allmod_pkg::*;
  localparam int unsigned N = N_DEF;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, in_valid = 0, out_valid;
  logic [N+1:0] x, y;
  logic [N-1:0] modulus;
  int checks = 0, failures = 0;
  int n_keep = 0, n_m = 0, n_2m = 0;

  allmod_adjust dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N+2:0] xv, mm, exp, lim;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 1000; it++) begin
      for (int w = 0; w < N/32; w++) modulus[32*w +: 32] = $urandom;
      modulus[N-1] = 1'b1;
      mm = (N+3)'(modulus);
      for (int w = 0; w < (N+3+31)/32; w++) xv[32*w +: 32] = $urandom;
      // the fused sum is below 5M and below 2^(N+2)
      lim = (5 * mm < (N+3)'(1) << (N+2)) ? 5 * mm : (N+3)'(1) << (N+2);
      xv = xv % lim;
      if (it == 0) xv = lim - 1;
      if (it == 1) xv = 2 * mm;
      if (it == 2) xv = mm;
      if (it == 3) xv = mm - 1;
      exp = (xv >= 2*mm) ? xv - 2*mm : (xv >= mm) ? xv - mm : xv;
      if (xv >= 2*mm) n_2m++; else if (xv >= mm) n_m++; else n_keep++;
      x = xv[N+1:0]; in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || y !== exp) begin failures++; $display("FAIL x=%h m=%h y=%h exp=%h", xv, modulus, y, exp); end
      checks++;
      if (y % mm != xv % mm || y >= 3*mm || (xv < 3*mm && y >= mm)) begin failures++; $display("FAIL property"); end
    end
    checks++;
    if (n_keep == 0 || n_m == 0 || n_2m == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
