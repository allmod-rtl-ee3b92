// tb_allmod_acc_lane: self-checking test of the serial accumulator lane.
// Two lanes run side by side on the same inputs: the template lane (no adder
// tree, D cycles) and a lane with a 4-input adder tree (D-3 cycles). Each
// test loads D random N-bit values (all-ones the first time, for the widest
// sum), checks that done rises exactly acc_cycles(D, TREE_W) cycles after the
// load cycle and not before, that the sum equals the total computed in the
// testbench, and that sum and done hold until the next load.
module tb_allmod_acc_lane;
  import allmod_pkg::*;
  localparam int unsigned N = N_DEF;
  localparam int unsigned D = num_luts(N_DEF, K_DEF, MS_DEF), LOG2D = log2d(D);
  localparam int unsigned TW = 4;
  localparam int unsigned C0 = acc_cycles(D, 0), C1 = acc_cycles(D, TW);

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, load = 0;
  logic [1:0] done;
  logic [D-1:0][N-1:0] vals;
  logic [N+LOG2D-1:0] sum [2];
  int checks = 0, failures = 0;

  allmod_acc_lane dut (.clk, .rst_n, .load, .vals, .sum(sum[0]), .done(done[0]));
  allmod_acc_lane #(.TREE_W(TW)) dut_tree (.clk, .rst_n, .load, .vals, .sum(sum[1]), .done(done[1]));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N+LOG2D-1:0] exp;
    int cyc, seen [2];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      exp = '0;
      for (int i = 0; i < D; i++) begin
        for (int w = 0; w < N/32; w++) vals[i][32*w +: 32] = (it == 0) ? '1 : $urandom;
        exp += (N+LOG2D)'(vals[i]);
      end
      @(negedge clk); load = 1;
      @(negedge clk); load = 0;
      vals = '0;
      seen[0] = 0; seen[1] = 0;
      for (cyc = 1; cyc <= D + 2; cyc++) begin
        for (int l = 0; l < 2; l++)
          if (done[l] && seen[l] == 0) seen[l] = cyc;
        @(negedge clk);
      end
      checks += 2;
      if (seen[0] != C0) begin failures++; $display("FAIL latency %0d exp %0d", seen[0], C0); end
      if (seen[1] != C1) begin failures++; $display("FAIL tree latency %0d exp %0d", seen[1], C1); end
      for (int l = 0; l < 2; l++) begin
        checks++;
        if (!done[l] || sum[l] !== exp) begin failures++; $display("FAIL sum[%0d] %h exp %h", l, sum[l], exp); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
