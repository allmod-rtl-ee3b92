// tb_allmod_sched: self-checking test of the lane scheduler.
// Keeps in_valid high (with random gaps and hold periods in a second phase)
// and checks against a reference model kept in the testbench: lanes are used
// round-robin, a lane is never reissued before it has been read, acc_load
// comes exactly 1 cycle and read_en exactly RD cycles after the issue to
// that lane, and under continuous input LANES operations are accepted every
// RD cycles (RD = D+1 = 16 by default: 0.5 per cycle for LANES=8).
module tb_allmod_sched;
  import allmod_pkg::*;
  localparam int unsigned LANES = LANES_DEF;
  localparam int unsigned RD = read_cycle(num_luts(N_DEF, K_DEF, MS_DEF), MS_DEF, TREE_DEF);
  localparam int unsigned LW = $clog2(LANES);

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, in_valid = 0, hold = 0;
  logic in_ready, issue, read_en;
  logic [LW-1:0] issue_lane, read_lane;
  logic [LANES-1:0] acc_load;
  int checks = 0, failures = 0;

  allmod_sched dut (.*);

  int cycle = 0;
  int issued_at [LANES];
  int expect_lane = 0;
  int n_issue = 0, n_stall = 0, issues_in_window = 0;

  task automatic fail(input string s);
    failures++;
    if (failures < 10) $display("FAIL @%0d %s", cycle, s);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model, sampled in the middle of each cycle
  always @(negedge clk) if (rst_n) begin
    for (int l = 0; l < LANES; l++) begin
      checks++;
      if (acc_load[l] != (issued_at[l] >= 0 && cycle == issued_at[l] + 1)) fail($sformatf("acc_load lane %0d", l));
    end
    checks++;
    begin
      bit exp_read; int exp_lane;
      exp_read = 0; exp_lane = 0;
      for (int l = 0; l < LANES; l++)
        if (issued_at[l] >= 0 && cycle == issued_at[l] + RD) begin exp_read = 1; exp_lane = l; end
      if (read_en != exp_read || (exp_read && read_lane != LW'(exp_lane))) fail("read");
    end
    checks++;
    begin
      bit exp_ready;
      exp_ready = !hold && (issued_at[expect_lane] < 0 || cycle >= issued_at[expect_lane] + RD);
      if (in_ready != exp_ready) fail("in_ready");
    end
    if (in_valid && !in_ready) n_stall++;
    if (issue) begin
      checks++;
      if (issue_lane != LW'(expect_lane)) fail("lane order");
      issued_at[expect_lane] = cycle;
      expect_lane = (expect_lane + 1) % LANES;
      n_issue++;
    end
    cycle++;
  end

  initial begin
    for (int l = 0; l < LANES; l++) issued_at[l] = -1000;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // phase 1: continuous input, measure the steady-state rate
    in_valid = 1;
    repeat (4 * (RD)) @(negedge clk);
    begin
      int n_before;
      n_before = n_issue;
      repeat (8 * (RD)) @(negedge clk);
      checks++;
      if (n_issue - n_before != 8 * LANES) fail($sformatf("rate %0d in %0d cycles", n_issue - n_before, 8*(RD)));
    end
    // phase 2: random gaps and holds
    for (int i = 0; i < 600; i++) begin
      @(posedge clk);
      #1;
      in_valid = ($urandom_range(0, 3) != 0);
      hold = ($urandom_range(0, 9) == 0);
    end
    in_valid = 0; hold = 0;
    repeat (RD + 3) @(negedge clk);
    checks++;
    if (n_stall == 0) fail("no stall seen");
    $display("issues=%0d stalls=%0d", n_issue, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
