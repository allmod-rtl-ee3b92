// allmod_sched: lane scheduler of the ALLMod pipeline.
//
// The serial accumulator and the iterative subtractor each take about D
// cycles per operand, so LANES copies of each run side by side. Lane l pairs
// accumulator l with subtractor l. Operands are given to lanes round-robin:
// the input is accepted (issue) when the next lane in turn is free, and
// in_ready is low otherwise, which stalls the source. A lane is busy from
// issue (cycle 0) until its results are read by the fusion stage in cycle
// RD (read_cycle() of the package: D+1 in the balanced template); the same
// cycle may already issue a new operand to it, since the lane registers only
// change at the end of that cycle. Per lane a down-counter set to RD at
// issue marks: cycle 1 (counter = RD), when the accumulator captures the
// lookup results (acc_load), and cycle RD (counter = 1), when the lane is
// read (read_en/read_lane). With LANES = 8 and RD = 16 a lane can take a new
// operand every 16 cycles, i.e. 0.5 operations per cycle overall.
// hold blocks issue (used while tables are written).
//
// The lane count follows the paper's duplication rule (d x TP copies);
// the round-robin order, the counters and the ready/valid handshake are
// this design's own.
module allmod_sched
  import allmod_pkg::*;
#(
  parameter int unsigned LANES = LANES_DEF,
  parameter int unsigned RD    = read_cycle(num_luts(N_DEF, K_DEF, MS_DEF), MS_DEF, TREE_DEF),
  parameter int unsigned LW    = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              hold,
  output logic              in_ready,
  output logic              issue,
  output logic [LW-1:0]     issue_lane,
  output logic [LANES-1:0]  acc_load,
  output logic              read_en,
  output logic [LW-1:0]     read_lane
);

  localparam int unsigned CW = $clog2(RD + 1);

  logic [CW-1:0] cnt [LANES];
  logic [LW-1:0] ptr;

  assign in_ready   = (cnt[ptr] <= CW'(1)) && !hold;
  assign issue      = in_valid && in_ready;
  assign issue_lane = ptr;

  always_comb begin
    read_en   = 1'b0;
    read_lane = '0;
    for (int l = 0; l < LANES; l++) begin
      acc_load[l] = (cnt[l] == CW'(RD));
      if (cnt[l] == CW'(1)) begin
        read_en   = 1'b1;
        read_lane = LW'(l);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ptr <= '0;
      for (int l = 0; l < LANES; l++) cnt[l] <= '0;
    end else begin
      for (int l = 0; l < LANES; l++) begin
        if (issue && (ptr == LW'(l)))
          cnt[l] <= CW'(RD);
        else if (cnt[l] != '0)
          cnt[l] <= cnt[l] - 1'b1;
      end
      if (issue)
        ptr <= (ptr == LW'(LANES - 1)) ? '0 : ptr + 1'b1;
    end
  end

  // issues are one per cycle, so at most one lane loads per cycle
  a_one_load : assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(acc_load));

endmodule
