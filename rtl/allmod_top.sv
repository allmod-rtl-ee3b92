// allmod_top: ALLMod hybrid-workload modular reducer, R = A mod M.
//
// A is 2N bits, M is a fixed N-bit modulus with its top bit set. A is split
// at bit N+MS: the high N-MS bits are reduced by table lookup, the low N+MS
// bits by iterative subtraction, and the two partial results are fused and
// adjusted. In the balanced template (TREE_W = 0, MS <= D+1):
//   cycle 0      accept A; D tables are read in parallel (first round);
//                the low N+MS bits enter the lane's iterative subtractor,
//                which runs its MS steps in cycles 0 .. MS-1
//   1 .. D       the lane's serial accumulator sums the D results
//                (N+LOG2D bits)
//   RD = D+1     the lane is read; the sum's top LOG2D bits address the
//                second-round table, the low N bits and the remainder are kept
//   RD+1         fusion: low sum bits + second-round result + remainder
//   RD+2, RD+3   two adjustment passes (subtract 2M or M by sign)
//   RD+4         out_valid, out_r = A mod M
// The latency is D+5 cycles (20 for the default N=128, K=8, MS=15, D=15).
// LANES = 8 lane pairs let a new operand enter every other cycle on average
// (LANES per RD cycles = 0.5 per cycle); in_ready drops when the next lane is
// still busy. Results leave in order with no back-pressure.
//
// Design-space variants: TREE_W > 1 adds an adder tree to each accumulator
// lane (latency-driven), and MS > D+1 moves work to the iterative side
// (area-driven). The lane read cycle then becomes
// RD = max(acc_cycles(D, TREE_W) + 1, MS) and the latency RD+4.
//
// The tables must be loaded through tbl_* before use: table i (0..D-1) at
// row a holds (a * 2^(N+MS+K*i)) mod M, and rows 2^K + h (h < 2^LOG2D) of
// table D-1 hold (h * 2^N) mod M. in_ready is low while tbl_we is high.
//
// Following the paper: the split of A into an N-MS bit lookup workload and an
// N+MS bit iterative workload, D tables of K address bits, serial
// accumulation, second-round lookup of the log2(d) high bits, fusion adder,
// subtract-and-select adjustment, lane duplication d x TP, the optional adder
// tree beside the serial accumulator, and the D+5 cycle latency of its
// template results. Own choices: the handshake, the lane scheduler, where
// the second-round table lives, the two adjustment passes and separate (not
// shared) fusion and adjustment hardware.
module allmod_top
  import allmod_pkg::*;
#(
  parameter int unsigned N     = N_DEF,
  parameter int unsigned K     = K_DEF,
  parameter int unsigned MS    = MS_DEF,
  parameter int unsigned LANES = LANES_DEF,
  parameter int unsigned TREE_W= TREE_DEF,
  parameter int unsigned D     = num_luts(N, K, MS),
  parameter int unsigned LOG2D = log2d(D),
  parameter int unsigned SELW  = (D > 1) ? $clog2(D) : 1,
  parameter int unsigned TAW   = tbl_aw(K, LOG2D)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N-1:0]      modulus,
  // table load port
  input  logic              tbl_we,
  input  logic [SELW-1:0]   tbl_sel,
  input  logic [TAW-1:0]    tbl_addr,
  input  logic [N-1:0]      tbl_data,
  // operand in
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [2*N-1:0]    in_a,
  // result out
  output logic              out_valid,
  output logic [N-1:0]      out_r
);

  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1;
  // cycle in which a lane is read: both workloads of the lane are done
  localparam int unsigned RD = read_cycle(D, MS, TREE_W);

  // ---------------- scheduler ----------------
  logic             issue, read_en;
  logic [LW-1:0]    issue_lane, read_lane;
  logic [LANES-1:0] acc_load;

  allmod_sched #(.LANES(LANES), .RD(RD)) u_sched (
    .clk, .rst_n, .in_valid, .hold(tbl_we), .in_ready,
    .issue, .issue_lane, .acc_load, .read_en, .read_lane
  );

  // ---------------- part 1: tables ----------------
  logic [D-1:0][N-1:0] lut1;
  logic [N-1:0]        lut2;
  logic [LOG2D-1:0]    hi_sum;

  allmod_lut_bank #(.N(N), .K(K), .MS(MS), .D(D), .LOG2D(LOG2D), .TAW(TAW)) u_luts (
    .clk,
    .wr_en(tbl_we), .wr_sel(tbl_sel), .wr_addr(tbl_addr), .wr_data(tbl_data),
    .rd1_en(issue), .hi_bits(in_a[2*N-1:N+MS]), .rd1_data(lut1),
    .rd2_en(read_en), .rd2_addr(hi_sum), .rd2_data(lut2)
  );

  // ---------------- parts 2 and 3: lanes ----------------
  logic [N+LOG2D-1:0] acc_sum  [LANES];
  logic [N:0]         iter_res [LANES];
  logic [LANES-1:0]   acc_done, iter_done;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    allmod_acc_lane #(.N(N), .D(D), .LOG2D(LOG2D), .TREE_W(TREE_W)) u_acc (
      .clk, .rst_n, .load(acc_load[l]), .vals(lut1),
      .sum(acc_sum[l]), .done(acc_done[l])
    );
    allmod_iter_sub #(.N(N), .MS(MS)) u_iter (
      .clk, .rst_n,
      .start(issue && (issue_lane == LW'(l))),
      .x_in(in_a[N+MS-1:0]), .modulus,
      .result(iter_res[l]), .done(iter_done[l])
    );
  end

  // lane read-out (cycle RD)
  logic [N+LOG2D-1:0] rd_sum;
  logic [N:0]         rd_iter;
  assign rd_sum  = acc_sum[read_lane];
  assign rd_iter = iter_res[read_lane];
  assign hi_sum  = rd_sum[N+LOG2D-1:N];

  logic         f_valid;
  logic [N-1:0] f_acc_lo;
  logic [N:0]   f_iter;

  always_ff @(posedge clk) begin
    if (read_en) begin
      f_acc_lo <= rd_sum[N-1:0];
      f_iter   <= rd_iter;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) f_valid <= 1'b0;
    else        f_valid <= read_en;
  end

  // ---------------- part 4: fusion ----------------
  logic         s_valid;
  logic [N+1:0] s_sum;

  allmod_fuse #(.N(N)) u_fuse (
    .clk, .rst_n, .in_valid(f_valid),
    .acc_lo(f_acc_lo), .lut2, .iter(f_iter),
    .out_valid(s_valid), .sum(s_sum)
  );

  // ---------------- part 5: adjustment, two passes ----------------
  logic         a_valid, r_valid;
  logic [N+1:0] a_val, r_val;

  allmod_adjust #(.N(N)) u_adj0 (
    .clk, .rst_n, .in_valid(s_valid), .x(s_sum), .modulus,
    .out_valid(a_valid), .y(a_val)
  );
  allmod_adjust #(.N(N)) u_adj1 (
    .clk, .rst_n, .in_valid(a_valid), .x(a_val), .modulus,
    .out_valid(r_valid), .y(r_val)
  );

  assign out_valid = r_valid;
  assign out_r     = r_val[N-1:0];

  // ---------------- rules ----------------
  a_lane_ready : assert property (@(posedge clk) disable iff (!rst_n)
    read_en |-> acc_done[read_lane] && iter_done[read_lane]);
  a_reduced : assert property (@(posedge clk) disable iff (!rst_n)
    out_valid |-> (r_val < (N+2)'(modulus)));
  a_modulus_msb : assert property (@(posedge clk) disable iff (!rst_n)
    issue |-> modulus[N-1]);

endmodule
