// allmod_acc_lane: one serial accumulator lane of the LUT-based workload (part 2).
//
// On load the lane captures the D lookup results of one operand. In the
// template (TREE_W = 0) the first result goes straight into the accumulator
// and the others into a shift register; each following cycle one more is
// added, so the (N+LOG2D)-bit sum of all D results is complete D cycles after
// the load cycle (load counts as the first of the D cycles). One N+LOG2D-bit
// adder is used instead of an adder tree, as the paper proposes for area; the
// design instantiates LANES copies so that, together, they keep up with the
// input rate.
//
// With TREE_W = x > 1 a small x-input adder tree works beside the serial
// adder: the first x results are summed by the tree in the load cycle and only
// the remaining D-x are added serially, which shortens the lane to D-x+1
// cycles (the paper's latency-driven variant; it counts D-x cycles and a
// log2(x)-deep tree, here the tree is combinational within the load cycle).
//
// Timing: load in cycle t -> sum valid and done high in cycle
// t + acc_cycles(D, TREE_W), and held until the next load.
// The shift register that keeps the D results after the lookup is this
// design's own choice (the table outputs change with the next lookup).
module allmod_acc_lane
  import allmod_pkg::*;
#(
  parameter int unsigned N      = N_DEF,
  parameter int unsigned D      = num_luts(N_DEF, K_DEF, MS_DEF),
  parameter int unsigned LOG2D  = log2d(D),
  parameter int unsigned TREE_W = TREE_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic [D-1:0][N-1:0]  vals,
  output logic [N+LOG2D-1:0]   sum,
  output logic                 done
);

  localparam int unsigned TW   = (TREE_W == 0) ? 1 : TREE_W;  // results taken at load
  localparam int unsigned NSER = D - TW;                      // serial additions after load
  localparam int unsigned CW   = $clog2(D + 1);

  if (TREE_W > D) begin : g_bad_tree
    $error("allmod_acc_lane: TREE_W must not exceed D");
  end

  logic [D-1:0][N-1:0] pend;    // results still to be added, pend[1] next
  logic [CW-1:0]       left;    // number of results still to be added
  logic                active;
  logic [N+LOG2D-1:0]  tree_sum;

  // the adder tree over the first TW results (a single pass-through for TW=1)
  always_comb begin
    tree_sum = '0;
    for (int i = 0; i < TW; i++)
      tree_sum += (N+LOG2D)'(vals[i]);
  end

  always_ff @(posedge clk) begin
    if (load) begin
      sum  <= tree_sum;
      pend <= vals >> (N * (TW - 1));
    end else if (left != '0) begin
      sum  <= sum + (N+LOG2D)'(pend[1]);
      pend <= pend >> N;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      left   <= '0;
      active <= 1'b0;
    end else if (load) begin
      left   <= CW'(NSER);
      active <= 1'b1;
    end else if (left != '0) begin
      left   <= left - 1'b1;
    end
  end

  assign done = active && (left == '0);

endmodule
