// allmod_fuse: result fusion adder (part 4).
//
// Adds the three partial results of one operand: the low N bits of the
// accumulated lookup sum (below 2^N <= 2M), the second-round lookup (below M)
// and the iterative remainder (below 2M). The sum is congruent to A mod M,
// below 5M, and at most 2^(N+2)-3, so it fits N+2 bits. One registered stage: in_valid in cycle t ->
// out_valid and sum in cycle t+1. The paper notes that the accumulator adder
// could be reused here; this design keeps a separate adder so that fusion
// overlaps with the accumulation of later operands.
module allmod_fuse
  import allmod_pkg::*;
#(
  parameter int unsigned N = N_DEF
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [N-1:0]  acc_lo,
  input  logic [N-1:0]  lut2,
  input  logic [N:0]    iter,
  output logic          out_valid,
  output logic [N+1:0]  sum
);

  always_ff @(posedge clk) begin
    if (in_valid)
      sum <= (N+2)'(acc_lo) + (N+2)'(lut2) + (N+2)'(iter);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
