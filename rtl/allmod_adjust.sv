// allmod_adjust: final adjustment by subtraction (part 5).
//
// Two subtractors form x-M and x-2M in parallel; their sign bits drive a
// multiplexer that passes x-2M if it is not negative, else x-M if that is not
// negative, else x. An input below 5M leaves the stage below 3M, and an input
// below 3M leaves it fully reduced (below M), so the design places two of
// these stages in a row after the fusion adder. One registered stage:
// in_valid in cycle t -> out_valid and y in cycle t+1.
// Following the paper: the two subtractors (by M and by M<<1), the sign-driven
// multiplexer. Own choice: two passes, and no reuse of the iterative
// subtractor for this step.
module allmod_adjust
  import allmod_pkg::*;
#(
  parameter int unsigned N = N_DEF
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [N+1:0]  x,
  input  logic [N-1:0]  modulus,
  output logic          out_valid,
  output logic [N+1:0]  y
);

  logic [N+2:0] d1, d2;   // one extra bit: the sign
  logic [N+1:0] sel;

  always_comb begin
    d1 = {1'b0, x} - (N+3)'(modulus);
    d2 = {1'b0, x} - ((N+3)'(modulus) << 1);
    if (!d2[N+2])      sel = d2[N+1:0];
    else if (!d1[N+2]) sel = d1[N+1:0];
    else               sel = x;
  end

  always_ff @(posedge clk) begin
    if (in_valid)
      y <= sel;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
