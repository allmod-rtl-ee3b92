// allmod_iter_sub: iterative shift-and-subtract reducer for the low workload (part 3).
//
// On start the unit takes the low N+MS bits of the operand and the modulus
// shifted left by MS. In each of MS cycles, the start cycle being the first,
// it subtracts the shifted modulus if the remainder is not smaller, then
// shifts the modulus right by one, so
// the multiples M<<MS, M<<(MS-1), ..., M<<1 are tried in turn (the classic
// restoring reduction, aligned as in the iterative method). With the top bit
// of M set, x_in < 2^(N+MS) <= 2^(MS+1)*M, and each step halves the bound,
// so after MS steps result < 2M (N+1 bits). The last factor of two is left
// to the adjustment stages. Only bits above the shift amount change in a
// step, so in gates the subtractor is N+1 bits wide; it is written here at
// full width for clarity.
//
// Timing: start in cycle t -> result valid and done high from cycle t+MS
// until the next start. Following the paper: one subtractor and a shifter,
// MS iterations. Own choice: stopping at M<<1 (result below 2M, one bit
// wider than the paper's figure shows).
module allmod_iter_sub
  import allmod_pkg::*;
#(
  parameter int unsigned N  = N_DEF,
  parameter int unsigned MS = MS_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [N+MS-1:0]   x_in,
  input  logic [N-1:0]      modulus,
  output logic [N:0]        result,
  output logic              done
);

  localparam int unsigned CW = $clog2(MS + 1);

  logic [N+MS-1:0] x;
  logic [N+MS-1:0] m_sh;
  logic [CW-1:0]   left;
  logic            active;

  // one subtract step, shared by the start cycle and the later cycles
  logic [N+MS-1:0] cur_x, cur_m, nxt_x;
  always_comb begin
    cur_x = start ? x_in : x;
    cur_m = start ? ((N+MS)'(modulus) << MS) : m_sh;
    nxt_x = (cur_x >= cur_m) ? cur_x - cur_m : cur_x;
  end

  always_ff @(posedge clk) begin
    if (start || (left != '0)) begin
      x    <= nxt_x;
      m_sh <= cur_m >> 1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      left   <= '0;
      active <= 1'b0;
    end else if (start) begin
      left   <= CW'(MS - 1);
      active <= 1'b1;
    end else if (left != '0) begin
      left   <= left - 1'b1;
    end
  end

  assign done   = active && (left == '0);
  assign result = x[N:0];

  // the remainder must fit N+1 bits once the iterations are over
  a_result_width : assert property (@(posedge clk) disable iff (!rst_n)
    done |-> (x >> (N+1)) == '0);

endmodule
