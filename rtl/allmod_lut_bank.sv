// allmod_lut_bank: the lookup tables of the LUT-based workload (part 1).
//
// The high N-MS bits of the operand are cut into D segments of K bits,
// segment i being bits [K*i +: K] of hi_bits (the top segment is narrower and
// zero-extended). Table i holds, at row a, the value (a * 2^(N+MS+K*i)) mod M,
// so the D tables together reduce the high workload in one parallel lookup.
// The accumulated sum of those D results is N+LOG2D bits wide; its top LOG2D
// bits h are reduced by a second-round lookup of (h * 2^N) mod M. That second
// table lives in extra rows 2^K .. 2^K+2^LOG2D-1 of the last table, which its
// K-bit first-round address never reaches, and is read through a second read
// port so that a first-round lookup of a new operand and a second-round
// lookup of an older one can happen in the same cycle.
//
// Table contents depend only on M and are computed off line; they are written
// through the wr_* port (table wr_sel, row wr_addr). Reads are synchronous:
// rd1_data / rd2_data are valid the cycle after rd1_en / rd2_en and hold
// their value until the next enabled read. Each table maps to one block RAM
// (256x128 bits, plus 16 rows for the last one, fits a 36 Kb BRAM).
//
// Following the paper: D tables with K-bit address and N-bit entries, the
// one-cycle parallel lookup, the second-round lookup of the log2(d) high sum
// bits. Own choices: where the second-round table is stored, the dedicated
// second read port, and the write port.
module allmod_lut_bank
  import allmod_pkg::*;
#(
  parameter int unsigned N     = N_DEF,
  parameter int unsigned K     = K_DEF,
  parameter int unsigned MS    = MS_DEF,
  parameter int unsigned D     = num_luts(N, K, MS),
  parameter int unsigned LOG2D = log2d(D),
  parameter int unsigned SELW  = (D > 1) ? $clog2(D) : 1,
  parameter int unsigned TAW   = tbl_aw(K, LOG2D)
) (
  input  logic                      clk,
  // table load port
  input  logic                      wr_en,
  input  logic [SELW-1:0]           wr_sel,
  input  logic [TAW-1:0]            wr_addr,
  input  logic [N-1:0]              wr_data,
  // first-round lookup: all D tables in parallel
  input  logic                      rd1_en,
  input  logic [N-MS-1:0]           hi_bits,
  output logic [D-1:0][N-1:0]       rd1_data,
  // second-round lookup of the high sum bits
  input  logic                      rd2_en,
  input  logic [LOG2D-1:0]          rd2_addr,
  output logic [N-1:0]              rd2_data
);

  localparam int unsigned ROWS      = 1 << K;
  localparam int unsigned LAST_ROWS = ROWS + (1 << LOG2D);

  logic [D*K-1:0] hi_pad;
  assign hi_pad = {{(D*K-(N-MS)){1'b0}}, hi_bits};

  for (genvar i = 0; i < D; i++) begin : g_lut
    localparam int unsigned DEPTH = (i == D-1) ? LAST_ROWS : ROWS;
    localparam int unsigned AW    = $clog2(DEPTH);
    logic [N-1:0]  mem [DEPTH];
    logic [AW-1:0] seg, waddr;
    assign seg   = AW'(hi_pad[K*i +: K]);
    assign waddr = AW'(wr_addr);

    always_ff @(posedge clk) begin
      if (wr_en && (wr_sel == SELW'(i)) && (32'(wr_addr) < DEPTH))
        mem[waddr] <= wr_data;
      if (rd1_en)
        rd1_data[i] <= mem[seg];
    end

    if (i == D-1) begin : g_second
      always_ff @(posedge clk) begin
        if (rd2_en)
          rd2_data <= mem[AW'(ROWS + 32'(rd2_addr))];
      end
    end
  end

endmodule
