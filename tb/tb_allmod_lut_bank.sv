// tb_allmod_lut_bank: self-checking test of the lookup-table bank.
// Every row of every table is written with a value derived from (table, row)
// by a hash; random operands are then looked up in the first round and random
// sum-high values in the second round, in the same cycles, and each result is
// compared with the hash of the row that should have been addressed. It also
// checks the one-cycle read latency and that outputs hold without rd*_en.
module tb_allmod_lut_bank;
  import allmod_pkg::*;
  localparam int unsigned N = N_DEF, K = K_DEF, MS = MS_DEF;
  localparam int unsigned D = num_luts(N, K, MS), LOG2D = log2d(D);
  localparam int unsigned SELW = $clog2(D);
  localparam int unsigned TAW = tbl_aw(K, LOG2D);

  logic clk = 0;
  always #5 clk = ~clk;

  logic              wr_en = 0;
  logic [SELW-1:0]   wr_sel;
  logic [TAW-1:0]        wr_addr;
  logic [N-1:0]      wr_data;
  logic              rd1_en = 0, rd2_en = 0;
  logic [N-MS-1:0]   hi_bits;
  logic [D-1:0][N-1:0] rd1_data;
  logic [LOG2D-1:0]  rd2_addr;
  logic [N-1:0]      rd2_data;

  int checks = 0, failures = 0;

  allmod_lut_bank dut (.*);

  function automatic logic [N-1:0] hashv(int unsigned t, int unsigned r);
    logic [N-1:0] v;
    v = '0;
    for (int w = 0; w < N/32; w++) v[32*w +: 32] = (t * 32'h9E3779B1) ^ (r * 32'h85EBCA77) ^ (w * 32'hC2B2AE3D) ^ 32'h1234_5678;
    return v;
  endfunction

  task automatic check(input string what, input logic [N-1:0] got, exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-MS-1:0] a;
    logic [LOG2D-1:0] h;
    // load all tables, second-round rows included in the last one
    for (int t = 0; t < D; t++) begin
      automatic int unsigned rows = (t == D-1) ? (1 << K) + (1 << LOG2D) : (1 << K);
      for (int r = 0; r < rows; r++) begin
        @(negedge clk);
        wr_en = 1; wr_sel = SELW'(t); wr_addr = TAW'(r); wr_data = hashv(t, r);
      end
    end
    @(negedge clk); wr_en = 0;
    for (int it = 0; it < 300; it++) begin
      for (int w = 0; w < (N-MS+31)/32; w++) a[32*w +: 32] = $urandom;
      hi_bits = a; h = LOG2D'($urandom);
      rd1_en = 1; rd2_en = 1; rd2_addr = h;
      @(negedge clk);
      rd1_en = 0; rd2_en = 0;
      hi_bits = ~a; rd2_addr = ~h;     // must not disturb the held outputs
      for (int t = 0; t < D; t++) begin
        logic [D*K-1:0] pad;
        pad = (D*K)'(a);
        check($sformatf("table %0d", t), rd1_data[t], hashv(t, int'(pad[K*t +: K])));
      end
      check("second round", rd2_data, hashv(D-1, (1 << K) + int'(h)));
      @(negedge clk);
      check("hold", rd2_data, hashv(D-1, (1 << K) + int'(h)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
