// allmod_top_e2e: parameterized end-to-end check of allmod_top, used by
// tb_allmod_top_sizes to run the larger configurations of the template.
// It is the same procedure as tb_allmod_top: for several moduli (top bit set)
// it computes every table row, (a * 2^(N+MS+K*i)) mod M and (h * 2^N) mod M,
// writes them through the table port, streams edge-case and random 2N-bit
// operands, and compares each result with A mod M, its latency with
// latency(D, MS, TREE_W) and the steady rate with LANES operations per RD
// cycles (RD = read_cycle(D, MS, TREE_W)). It counts input
// stalls, issue blocked by table writes, non-zero second-round lookups and
// each adjustment choice, and fails if one never happened. It reports its
// counts on its outputs and raises finished when done.
module allmod_top_e2e
  import allmod_pkg::*;
#(
  parameter int unsigned N     = N_DEF,
  parameter int unsigned K     = K_DEF,
  parameter int unsigned MS    = MS_DEF,
  parameter int unsigned LANES = LANES_DEF,
  parameter int unsigned TREE_W = TREE_DEF
) (
  output int checks,
  output int failures,
  output bit finished
);
  localparam int unsigned D = num_luts(N, K, MS), LOG2D = log2d(D);
  localparam int unsigned SELW = $clog2(D);
  localparam int unsigned TAW = tbl_aw(K, LOG2D);
  localparam int unsigned LAT = latency(D, MS, TREE_W);
  localparam int unsigned RD = read_cycle(D, MS, TREE_W);

  logic clk = 0;
  always #5 clk = ~clk;

  logic            rst_n = 0;
  logic [N-1:0]    modulus;
  logic            tbl_we = 0;
  logic [SELW-1:0] tbl_sel;
  logic [TAW-1:0]      tbl_addr;
  logic [N-1:0]    tbl_data;
  logic            in_valid = 0, in_ready;
  logic [2*N-1:0]  in_a;
  logic            out_valid;
  logic [N-1:0]    out_r;

  allmod_top #(.N(N), .K(K), .MS(MS), .LANES(LANES), .TREE_W(TREE_W)) dut (.*);

  int cycle = 0;
  initial begin checks = 0; failures = 0; finished = 0; end
  // expected results in acceptance order
  logic [N-1:0] exp_q [$];
  int           acc_cyc_q [$];
  int n_ops = 0, n_out = 0;
  int n_stall = 0, n_hold = 0, n_second = 0;
  int n_a0_keep = 0, n_a0_m = 0, n_a0_2m = 0, n_a1_m = 0, n_a1_2m = 0;

  task automatic fail(input string s);
    failures++;
    if (failures < 10) $display("FAIL @%0d: %s", cycle, s);
  endtask


  // monitor: sampled at negedge, after the posedge has settled
  always @(negedge clk) if (rst_n) begin
    logic [N+2:0] mm;
    mm = (N+3)'(modulus);
    if (in_valid && !in_ready && !tbl_we) n_stall++;
    if (in_valid && tbl_we) n_hold++;
    if (dut.read_en && dut.hi_sum != '0) n_second++;
    if (dut.s_valid) begin
      if (dut.s_sum >= 2*mm) n_a0_2m++; else if (dut.s_sum >= mm) n_a0_m++; else n_a0_keep++;
    end
    if (dut.a_valid) begin
      if (dut.a_val >= 2*mm) n_a1_2m++; else if (dut.a_val >= mm) n_a1_m++;
    end
    if (in_valid && in_ready) begin
      exp_q.push_back(ref_mod(in_a, modulus));
      acc_cyc_q.push_back(cycle);
      n_ops++;
    end
    if (out_valid) begin
      checks += 2;
      if (exp_q.size() == 0) fail("unexpected output");
      else begin
        logic [N-1:0] e; int c;
        e = exp_q.pop_front(); c = acc_cyc_q.pop_front();
        if (out_r !== e) fail($sformatf("result %h exp %h (M=%h)", out_r, e, modulus));
        if (cycle - c != LAT) fail($sformatf("latency %0d exp %0d", cycle - c, LAT));
      end
      n_out++;
    end
    cycle++;
  end

  function automatic logic [N-1:0] rnd_n();
    logic [N-1:0] v;
    for (int w = 0; w < N/32; w++) v[32*w +: 32] = $urandom;
    return v;
  endfunction

  // Reference arithmetic in at most N+32 bits (wide % has a width limit in
  // some simulators): shl_mod(r, s, m) = (r * 2^s) mod m for r < m, taken
  // 32 bits at a time; ref_mod reduces a 2N-bit operand word by word from
  // the top (Horner's rule in base 2^32).
  function automatic logic [N-1:0] shl_mod(input logic [N-1:0] r, input int s,
                                           input logic [N-1:0] m);
    logic [N+31:0] t;
    while (s > 0) begin
      int st;
      st = (s > 32) ? 32 : s;
      t = ((N+32)'(r) << st) % (N+32)'(m);
      r = t[N-1:0];
      s -= st;
    end
    return r;
  endfunction

  function automatic logic [N-1:0] ref_mod(input logic [2*N-1:0] a,
                                           input logic [N-1:0] m);
    logic [N+31:0] t;
    logic [N-1:0] r;
    r = '0;
    for (int w = 2*N/32 - 1; w >= 0; w--) begin
      t = ((N+32)'(r) << 32 | (N+32)'(a[32*w +: 32])) % (N+32)'(m);
      r = t[N-1:0];
    end
    return r;
  endfunction

  // offer_op: keep an operand offered while the tables are written; it must
  // not be accepted
  task automatic load_tables(input logic [N-1:0] m, input bit offer_op);
    logic [N-1:0] base, v;
    logic [N+31:0] t2;
    modulus = m;
    base = shl_mod(N'(1) % m, N + MS, m);        // 2^(N+MS) mod M
    for (int t = 0; t < D; t++) begin
      for (int a = 0; a < (1 << K); a++) begin
        t2 = ((N+32)'(a) * (N+32)'(base)) % (N+32)'(m);
        v = t2[N-1:0];                            // a * 2^(N+MS+K*t) mod M
        tbl_we = 1; tbl_sel = SELW'(t); tbl_addr = TAW'(a); tbl_data = v[N-1:0];
        in_valid = offer_op; in_a = '1;
        @(negedge clk);
      end
      base = shl_mod(base, K, m);
    end
    for (int h = 0; h < (1 << LOG2D); h++) begin
      v = shl_mod(N'(h) % m, N, m);              // h * 2^N mod M
      tbl_we = 1; tbl_sel = SELW'(D-1); tbl_addr = TAW'((1 << K) + h); tbl_data = v[N-1:0];
      @(negedge clk);
    end
    tbl_we = 0; in_valid = 0;
  endtask

  // drive one operand, waiting for acceptance
  task automatic send(input logic [2*N-1:0] a);
    in_valid = 1; in_a = a;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1;
    in_valid = 0;
  endtask

  task automatic drain();
    repeat (LAT + 4) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) fail($sformatf("%0d results missing", exp_q.size()));
    exp_q.delete(); acc_cyc_q.delete();
  endtask

  initial begin
    logic [N-1:0] mods [4];
    mods[0] = {1'b1, {(N-1){1'b0}}} | N'(1);     // just above 2^(N-1)
    mods[1] = rnd_n() | {1'b1, {(N-1){1'b0}}};
    mods[2] = {N{1'b1}};                         // 2^N - 1
    mods[3] = rnd_n() | {1'b1, {(N-1){1'b0}}};
    modulus = mods[0];
    in_a = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int mi = 0; mi < 4; mi++) begin
      logic [N-1:0] m;
      m = mods[mi];
      // a table write while an operand is offered: issue must wait
      load_tables(m, mi == 0);
      @(negedge clk);
      // edge cases, sent one by one
      if (mi == 0) begin
        send('0);
        send((2*N)'(m));
        send((2*N)'(m) - 1);
        send((2*N)'(m) * 7);
        send({rnd_n(), {N{1'b0}}});
        send({{N{1'b0}}, rnd_n()});
        send({(2*N){1'b1}});
      end
      // continuous stream: measure the steady rate
      in_valid = 1; in_a = {rnd_n(), rnd_n()};
      begin
        int n0, c0;
        for (int i = 0; i <= 12 * RD; i++) begin
          @(posedge clk);
          #1;
          if (i == 4 * RD) begin n0 = n_ops; c0 = cycle; end
          in_a = {rnd_n(), rnd_n()};
        end
        checks++;
        if (n_ops - n0 != 8 * LANES) fail($sformatf("rate: %0d ops in %0d cycles", n_ops - n0, cycle - c0));
      end
      // random gaps
      for (int i = 0; i < 150; i++) begin
        in_valid = ($urandom_range(0, 2) != 0);
        in_a = {rnd_n(), rnd_n()};
        if ($urandom_range(0, 7) == 0) in_a[2*N-1 -: 8] = '1;
        @(posedge clk);
        #1;
      end
      in_valid = 0;
      drain();
    end
    checks += 9;
    if (n_stall == 0)   fail("never stalled");
    if (n_hold == 0)    fail("never held by a table write");
    if (n_second == 0)  fail("second-round lookup always zero");
    if (n_a0_keep == 0) fail("adjust pass 0 never kept");
    if (n_a0_m == 0)    fail("adjust pass 0 never subtracted M");
    if (n_a0_2m == 0)   fail("adjust pass 0 never subtracted 2M");
    if (n_a1_m == 0)    fail("adjust pass 1 never subtracted M");
    if (n_a1_2m == 0)   fail("adjust pass 1 never subtracted 2M");
    if (n_out != n_ops) fail("operation count mismatch");
    $display("N=%0d ops=%0d stalls=%0d holds=%0d second=%0d adj0 keep/M/2M=%0d/%0d/%0d adj1 M/2M=%0d/%0d",
             N, n_ops, n_stall, n_hold, n_second, n_a0_keep, n_a0_m, n_a0_2m, n_a1_m, n_a1_2m);
    finished = 1;
  end
endmodule
