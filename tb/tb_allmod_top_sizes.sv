// tb_allmod_top_sizes: runs the end-to-end check on four larger rows of the
// template's size table, side by side:
//   n=256:  K=7, MS=32  -> D=32 tables,  224:288 split,  LANES=16, latency 37;
//   n=512:  K=6, MS=74  -> D=73 tables,  438:586 split,  LANES=37, latency 78;
//   n=1024: K=5, MS=171 -> D=171 tables, 853:1195 split, LANES=86, latency 176;
//   n=2048: K=4, MS=410 -> D=410 tables, 1638:2458 split, latency 415, with
//           LANES=8 instead of the 206 that 0.5 per cycle needs. The lanes
//           are identical copies and only set the rate; 206 lanes of
//           410 x 2048 buffered bits each would make the run too slow.
// The n=512 row has MS = D+1, the largest split the balanced timing allows.
// 16 lanes at n=256 give 16 operations per 33 cycles (a lane is busy D+1
// cycles); 37 lanes at n=512 give 37 per 74 and 86 lanes at n=1024 give 86
// per 172, i.e. 0.5 per cycle.
// Two design-space variants of the 128-bit design run alongside:
//   latency-driven: MS=12, TREE_W=4 -> D=15, lane 12+1 cycles, latency 17,
//                   LANES=7 (7 per 13 cycles);
//   area-driven:    MS=24 -> D=13 tables, lane bound by the 24 iterative
//                   steps, latency 28, LANES=12 (0.5 per cycle).
// Two lower throughputs of the default 128-bit design: LANES=1 and LANES=4
// give 1 and 4 operations per 16 cycles (1/16 and 1/4 per cycle), latency 20.
module tb_allmod_top_sizes;
  int c256, f256, c512, f512, c1k, f1k, c2k, f2k, clat, flat, car, far, ct1, ft1, ct4, ft4;
  bit d256, d512, d1k, d2k, dlat, dar, dt1, dt4;
  int checks, failures;

  allmod_top_e2e #(.N(256), .K(7), .MS(32), .LANES(16)) u_n256 (
    .checks(c256), .failures(f256), .finished(d256));
  allmod_top_e2e #(.N(512), .K(6), .MS(74), .LANES(37)) u_n512 (
    .checks(c512), .failures(f512), .finished(d512));
  allmod_top_e2e #(.N(1024), .K(5), .MS(171), .LANES(86)) u_n1024 (
    .checks(c1k), .failures(f1k), .finished(d1k));
  allmod_top_e2e #(.N(2048), .K(4), .MS(410), .LANES(8)) u_n2048 (
    .checks(c2k), .failures(f2k), .finished(d2k));
  allmod_top_e2e #(.N(128), .K(8), .MS(12), .LANES(7), .TREE_W(4)) u_lat (
    .checks(clat), .failures(flat), .finished(dlat));
  allmod_top_e2e #(.N(128), .K(8), .MS(24), .LANES(12)) u_area (
    .checks(car), .failures(far), .finished(dar));
  allmod_top_e2e #(.LANES(1)) u_tp1 (.checks(ct1), .failures(ft1), .finished(dt1));
  allmod_top_e2e #(.LANES(4)) u_tp4 (.checks(ct4), .failures(ft4), .finished(dt4));

  wire all_done = d256 && d512 && d1k && d2k && dlat && dar && dt1 && dt4;

  initial begin
    fork
      begin
        wait (all_done);
      end
      begin
        #4000000;
        $display("watchdog expired");
      end
    join_any
    checks = c256 + c512 + c1k + c2k + clat + car + ct1 + ct4;
    failures = f256 + f512 + f1k + f2k + flat + far + ft1 + ft4 + (all_done ? 0 : 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
