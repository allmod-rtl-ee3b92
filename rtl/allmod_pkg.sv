// allmod_pkg: constants shared by the ALLMod modular-reduction datapath.
//
// The design computes R = A mod M for a 2N-bit A and a fixed N-bit modulus M.
// A is split in two workloads: the high N-MS bits go to a bank of D lookup
// tables (K address bits each) whose results are summed serially, and the low
// N+MS bits go to an iterative shift-and-subtract unit. The defaults are the
// 128-bit configuration: N=128, K=8, MS=15, hence D=ceil(113/8)=15 tables,
// LOG2D=4 extra sum bits and LANES=8 accumulator/subtractor lane pairs, which
// sustain 0.5 operations per cycle. MS is the split point "m"; the balanced
// choice is m=(n+k)/(k+1), 15 for n=128. D is rounded up because the top
// segment may be narrower than K bits. TREE_W, the number of lookup results
// summed by a small adder tree beside the serial accumulator, is 0 in the
// template; a larger value (or an MS above D+1) gives the latency- or
// area-driven variants, and the helper functions below give their timing.
package allmod_pkg;

  localparam int unsigned N_DEF     = 128;
  localparam int unsigned K_DEF     = 8;
  localparam int unsigned MS_DEF    = 15;
  localparam int unsigned LANES_DEF = 8;
  localparam int unsigned TREE_DEF  = 0;   // no adder tree: the balanced template

  // number of K-bit segments covering the high N-MS bits
  function automatic int unsigned num_luts(int unsigned n, int unsigned k, int unsigned ms);
    return (n - ms + k - 1) / k;
  endfunction

  // bits needed to hold the number of accumulated terms: ceil(log2(d)), at least 1
  function automatic int unsigned log2d(int unsigned d);
    return (d <= 2) ? 1 : $clog2(d);
  endfunction

  // address bits of a table port: 2^k first-round rows plus 2^log2d
  // second-round rows in the last table
  function automatic int unsigned tbl_aw(int unsigned k, int unsigned l2d);
    return $clog2((1 << k) + (1 << l2d));
  endfunction

  // cycles an accumulator lane needs, load cycle included: with no adder
  // tree (tw = 0) the first result is loaded and d-1 are added serially;
  // with a tw-input tree the first tw results are summed in the load cycle
  // and the other d-tw are added serially
  function automatic int unsigned acc_cycles(int unsigned d, int unsigned tw);
    return (tw <= 1) ? d : d - tw + 1;
  endfunction

  // cycle (after acceptance in cycle 0) in which a lane is read: both the
  // lookup sum (loaded in cycle 1) and the ms-step iterative remainder
  // (started in cycle 0) must be complete; a lane is busy this many cycles
  function automatic int unsigned read_cycle(int unsigned d, int unsigned ms, int unsigned tw);
    return (acc_cycles(d, tw) + 1 > ms) ? acc_cycles(d, tw) + 1 : ms;
  endfunction

  // end-to-end latency from acceptance to out_valid: lane read cycle, then
  // second lookup (1), fusion (1) and two adjustment passes (2). For the
  // balanced template (tw = 0, ms <= d+1) this is d+5.
  function automatic int unsigned latency(int unsigned d, int unsigned ms, int unsigned tw);
    return read_cycle(d, ms, tw) + 4;
  endfunction

endpackage
