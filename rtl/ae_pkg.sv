// ae_pkg -- constants shared by the decision-tree autoencoder.
//
// The default configuration is the benchmark anomaly detector for the
// diphoton-plus-dijet final state: V = 8 input variables, a forest of
// T = 30 deep decision trees of maximum depth D = 6, and N = 8 bit signed
// integers for every input and every estimate (the ap_int<8> precision of
// the reference implementation). Every module takes these as parameter
// defaults, so a different configuration is a matter of overriding V, T,
// D and N at the top.
//
// The width helpers size the distance accumulators so that they never
// overflow: |a - b| of two N-bit signed numbers is at most 2^N - 1, a
// tree's distance is a sum of V of those, the score a sum of T trees.
package ae_pkg;

  localparam int unsigned V_DEF = 8;   // input variables per event
  localparam int unsigned T_DEF = 30;  // trees in the forest
  localparam int unsigned D_DEF = 6;   // maximum tree depth
  localparam int unsigned N_DEF = 8;   // bits per variable (signed)

  // Pipeline depth of the whole processor, input port to score port.
  // bus tap (1) + find bin (2) + return estimate (1) + distance (1) + sum (1)
  localparam int unsigned LATENCY = 6;

  // Width of one tree's distance, sum over V of values up to 2^N - 1.
  function automatic int unsigned tree_dist_width(int unsigned v, int unsigned n);
    return $clog2(v * ((1 << n) - 1) + 1);
  endfunction

  // Width of the anomaly score, sum over T trees.
  function automatic int unsigned score_width(int unsigned t, int unsigned v, int unsigned n);
    return $clog2(t * v * ((1 << n) - 1) + 1);
  endfunction

  // Index width that can hold values 0 .. count-1 (at least one bit).
  function automatic int unsigned idx_width(int unsigned count);
    return (count > 1) ? $clog2(count) : 1;
  endfunction

endpackage
