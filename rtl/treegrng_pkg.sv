// treegrng_pkg -- shared constants and design-time functions of the binary-tree
// Gaussian random number generator (TreeGRNG).
//
// A TreeGRNG produces an N-bit sample by walking a binary tree of N levels:
// at every node a biased coin flip (a uniform random number compared with a
// hardwired threshold) decides whether the walk goes left (bit 0) or right
// (bit 1).  The bits of the walk, MSB first, form the output bin index.  The
// output range is cut into 2^N equal bins covering -TAIL_SIGMA..+TAIL_SIGMA
// standard deviations of a zero-mean Gaussian, so the index has mean 2^(N-1)
// and sigma 2^(N-3) for a 4-sigma tail.
//
// Everything in this package is evaluated at elaboration time; nothing here
// becomes hardware.  It holds:
//   * node_threshold(): the quantised comparator threshold of a tree node (or
//     of a cluster of adjacent nodes sharing one comparator),
//       T = round( Area_left / Area_combined * (2^THR_W - 1) ),
//     with the areas taken under the Gaussian PDF over the node's index range.
//     The Gaussian integral is computed with its Taylor series
//       int_0^x exp(-t^2/2) dt = sum_n (-1)^n x^(2n+1) / (2^n n! (2n+1)),
//     the 1/sqrt(2*pi) factor cancelling in the ratio.
//   * n_comparators(): how many comparators a level needs after the symmetry
//     and cluster optimisations.
//   * lfsr_taps() / lfsr_seed(): feedback polynomials (maximal length, for
//     lengths 2..24) and unique non-zero seeds of the per-level LFSRs.
//   * the default configuration: 8 levels, 8-bit thresholds, 4-sigma tail,
//     cluster sizes 2 (level 6) and 8 (level 7).
//
// Follows the paper: the threshold formula, the 4-sigma range, the 8-level /
// 8-bit configuration and the cluster sizes.  Own choices: round-to-nearest
// quantisation, the value of a shared (clustered) threshold (the pooled
// left/combined area ratio of the clustered nodes), the LFSR polynomials,
// lengths and seeds, and the nibble encoding of the cluster sizes.
package treegrng_pkg;

  // Default configuration.
  localparam int unsigned N_LEVELS_DEF = 8;   // output sample width = tree depth
  localparam int unsigned THR_W_DEF    = 8;   // threshold / uniform number width
  localparam int unsigned TAIL_SIGMA   = 4;   // bins cover +-4 sigma
  localparam int unsigned MAX_LEVELS   = 16;  // nibbles in a cluster configuration
  localparam int unsigned MAX_LFSR_LEN = 24;  // longest LFSR with a tap entry

  // Cluster configuration: nibble i holds log2 of the number of adjacent
  // nodes of level i that share one comparator.  Default: level 6 -> 2,
  // level 7 -> 8, all other levels -> 1.
  localparam logic [4*MAX_LEVELS-1:0] CLUSTER_LOG2_DEF = 64'h0000_0000_3100_0000;

  // log2 cluster size of a level, taken from a cluster configuration word.
  function automatic int unsigned cluster_log2(logic [4*MAX_LEVELS-1:0] cfg,
                                               int unsigned level);
    return int'(cfg[4*level +: 4]);
  endfunction

  // Number of comparators of a level.  With symmetry only the nodes of the
  // left half of the curve own comparators (level 0 keeps its single node).
  function automatic int unsigned n_comparators(int unsigned level, bit symmetry,
                                                int unsigned clog2);
    int unsigned nodes;
    nodes = (symmetry && level > 0) ? (1 << (level - 1)) : (1 << level);
    return (nodes >> clog2) > 0 ? (nodes >> clog2) : 1;
  endfunction

  // Unnormalised Gaussian integral from 0 to x (standard normal, sigma = 1).
  function automatic real gauss_int(real x);
    real term, sum;
    term = x;
    sum  = x;
    for (int n = 1; n < 120; n++) begin
      term = term * (-x * x) / (2.0 * n);
      sum  = sum + term / (2.0 * n + 1.0);
    end
    return sum;
  endfunction

  // Position, in sigmas, of the lower edge of bin index j.
  function automatic real bin_edge(int unsigned n_levels, real j);
    real half;
    half = 2.0 ** (n_levels - 1);
    return (j - half) * TAIL_SIGMA / half;
  endfunction

  // Quantised threshold shared by nodes first .. first+count-1 of a level.
  // A node p of level L covers indices [p*w, (p+1)*w), w = 2^(N-L); its left
  // child covers the lower half.  The result is the probability of going
  // left, scaled to the largest THR_W-bit number.
  function automatic int unsigned node_threshold(int unsigned n_levels,
                                                 int unsigned level,
                                                 int unsigned first,
                                                 int unsigned count,
                                                 int unsigned thr_w);
    real w, lo, left, comb, ratio;
    left = 0.0;
    comb = 0.0;
    w = 2.0 ** (n_levels - level);
    for (int unsigned p = first; p < first + count; p++) begin
      lo   = gauss_int(bin_edge(n_levels, p * w));
      left = left + gauss_int(bin_edge(n_levels, p * w + w / 2.0)) - lo;
      comb = comb + gauss_int(bin_edge(n_levels, p * w + w)) - lo;
    end
    ratio = left / comb;
    return $rtoi(ratio * ((2.0 ** thr_w) - 1.0) + 0.5);
  endfunction

  // Maximal-length feedback masks for a Fibonacci LFSR shifting towards the
  // MSB with the XOR of the masked state fed into bit 0.  Bit k of the mask is
  // tap k+1 of the polynomial.  Unsupported lengths return 0.
  function automatic logic [31:0] lfsr_taps(int unsigned len);
    case (len)
      2:  return 32'h0000_0003;
      3:  return 32'h0000_0006;
      4:  return 32'h0000_000C;
      5:  return 32'h0000_0014;
      6:  return 32'h0000_0030;
      7:  return 32'h0000_0060;
      8:  return 32'h0000_00B8;
      9:  return 32'h0000_0110;
      10: return 32'h0000_0240;
      11: return 32'h0000_0500;
      12: return 32'h0000_0829;
      13: return 32'h0000_100D;
      14: return 32'h0000_2015;
      15: return 32'h0000_6000;
      16: return 32'h0000_D008;
      17: return 32'h0001_2000;
      18: return 32'h0002_0400;
      19: return 32'h0004_0023;
      20: return 32'h0009_0000;
      21: return 32'h0014_0000;
      22: return 32'h0030_0000;
      23: return 32'h0042_0000;
      24: return 32'h00E1_0000;
      default: return 32'h0;
    endcase
  endfunction

  // Unique non-zero seed of the LFSR of a level.
  function automatic logic [31:0] lfsr_seed(int unsigned level, int unsigned len);
    logic [31:0] s;
    logic [31:0] mask;
    mask = (len >= 32) ? 32'hFFFF_FFFF : ((32'h1 << len) - 32'h1);
    s = (32'hACE1_2468 ^ (32'(level) * 32'h9E37_79B9)) & mask;
    return (s == 32'h0) ? 32'h1 : s;
  endfunction

  // Length of the LFSR of a level: every level gets a different length,
  // never shorter than the threshold width.
  function automatic int unsigned lfsr_len(int unsigned level, int unsigned thr_w);
    return thr_w + level;
  endfunction

endpackage
