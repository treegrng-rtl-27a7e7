// treegrng_ref -- behavioural reference model of the TreeGRNG for testbenches.
//
// Keeps its own copy of the per-level LFSRs (stepped with plain integer
// arithmetic) and walks the tree node by node with thresholds it computes
// itself: Gaussian areas by Simpson integration of exp(-x^2/2) at run time,
// independent of the series used by the design.  For every node it stores
// the threshold of the comparator the node uses and whether the node is a
// mirrored (inverted) one.  exp_index is the index the design must produce
// from the current LFSR states; mirror_used / shared_used flag whether that
// walk went through a mirrored node / through a clustered comparator owned
// by another node.  It also keeps a histogram of the design's samples and
// holds the exact output distribution implied by the quantised thresholds
// and the LFSR statistics (model_pmf), with Kolmogorov-Smirnov distances.
// Not synthesizable (real arithmetic, $exp).
module treegrng_ref import treegrng_pkg::*; #(
  parameter int unsigned             N_LEVELS     = 8,
  parameter int unsigned             THR_W        = 8,
  parameter bit                      SYMMETRY     = 1'b1,
  parameter logic [4*MAX_LEVELS-1:0] CLUSTER_LOG2 = CLUSTER_LOG2_DEF
) (
  input  logic                clk,
  input  logic                rst,
  output logic [N_LEVELS-1:0] exp_index,
  output logic                mirror_used,
  output logic                shared_used,
  input  logic                hist_en,     // count hist_val in the histogram
  input  logic [N_LEVELS-1:0] hist_val
);

  localparam int unsigned NB = 1 << N_LEVELS;

  longint unsigned st   [N_LEVELS];
  int unsigned     thr  [N_LEVELS][NB];
  bit              inv  [N_LEVELS][NB];
  bit              share[N_LEVELS][NB];
  real             model_pmf [NB];

  function automatic real pdf(real x);
    return $exp(-x * x / 2.0);
  endfunction

  // Area under exp(-x^2/2) between a and b (Simpson, 64 intervals).
  function automatic real area(real a, real b);
    real h, s;
    h = (b - a) / 64.0;
    s = pdf(a) + pdf(b);
    for (int k = 1; k < 64; k++) s += ((k % 2) != 0 ? 4.0 : 2.0) * pdf(a + k * h);
    return s * h / 3.0;
  endfunction

  function automatic real edge_x(real j);
    return (j - NB / 2.0) * 4.0 / (NB / 2.0);
  endfunction

  function automatic int unsigned ref_thr(int unsigned lvl, int unsigned first,
                                          int unsigned cnt);
    real w, l, c;
    w = real'(NB) / (2.0 ** lvl);
    l = 0.0; c = 0.0;
    for (int unsigned p = first; p < first + cnt; p++) begin
      l += area(edge_x(p * w), edge_x(p * w + w / 2.0));
      c += area(edge_x(p * w), edge_x(p * w + w));
    end
    return $rtoi(l / c * ((2.0 ** THR_W) - 1.0) + 0.5);
  endfunction

  // Probability that the low THR_W bits of a maximal LEN-bit LFSR are >= t.
  function automatic real p_ge(int unsigned t, int unsigned len);
    real per, rep, cnt;
    per = (2.0 ** len) - 1.0;
    rep = 2.0 ** (len - THR_W);               // occurrences of each non-zero value
    if (t == 0) return 1.0;
    cnt = ((2.0 ** THR_W) - t) * rep;         // values t .. 2^W-1, none is zero
    return cnt / per;
  endfunction

  initial begin
    for (int unsigned i = 0; i < N_LEVELS; i++) begin
      int unsigned c, nodes;
      c = 1 << int'(CLUSTER_LOG2[4*i +: 4]);
      nodes = 1 << i;
      for (int unsigned p = 0; p < nodes; p++) begin
        int unsigned k, g;
        inv[i][p] = SYMMETRY && (i > 0) && (p >= nodes / 2);
        k = inv[i][p] ? (nodes - 1 - p) : p;
        g = k / c;
        thr[i][p]   = ref_thr(i, g * c, c);
        share[i][p] = (c > 1) && (k != g * c);
      end
    end
    // exact output distribution of the quantised tree
    for (int unsigned b = 0; b < NB; b++) begin
      real pr;
      int unsigned p;
      pr = 1.0;
      p = 0;
      for (int unsigned i = 0; i < N_LEVELS; i++) begin
        bit bt;
        real pr_right;
        bt = b[N_LEVELS-1-i];
        pr_right = p_ge(thr[i][p], THR_W + i);
        if (inv[i][p]) pr_right = 1.0 - pr_right;
        pr = pr * (bt ? pr_right : 1.0 - pr_right);
        p = (p << 1) | int'(bt);
      end
      model_pmf[b] = pr;
    end
  end

  always_ff @(posedge clk) begin
    for (int unsigned i = 0; i < N_LEVELS; i++) begin
      longint unsigned len, mask, taps, s;
      len  = 64'(THR_W + i);
      mask = (64'd1 << len) - 1;
      taps = 64'(lfsr_taps(len));
      s    = st[i];
      if (rst) st[i] <= 64'(lfsr_seed(i, len)) & mask;
      else     st[i] <= ((s << 1) | 64'($countones(s & taps) % 2)) & mask;
    end
  end

  always_comb begin
    int unsigned p;
    p = 0;
    mirror_used = 1'b0;
    shared_used = 1'b0;
    for (int unsigned i = 0; i < N_LEVELS; i++) begin
      int unsigned u;
      bit bt;
      u  = int'(st[i] & ((64'd1 << THR_W) - 1));
      bt = inv[i][p] ? (u < thr[i][p]) : (u >= thr[i][p]);
      mirror_used = mirror_used | inv[i][p];
      shared_used = shared_used | share[i][p];
      p = (p << 1) | int'(bt);
    end
    exp_index = N_LEVELS'(p);
  end

  // Histogram of the design's samples, fed by the testbench.
  longint unsigned hist [NB];
  longint unsigned hist_n;
  initial begin
    for (int unsigned b = 0; b < NB; b++) hist[b] = 0;
    hist_n = 0;
  end
  always @(posedge clk) begin
    if (hist_en) begin
      hist[hist_val] <= hist[hist_val] + 1;
      hist_n         <= hist_n + 1;
    end
  end

  // Kolmogorov-Smirnov distance from the Gaussian truncated to +-4 sigma,
  // each bin standing for its centre: of the exact model (emp = 0) or of
  // the histogram (emp = 1).
  function automatic real ks_vs_gauss(bit emp);
    real tot, cum, g, d, ks;
    tot = area(-4.0, 4.0);
    cum = 0.0;
    ks = 0.0;
    for (int unsigned b = 0; b < NB; b++) begin
      g = area(-4.0, edge_x(b + 0.5)) / tot;
      d = g - cum;       if (d < 0) d = -d; if (d > ks) ks = d;
      cum += emp ? real'(hist[b]) / real'(hist_n) : model_pmf[b];
      d = cum - g;       if (d < 0) d = -d; if (d > ks) ks = d;
    end
    return ks;
  endfunction

  // KS distance between the histogram and the exact model distribution.
  function automatic real ks_emp_model();
    real ce, cm, d, ks;
    ce = 0.0; cm = 0.0; ks = 0.0;
    for (int unsigned b = 0; b < NB; b++) begin
      ce += real'(hist[b]) / real'(hist_n);
      cm += model_pmf[b];
      d = ce - cm; if (d < 0) d = -d; if (d > ks) ks = d;
    end
    return ks;
  endfunction

endmodule
