// thr_mux_cmp -- one tree level with the multiplexer in front of the comparator.
//
// The alternative arrangement of a level (level >= 1): instead of comparing
// the uniform number with every threshold of the level and then selecting a
// result, the bits of the previous levels (prefix, level 0 in the MSB) first
// select the threshold of the node reached, and a single comparator decides.
// This saves comparators at the cost of a longer path: the compare now waits
// for the multiplexer, which waits for the previous level.
// The threshold table is the same as in cmp_bank (symmetry: a right-half
// node uses its mirror's threshold and inverts the decision; clustering: node
// p uses threshold p >> CLUSTER_LOG2), computed at elaboration time.
//
// Interface: urn (THR_W bits, the level's LFSR output), prefix (LEVEL bits),
// bit_o (this level's index bit).  Purely combinational.
// From the paper: the option of placing the multiplexing stage before the
// comparators.  The paper draws only the other arrangement; this block's
// structure is this design's reading of that sentence.
module thr_mux_cmp import treegrng_pkg::*; #(
  parameter int unsigned N_LEVELS     = N_LEVELS_DEF,
  parameter int unsigned LEVEL        = N_LEVELS_DEF - 1,
  parameter int unsigned THR_W        = THR_W_DEF,
  parameter bit          SYMMETRY     = 1'b1,
  parameter int unsigned CLUSTER_LOG2 = 3,
  localparam int unsigned N_CMP = n_comparators(LEVEL, SYMMETRY, CLUSTER_LOG2)
) (
  input  logic [THR_W-1:0] urn,
  input  logic [LEVEL-1:0] prefix,
  output logic             bit_o
);

  if (LEVEL < 1) begin : g_bad_level
    $error("thr_mux_cmp: level 0 has no multiplexer");
  end

  typedef logic [THR_W-1:0] thr_t;

  function automatic thr_t thr_of(int unsigned g);
    return THR_W'(node_threshold(N_LEVELS, LEVEL, g << CLUSTER_LOG2, 1 << CLUSTER_LOG2, THR_W));
  endfunction

  thr_t             thr_tab [N_CMP];
  for (genvar g = 0; g < N_CMP; g++) begin : g_tab
    assign thr_tab[g]       = thr_of(g);
  end

  logic [LEVEL-1:0] node;
  logic             mirror;
  thr_t             thr;

  always_comb begin
    mirror = SYMMETRY && prefix[LEVEL-1];
    node   = mirror ? ~prefix : prefix;
    thr    = thr_tab[32'(node) >> CLUSTER_LOG2];
    bit_o  = (urn >= thr) ^ mirror;
  end

endmodule
