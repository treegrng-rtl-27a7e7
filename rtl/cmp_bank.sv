// cmp_bank -- all comparators of one level of the tree.
//
// Level LEVEL of an N_LEVELS-deep tree has 2^LEVEL nodes, each with its own
// left/right probability.  The bank instantiates one constant comparator
// (coinflip) per distinct threshold and feeds all of them the same uniform
// number, the level's LFSR output:
//   * SYMMETRY = 1: for a symmetric PDF, node p and its mirror ~p have
//     complementary probabilities, so only the nodes of the left half
//     (index MSB 0) get comparators; the right half reuses them inverted
//     (done in level_mux).  Level 0 keeps its one node.
//   * CLUSTER_LOG2 = c: 2^c adjacent nodes share one comparator whose
//     threshold is the pooled probability of the cluster,
//     sum(left areas) / sum(combined areas).
// Comparator g serves nodes g*2^c .. g*2^c + 2^c - 1.
//
// Interface: urn (THR_W bits), dec (one decision bit per comparator).
// Purely combinational; the top may register dec (pipelining).
// From the paper: symmetry and clustering, comparator counts of Table II.
// Own choice: the value of the shared threshold of a cluster.
module cmp_bank import treegrng_pkg::*; #(
  parameter int unsigned N_LEVELS     = N_LEVELS_DEF,
  parameter int unsigned LEVEL        = N_LEVELS_DEF - 1,
  parameter int unsigned THR_W        = THR_W_DEF,
  parameter bit          SYMMETRY     = 1'b1,
  parameter int unsigned CLUSTER_LOG2 = 3,
  localparam int unsigned N_CMP = n_comparators(LEVEL, SYMMETRY, CLUSTER_LOG2)
) (
  input  logic [THR_W-1:0] urn,
  output logic [N_CMP-1:0] dec
);

  localparam int unsigned KEPT = (SYMMETRY && LEVEL > 0) ? (1 << (LEVEL - 1)) : (1 << LEVEL);
  if ((1 << CLUSTER_LOG2) > KEPT) begin : g_bad_cluster
    $error("cmp_bank: cluster of %0d nodes exceeds the %0d nodes of level %0d",
           1 << CLUSTER_LOG2, KEPT, LEVEL);
  end

  for (genvar g = 0; g < N_CMP; g++) begin : g_cmp
    localparam int unsigned  C = 1 << CLUSTER_LOG2;
    localparam logic [THR_W-1:0] T = THR_W'(node_threshold(N_LEVELS, LEVEL, g * C, C, THR_W));
    coinflip #(.W(THR_W), .THRESHOLD(T)) u_flip (
      .urn   (urn),
      .heads (dec[g])
    );
  end

endmodule
