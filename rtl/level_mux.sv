// level_mux -- threshold selection of one tree level (level >= 1).
//
// The decision bits of levels 0 .. LEVEL-1 (prefix, level 0 in the MSB) name
// the node the walk has reached.  The multiplexer forwards that node's
// comparator output as the level's index bit:
//   * with SYMMETRY, a node in the right half (prefix MSB = 1) uses the
//     comparator of its mirror node ~prefix and inverts it;
//   * with clustering, node p uses comparator p >> CLUSTER_LOG2.
//
// Interface: prefix (LEVEL bits), dec (the level's comparator outputs),
// bit_o (this level's output bit).  Purely combinational.
// From the paper: multiplexer after the comparators, inverted inputs for
// mirrored nodes (Fig. 2-b).
module level_mux #(
  parameter int unsigned LEVEL        = 7,
  parameter bit          SYMMETRY     = 1'b1,
  parameter int unsigned CLUSTER_LOG2 = 3,
  parameter int unsigned N_CMP        = 8
) (
  input  logic [LEVEL-1:0] prefix,
  input  logic [N_CMP-1:0] dec,
  output logic             bit_o
);

  if (LEVEL < 1) begin : g_bad_level
    $error("level_mux: level 0 has no multiplexer");
  end

  logic [LEVEL-1:0] node;
  logic             mirror;

  always_comb begin
    mirror = SYMMETRY && prefix[LEVEL-1];
    node   = mirror ? ~prefix : prefix;
    bit_o  = dec[32'(node) >> CLUSTER_LOG2] ^ mirror;
  end

endmodule
