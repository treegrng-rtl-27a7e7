// coinflip -- weighted coin flip of one tree node: a constant comparator.
//
// Compares a W-bit uniform random number with a threshold fixed at design
// time.  heads = 1 (walk goes right, index bit 1) when urn >= THRESHOLD, so
// heads = 0 (left, bit 0) with probability THRESHOLD / (2^W - 1), the
// probability of the left child computed in treegrng_pkg::node_threshold.
// Because THRESHOLD is a constant, synthesis reduces the comparator to a
// small and/or network instead of a full magnitude comparator.  A zero
// threshold (a node that never goes left) is written as a constant 1.
//
// Interface: urn (W bits), heads.  Purely combinational.
// From the paper: the >= comparison against a hardwired threshold.
module coinflip #(
  parameter int unsigned   W         = 8,
  parameter logic [W-1:0]  THRESHOLD = W'(1) << (W - 1)
) (
  input  logic [W-1:0] urn,
  output logic         heads
);

  if (THRESHOLD == '0) begin : g_always
    assign heads = 1'b1;                 // every number is >= 0
  end else begin : g_compare
    assign heads = (urn >= THRESHOLD);
  end

endmodule
