// treegrng -- binary-tree Gaussian random number generator, one sample per clock.
//
// Each of the N_LEVELS tree levels has its own LFSR (length THR_W + level)
// whose low THR_W bits are compared, in cmp_bank, with the constant
// thresholds of that level's nodes.  A chain of multiplexers (level_mux)
// then walks the tree: level 0's comparator gives the MSB, and each further
// level selects the comparator of the node named by the bits above it.  The
// bit string is the bin index; its distribution follows the Gaussian, sampled
// in 2^N_LEVELS equal bins over +-4 sigma (mean 2^(N-1), sigma 2^(N-3)).
//
// Optimisations (parameters):
//   SYMMETRY     right-half nodes reuse the left-half comparators, inverted.
//   CLUSTER_LOG2 per-level nibbles: log2 of adjacent nodes sharing a comparator
//                (default: 2 nodes at level 6, 8 nodes at level 7, giving 56
//                comparators for 8 levels).
//   PIPELINE     1: the comparator outputs are registered, splitting the
//                comparison stage from the multiplexer stage.
//   MUX_PIPE     1: one more register in the middle of the multiplexer chain
//                (the index bits of levels 0..N/2-1 are registered and the
//                comparator outputs of the lower levels are delayed one more
//                clock to stay aligned), for long sample widths.
//   MUX_FIRST    1: levels 1.. select their threshold first and use a single
//                comparator (thr_mux_cmp) instead of a comparator bank and a
//                multiplexer; smaller, slower, and without pipeline registers.
//
// Interface:
//   clk, rst      synchronous active-high reset; one edge with rst high loads
//                 every LFSR with its unique seed.
//   valid         sample holds a generated value: !rst delayed by the number
//                 of pipeline stages (the LFSRs must have seen one reset edge).
//   index         the tree path, offset binary (bin 0 = -4 sigma).
//   sample        the same value in two's complement with N_LEVELS-3
//                 fraction bits: for 8 levels, fixed<3,5> in units of sigma
//                 (the lower edge of the bin).
// Timing: a new sample every clock.  Latency, counted from the edge that
// loads the LFSR state a sample is made of: 1 + PIPELINE + MUX_PIPE clocks
// (1 without pipelining, where the sample is combinational from the LFSR
// registers; 2 with the default comparator pipeline).
//
// From the paper: the structure (one LFSR per level, comparators, mux chain
// after the comparators, Fig. 2), symmetry and cluster optimisations with the
// Table II sizes, pipeline registers behind the comparators and optionally
// inside the multiplexer chain, the 8-level 8-bit-threshold 4-sigma
// configuration and its fixed<3,5> output format.  Own choices: LFSR
// lengths, polynomials and seeds, where the multiplexer chain is split, the
// structure of the multiplexer-first level, the
// valid flag and the reset style.
module treegrng import treegrng_pkg::*; #(
  parameter int unsigned              N_LEVELS     = N_LEVELS_DEF,
  parameter int unsigned              THR_W        = THR_W_DEF,
  parameter bit                       SYMMETRY     = 1'b1,
  parameter logic [4*MAX_LEVELS-1:0]  CLUSTER_LOG2 = CLUSTER_LOG2_DEF,
  parameter bit                       PIPELINE     = 1'b1,
  parameter bit                       MUX_PIPE     = 1'b0,
  parameter bit                       MUX_FIRST    = 1'b0
) (
  input  logic                clk,
  input  logic                rst,
  output logic                valid,
  output logic [N_LEVELS-1:0] index,
  output logic [N_LEVELS-1:0] sample
);

  localparam int unsigned SPLIT = N_LEVELS / 2;           // first level after the mux register
  localparam int unsigned LAT   = 32'(PIPELINE) + 32'(MUX_PIPE);

  if (N_LEVELS < 3 || N_LEVELS > MAX_LEVELS) begin : g_bad_levels
    $error("treegrng: N_LEVELS must be 3..%0d", MAX_LEVELS);
  end

  if (MUX_FIRST && (PIPELINE || MUX_PIPE)) begin : g_bad_pipe
    $error("treegrng: the pipeline registers need the multiplexers after the comparators");
  end

  // path[i] holds the first i+1 index bits (level 0 in bit i), zero-extended.
  logic [N_LEVELS-1:0] path [N_LEVELS];
  // index bits of levels 0..SPLIT-1 as seen by level SPLIT's multiplexer
  logic [SPLIT-1:0]    path_mid;

  if (MUX_PIPE) begin : g_mid_reg
    always_ff @(posedge clk) path_mid <= path[SPLIT-1][SPLIT-1:0];
  end else begin : g_mid_wire
    assign path_mid = path[SPLIT-1][SPLIT-1:0];
  end

  for (genvar i = 0; i < N_LEVELS; i++) begin : g_level
    localparam int unsigned LEN   = lfsr_len(i, THR_W);
    localparam int unsigned CLOG  = cluster_log2(CLUSTER_LOG2, i);
    localparam int unsigned N_CMP = n_comparators(i, SYMMETRY, CLOG);

    logic [LEN-1:0]   lfsr_state;
    logic             bit_i;

    lfsr #(.LEN(LEN), .SEED(lfsr_seed(i, LEN))) u_lfsr (
      .clk   (clk),
      .rst   (rst),
      .state (lfsr_state)
    );

    if (MUX_FIRST && i > 0) begin : g_mux_first
      // threshold selected by the previous bits, then one comparator
      thr_mux_cmp #(
        .N_LEVELS     (N_LEVELS),
        .LEVEL        (i),
        .THR_W        (THR_W),
        .SYMMETRY     (SYMMETRY),
        .CLUSTER_LOG2 (CLOG)
      ) u_tmc (
        .urn    (lfsr_state[THR_W-1:0]),
        .prefix (path[i-1][i-1:0]),
        .bit_o  (bit_i)
      );
      assign path[i] = N_LEVELS'({path[i-1][i-1:0], bit_i});
    end else begin : g_cmp_first
      // all comparators of the level, then the multiplexer
      logic [N_CMP-1:0] dec;     // comparator outputs
      logic [N_CMP-1:0] dec_p;   // after the comparator pipeline register
      logic [N_CMP-1:0] dec_s;   // as seen by the multiplexer

      cmp_bank #(
        .N_LEVELS     (N_LEVELS),
        .LEVEL        (i),
        .THR_W        (THR_W),
        .SYMMETRY     (SYMMETRY),
        .CLUSTER_LOG2 (CLOG)
      ) u_bank (
        .urn (lfsr_state[THR_W-1:0]),
        .dec (dec)
      );

      if (PIPELINE) begin : g_pipe
        always_ff @(posedge clk) dec_p <= dec;
      end else begin : g_nopipe
        assign dec_p = dec;
      end

      if (MUX_PIPE && i >= SPLIT) begin : g_align
        always_ff @(posedge clk) dec_s <= dec_p;
      end else begin : g_noalign
        assign dec_s = dec_p;
      end

      if (i == 0) begin : g_root
        assign bit_i   = dec_s[0];
        assign path[0] = N_LEVELS'(bit_i);
      end else begin : g_sel
        logic [i-1:0] prefix;
        if (i == SPLIT) begin : g_from_mid
          assign prefix = path_mid;
        end else begin : g_from_chain
          assign prefix = path[i-1][i-1:0];
        end

        level_mux #(
          .LEVEL        (i),
          .SYMMETRY     (SYMMETRY),
          .CLUSTER_LOG2 (CLOG),
          .N_CMP        (N_CMP)
        ) u_mux (
          .prefix (prefix),
          .dec    (dec_s),
          .bit_o  (bit_i)
        );
        assign path[i] = N_LEVELS'({prefix, bit_i});
      end
    end
  end

  assign index  = path[N_LEVELS-1];
  assign sample = {~index[N_LEVELS-1], index[N_LEVELS-2:0]};

  if (LAT > 0) begin : g_valid_pipe
    logic [LAT-1:0] valid_q;
    always_ff @(posedge clk) valid_q <= LAT'({valid_q, ~rst});
    assign valid = valid_q[LAT-1];
  end else begin : g_valid_comb
    assign valid = ~rst;
  end

endmodule
