// lfsr -- uniform random number generator of one TreeGRNG level.
//
// A maximal-length Fibonacci linear feedback shift register: every clock the
// state shifts one place towards the MSB and the XOR of the tapped bits
// enters at bit 0, so a LEN-bit register runs through all 2^LEN - 1 non-zero
// states before repeating.  The tree gives each level an LFSR of a different
// length so that the combined period, the least common multiple of the
// individual periods, is large.
//
// Interface: clk, synchronous active-high rst, state (the whole register;
// the tree compares its low bits with the node thresholds).
// Timing: one clock edge with rst high loads SEED; every later edge advances
// the sequence by one step, giving a new uniform number every cycle.
//
// From the paper: one LFSR per level, different lengths per level, a unique
// seed reloaded in one cycle after reset.  Own choices: the Fibonacci form,
// the polynomials (treegrng_pkg::lfsr_taps) and the seed values.
module lfsr import treegrng_pkg::*; #(
  parameter int unsigned LEN  = 8,
  parameter logic [31:0] SEED = 32'h0000_0001,
  parameter logic [31:0] TAPS = lfsr_taps(LEN)
) (
  input  logic           clk,
  input  logic           rst,
  output logic [LEN-1:0] state
);

  if (LEN < 2 || LEN > MAX_LFSR_LEN || TAPS == 32'h0) begin : g_bad_len
    $error("lfsr: no feedback polynomial for length %0d", LEN);
  end
  if (SEED[LEN-1:0] == '0) begin : g_bad_seed
    $error("lfsr: the seed must not be zero");
  end

  always_ff @(posedge clk) begin
    if (rst) state <= SEED[LEN-1:0];
    else     state <= {state[LEN-2:0], ^(state & TAPS[LEN-1:0])};
  end

endmodule
