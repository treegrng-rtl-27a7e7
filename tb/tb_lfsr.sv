// tb_lfsr -- checks the per-level LFSR.
//
// Eight instances, one per level of the default tree (lengths 8 to 15, with
// the seeds the tree gives them), are reset and run for 2^15 clocks.
// Checked for each: one reset edge loads the seed, the state is never zero,
// each step shifts the previous state by one place and enters a new bit 0,
// the first return to the seed happens after exactly 2^LEN - 1 steps
// (maximal length: every non-zero state occurs once per period), and a
// reset in mid-run reloads the seed.
module tb_lfsr;
  import treegrng_pkg::*;

  localparam int unsigned NL = 8;     // levels of the default tree
  localparam int unsigned W0 = 8;     // threshold width: lengths 8 .. 15
  localparam int unsigned LMAX = W0 + NL - 1;

  logic clk = 1'b0;
  logic rst;
  int unsigned checks = 0, failures = 0;
  int unsigned period  [NL];
  bit          seed_ok [NL];
  bit          step_ok [NL];
  bit          zero_seen [NL];
  bit          track;

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  for (genvar i = 0; i < NL; i++) begin : g_l
    localparam int unsigned LEN = W0 + i;
    localparam logic [31:0] SEED = lfsr_seed(i, LEN);
    logic [LEN-1:0] q, q_prev;
    int unsigned t;

    lfsr #(.LEN(LEN), .SEED(SEED)) u_lfsr (.clk(clk), .rst(rst), .state(q));

    initial begin
      period[i] = 0; step_ok[i] = 1'b1; zero_seen[i] = 1'b0; t = 0;
    end
    always @(negedge clk) begin
      seed_ok[i] <= (q == SEED[LEN-1:0]);
      if (track) begin
        t <= t + 1;
        if (q == '0) zero_seen[i] <= 1'b1;
        if (t > 0 && q[LEN-1:1] != q_prev[LEN-2:0]) step_ok[i] <= 1'b0;
        if (period[i] == 0 && q == SEED[LEN-1:0]) period[i] <= t + 1;  // t counts from the first step
      end
      q_prev <= q;
    end
  end

  initial begin
    track = 1'b0;
    rst = 1'b1;
    @(posedge clk);
    @(negedge clk); #1;
    for (int i = 0; i < NL; i++) check(seed_ok[i], $sformatf("level %0d: one reset edge loads the seed", i));
    rst = 1'b0;
    track = 1'b1;
    repeat ((1 << LMAX) + 2) @(posedge clk);
    track = 1'b0;
    for (int i = 0; i < NL; i++) begin
      $display("length %0d: period %0d", W0 + i, period[i]);
      check(period[i] == (1 << (W0 + i)) - 1, $sformatf("length %0d maximal period", W0 + i));
      check(step_ok[i], $sformatf("length %0d shifts by one place per step", W0 + i));
      check(!zero_seen[i], $sformatf("length %0d never zero", W0 + i));
    end
    // mid-run reset
    repeat (37) @(posedge clk);
    rst = 1'b1;
    @(posedge clk);
    @(negedge clk); #1;
    rst = 1'b0;
    for (int i = 0; i < NL; i++) check(seed_ok[i], $sformatf("level %0d: mid-run reset reloads the seed", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat ((1 << LMAX) + 300) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
