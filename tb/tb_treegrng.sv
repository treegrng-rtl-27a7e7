// tb_treegrng -- end-to-end test of the TreeGRNG in its default configuration
// (8 levels, 8-bit thresholds, symmetry + cluster optimisation, pipelined).
//
// A behavioural reference model (treegrng_ref) runs beside the design with
// its own LFSR copies and its own threshold computation; every valid sample
// of the design must equal the model's index from one cycle earlier (the
// pipeline register).  The test also checks:
//   * reset: valid is low during reset, the first sample after reset comes
//     from the seeds exactly one clock after reset is released (latency 2
//     counted from the seed load) and a second reset restarts the same
//     sequence;
//   * throughput: a valid sample on every cycle after the pipeline fills;
//   * the two's complement output (MSB inverted index);
//   * that mirrored nodes (symmetry) and shared comparators (clustering)
//     were used;
//   * statistics over 2^20 samples: histogram against the model's exact
//     distribution (KS distance), mean 127.5 and sigma 32 in index units,
//     and the model's KS distance from the Gaussian.
module tb_treegrng;
  import treegrng_pkg::*;

  localparam int unsigned N  = N_LEVELS_DEF;
  localparam int unsigned NS = 1 << 20;

  logic         clk = 1'b0;
  logic         rst;
  logic         valid;
  logic [N-1:0] index, sample;
  logic [N-1:0] exp_index, exp_d;
  logic         mirror_used, shared_used;
  logic         hist_en;

  int unsigned checks = 0, failures = 0;
  int unsigned n_mirror = 0, n_shared = 0, n_reset_restart = 0, n_latency_ok = 0;

  always #5 clk = ~clk;

  treegrng u_dut (
    .clk    (clk),
    .rst    (rst),
    .valid  (valid),
    .index  (index),
    .sample (sample)
  );

  treegrng_ref #(.N_LEVELS(N), .THR_W(THR_W_DEF), .SYMMETRY(1'b1),
                 .CLUSTER_LOG2(CLUSTER_LOG2_DEF)) u_ref (
    .clk         (clk),
    .rst         (rst),
    .exp_index   (exp_index),
    .mirror_used (mirror_used),
    .shared_used (shared_used),
    .hist_en     (hist_en),
    .hist_val    (index)
  );

  always_ff @(posedge clk) exp_d <= exp_index;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  // Reset for a few cycles, release, and check the first samples.
  task automatic do_reset(output logic [N-1:0] first);
    logic [N-1:0] seed_idx;
    rst = 1'b1;
    repeat (3) @(posedge clk);
    #1;
    check(!valid, "valid low during reset");
    seed_idx = exp_index;            // model index of the seed state
    rst = 1'b0;
    @(posedge clk); #1;
    check(valid, "valid one clock after reset release");
    check(index == seed_idx, "first sample comes from the seeds");
    if (valid && index == seed_idx) n_latency_ok++;
    first = index;
  endtask

  initial begin
    logic [N-1:0] first_a, first_b;
    logic [N-1:0] seq_a [16];
    real mean, var_s, sd, ks_model, ks_emp;
    hist_en = 1'b0;
    do_reset(first_a);
    for (int k = 0; k < 16; k++) begin seq_a[k] = index; @(posedge clk); #1; end
    do_reset(first_b);
    check(first_a == first_b, "reset restarts the sequence");
    begin
      bit same;
      same = (first_a == first_b);
      for (int k = 0; k < 16; k++) begin
        same &= (seq_a[k] == index);
        @(posedge clk); #1;
      end
      if (same) n_reset_restart++;
      check(same, "same 16 samples after a second reset");
    end
    // main run
    hist_en = 1'b1;
    for (int unsigned t = 0; t < NS; t++) begin
      check(valid, "valid every cycle");
      check(index == exp_d, "sample equals reference model");
      check(sample == {~index[N-1], index[N-2:0]}, "two's complement output");
      if (index != exp_d && failures < 10) $display("  got %0d expected %0d", index, exp_d);
      @(posedge clk); #1;
    end
    hist_en = 1'b0;
    @(posedge clk); #1;
    // statistics
    mean = 0.0; var_s = 0.0;
    for (int b = 0; b < (1 << N); b++) mean += real'(b) * real'(u_ref.hist[b]);
    mean /= real'(u_ref.hist_n);
    for (int b = 0; b < (1 << N); b++) var_s += (b - mean) * (b - mean) * real'(u_ref.hist[b]);
    sd = $sqrt(var_s / real'(u_ref.hist_n));
    ks_model = u_ref.ks_vs_gauss(1'b0);
    ks_emp   = u_ref.ks_emp_model();
    $display("samples=%0d mean=%f sigma=%f", u_ref.hist_n, mean, sd);
    $display("KS(model vs Gaussian)=%f  KS(histogram vs Gaussian)=%f  KS(histogram vs model)=%f",
             ks_model, u_ref.ks_vs_gauss(1'b1), ks_emp);
    check(u_ref.hist_n == 64'(NS), "histogram count");
    check(mean > 127.3 && mean < 127.7, "mean of the index near 127.5");
    check(sd > 31.6 && sd < 32.4, "sigma of the index near 32");
    check(ks_emp < 0.003, "histogram matches the exact model distribution");
    check(ks_model < 0.012, "model KS distance from the Gaussian");
    // mechanisms
    $display("mechanisms: mirrored-node samples=%0d shared-comparator samples=%0d reset restarts=%0d latency checks=%0d",
             n_mirror, n_shared, n_reset_restart, n_latency_ok);
    check(n_mirror > 0, "symmetry (mirrored node) exercised");
    check(n_shared > 0, "cluster (shared comparator) exercised");
    check(n_reset_restart > 0, "reset reload exercised");
    check(n_latency_ok == 2, "pipeline latency exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters, on the model's walk of the sample now leaving the pipeline
  logic mirror_d, shared_d;
  always @(posedge clk) begin
    mirror_d <= mirror_used;
    shared_d <= shared_used;
    if (hist_en && valid) begin
      if (mirror_d) n_mirror++;
      if (shared_d) n_shared++;
    end
  end

  initial begin : watchdog
    repeat (NS + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
