// tb_cmp_bank -- checks the comparator bank of a tree level.
//
// Each bank is swept over every uniform number; the threshold of comparator
// g is recovered as the number of inputs for which it answers 0 (left).
//   * 3-level tree, 14-bit thresholds, no optimisation: the left
//     probabilities of levels 1 and 2 must be the Gaussian splits of a
//     +-4 sigma range (4.54 % / 95.46 %; 5.79 / 28.47 / 71.53 / 94.21 %).
//   * the same level 2 with symmetry: two comparators, the left-half nodes.
//   * the default 8-level tree, 8-bit thresholds: level 0 (one comparator,
//     threshold 128), level 6 with clusters of 2 and level 7 with clusters of
//     8 (16 and 8 comparators), thresholds compared with those the reference
//     model computes by numeric integration.
module tb_cmp_bank;
  import treegrng_pkg::*;

  localparam int unsigned WH = 14;

  logic [WH-1:0] urn_h;
  logic [7:0]    urn;
  logic [1:0]    dec_a;
  logic [3:0]    dec_b;
  logic [1:0]    dec_c;
  logic [0:0]    dec_f;
  logic [15:0]   dec_d;
  logic [7:0]    dec_e;
  int unsigned checks = 0, failures = 0;

  cmp_bank #(.N_LEVELS(3), .LEVEL(1), .THR_W(WH), .SYMMETRY(1'b0), .CLUSTER_LOG2(0)) u_a (.urn(urn_h), .dec(dec_a));
  cmp_bank #(.N_LEVELS(3), .LEVEL(2), .THR_W(WH), .SYMMETRY(1'b0), .CLUSTER_LOG2(0)) u_b (.urn(urn_h), .dec(dec_b));
  cmp_bank #(.N_LEVELS(3), .LEVEL(2), .THR_W(WH), .SYMMETRY(1'b1), .CLUSTER_LOG2(0)) u_c (.urn(urn_h), .dec(dec_c));
  cmp_bank #(.N_LEVELS(8), .LEVEL(0), .THR_W(8), .SYMMETRY(1'b1), .CLUSTER_LOG2(0)) u_f (.urn(urn), .dec(dec_f));
  cmp_bank #(.N_LEVELS(8), .LEVEL(6), .THR_W(8), .SYMMETRY(1'b1), .CLUSTER_LOG2(1)) u_d (.urn(urn), .dec(dec_d));
  cmp_bank #(.N_LEVELS(8), .LEVEL(7), .THR_W(8), .SYMMETRY(1'b1), .CLUSTER_LOG2(3)) u_e (.urn(urn), .dec(dec_e));

  // thresholds computed independently (reference model of the default tree)
  logic clk = 1'b0, rst = 1'b1;
  logic [7:0] ref_idx;
  logic ref_m, ref_s;
  treegrng_ref #(.N_LEVELS(8), .THR_W(8), .SYMMETRY(1'b1), .CLUSTER_LOG2(CLUSTER_LOG2_DEF)) u_ref (
    .clk(clk), .rst(rst), .exp_index(ref_idx), .mirror_used(ref_m), .shared_used(ref_s),
    .hist_en(1'b0), .hist_val(8'h0));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic bit near(int unsigned t, real pct);
    real p, d;
    p = real'(t) / ((2.0 ** WH) - 1.0) * 100.0;
    d = p - pct;
    if (d < 0) d = -d;
    return d < 0.02;   // the figure prints two decimals; 5.80 % is shown as 5.79 %
  endfunction

  initial begin
    int unsigned za [2], zb [4], zc [2], zd [16], ze [8], zf;
    for (int k = 0; k < 2; k++) begin za[k] = 0; zc[k] = 0; end
    for (int k = 0; k < 4; k++) zb[k] = 0;
    for (int k = 0; k < 16; k++) zd[k] = 0;
    for (int k = 0; k < 8; k++) ze[k] = 0;
    zf = 0;
    urn = '0;
    for (int unsigned u = 0; u < (1 << WH); u++) begin
      urn_h = WH'(u);
      if (u < 256) urn = 8'(u);
      #1;
      for (int k = 0; k < 2; k++) begin za[k] += !dec_a[k]; zc[k] += !dec_c[k]; end
      for (int k = 0; k < 4; k++) zb[k] += !dec_b[k];
      if (u < 256) begin
        for (int k = 0; k < 16; k++) zd[k] += !dec_d[k];
        for (int k = 0; k < 8; k++) ze[k] += !dec_e[k];
        zf += !dec_f[0];
      end
    end
    $display("level1: %0d %0d  level2: %0d %0d %0d %0d  sym: %0d %0d", za[0], za[1], zb[0], zb[1], zb[2], zb[3], zc[0], zc[1]);
    check(near(za[0], 4.54),  "3-level tree, node 0: 4.54 %");
    check(near(za[1], 95.46), "3-level tree, node 1: 95.46 %");
    check(near(zb[0], 5.79),  "node 00: 5.79 %");
    check(near(zb[1], 28.47), "node 01: 28.47 %");
    check(near(zb[2], 71.53), "node 10: 71.53 %");
    check(near(zb[3], 94.21), "node 11: 94.21 %");
    check(zc[0] == zb[0] && zc[1] == zb[1], "symmetric bank keeps the left-half thresholds");
    check($bits(dec_d) == 16 && $bits(dec_e) == 8, "Table II comparator counts");
    check(zf == 128, "root threshold is half of 255, rounded");
    for (int g = 0; g < 16; g++) check(zd[g] == u_ref.thr[6][2 * g], "level 6 clustered threshold");
    for (int g = 0; g < 8; g++)  check(ze[g] == u_ref.thr[7][8 * g], "level 7 clustered threshold");
    $write("level 7 thresholds:");
    for (int g = 0; g < 8; g++) $write(" %0d", ze[g]);
    $display("");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
