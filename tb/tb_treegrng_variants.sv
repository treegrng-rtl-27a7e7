// tb_treegrng_variants -- the TreeGRNG across the configurations it was
// characterised in: threshold widths 4, 6, 8, 10, 12 and 14 bits, each as
// the optimised pipelined tree (symmetry + clusters of Table II) and as the
// plain non-pipelined tree (one comparator per node, 255 for 8 levels), plus
// the 3-level symmetric example tree and a 12-bit tree with the extra
// register in the middle of the multiplexer chain (latency 3) and an 8-bit
// tree with the multiplexers placed before the comparators.
//
// Every instance runs beside its own reference model; every sample is
// compared with the model's index delayed by the pipeline depth and the
// samples are histogrammed.  At the end each configuration reports the
// Kolmogorov-Smirnov distance of its exact distribution from the Gaussian
// (the characterisation metric) and of its histogram from that distribution.
// Checked: all samples equal the model, histogram within statistical noise of
// the model (thresholds of 6 bits or more), and KS distance below 0.012 for thresholds of 8 bits or more.
module tb_treegrng_variants;
  import treegrng_pkg::*;

  localparam int unsigned NS = 1 << 18;
  localparam int unsigned NCFG = 6;
  localparam int unsigned WIDTHS [NCFG] = '{4, 6, 8, 10, 12, 14};
  localparam int unsigned NALL = 2 * NCFG + 3;

  logic clk = 1'b0;
  logic rst;
  logic run;
  int unsigned checks = 0, failures = 0;
  int unsigned mism [NALL];
  int unsigned nval [NALL];

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // cfg 2k: optimised + pipelined, cfg 2k+1: plain, non-pipelined;
  // cfg 12: 3-level symmetric, non-pipelined; cfg 13: optimised, 12-bit
  // thresholds, comparator pipeline plus the mid-multiplexer register;
  // cfg 14: optimised, 8-bit thresholds, multiplexers before the comparators.
  for (genvar c = 0; c < NALL; c++) begin : g_cfg
    localparam bit          MF  = (c == 2 * NCFG + 2);
    localparam bit          OPT = ((c % 2 == 0) && (c < 2 * NCFG)) || (c == 2 * NCFG + 1) || MF;
    localparam bit          MP  = (c == 2 * NCFG + 1);
    localparam int unsigned W   = (c < 2 * NCFG) ? WIDTHS[c / 2] : (MP ? 12 : 8);
    localparam int unsigned N   = (c == 2 * NCFG) ? 3 : 8;
    localparam logic [63:0] CL  = OPT ? CLUSTER_LOG2_DEF : 64'h0;
    localparam bit          SYM = OPT || (c == 2 * NCFG);
    localparam bit          PL  = OPT && !MF;
    localparam int unsigned LAT = 32'(PL) + 32'(MP);

    logic         valid;
    logic [N-1:0] index, sample, exp_index, got;
    logic [N-1:0] dl [3];
    logic         m_u, s_u;

    treegrng #(.N_LEVELS(N), .THR_W(W), .SYMMETRY(SYM), .CLUSTER_LOG2(CL), .PIPELINE(PL),
               .MUX_PIPE(MP), .MUX_FIRST(MF)) u_dut (
      .clk(clk), .rst(rst), .valid(valid), .index(index), .sample(sample));

    treegrng_ref #(.N_LEVELS(N), .THR_W(W), .SYMMETRY(SYM), .CLUSTER_LOG2(CL)) u_ref (
      .clk(clk), .rst(rst), .exp_index(exp_index), .mirror_used(m_u), .shared_used(s_u),
      .hist_en(run && valid), .hist_val(index));

    // the model's index delayed by the design's pipeline depth
    always @(posedge clk) begin
      dl[0] <= exp_index;
      dl[1] <= dl[0];
      dl[2] <= dl[1];
    end
    assign got = (LAT == 0) ? exp_index : dl[LAT-1];

    always @(negedge clk) begin
      if (run && valid) begin
        nval[c] <= nval[c] + 1;
        if (index != got || sample != {~index[N-1], index[N-2:0]}) mism[c] <= mism[c] + 1;
      end
    end
  end

  initial begin
    for (int c = 0; c < NALL; c++) begin mism[c] = 0; nval[c] = 0; end
    run = 1'b0;
    rst = 1'b1;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    @(posedge clk);
    run = 1'b1;
    repeat (NS) @(posedge clk);
    run = 1'b0;
    @(posedge clk);
    @(posedge clk);
    begin
      real ks_m [NALL];
      real ks_h [NALL];
      ks_m[0]  = g_cfg[0].u_ref.ks_vs_gauss(1'b0);  ks_h[0]  = g_cfg[0].u_ref.ks_emp_model();
      ks_m[1]  = g_cfg[1].u_ref.ks_vs_gauss(1'b0);  ks_h[1]  = g_cfg[1].u_ref.ks_emp_model();
      ks_m[2]  = g_cfg[2].u_ref.ks_vs_gauss(1'b0);  ks_h[2]  = g_cfg[2].u_ref.ks_emp_model();
      ks_m[3]  = g_cfg[3].u_ref.ks_vs_gauss(1'b0);  ks_h[3]  = g_cfg[3].u_ref.ks_emp_model();
      ks_m[4]  = g_cfg[4].u_ref.ks_vs_gauss(1'b0);  ks_h[4]  = g_cfg[4].u_ref.ks_emp_model();
      ks_m[5]  = g_cfg[5].u_ref.ks_vs_gauss(1'b0);  ks_h[5]  = g_cfg[5].u_ref.ks_emp_model();
      ks_m[6]  = g_cfg[6].u_ref.ks_vs_gauss(1'b0);  ks_h[6]  = g_cfg[6].u_ref.ks_emp_model();
      ks_m[7]  = g_cfg[7].u_ref.ks_vs_gauss(1'b0);  ks_h[7]  = g_cfg[7].u_ref.ks_emp_model();
      ks_m[8]  = g_cfg[8].u_ref.ks_vs_gauss(1'b0);  ks_h[8]  = g_cfg[8].u_ref.ks_emp_model();
      ks_m[9]  = g_cfg[9].u_ref.ks_vs_gauss(1'b0);  ks_h[9]  = g_cfg[9].u_ref.ks_emp_model();
      ks_m[10] = g_cfg[10].u_ref.ks_vs_gauss(1'b0); ks_h[10] = g_cfg[10].u_ref.ks_emp_model();
      ks_m[11] = g_cfg[11].u_ref.ks_vs_gauss(1'b0); ks_h[11] = g_cfg[11].u_ref.ks_emp_model();
      ks_m[12] = g_cfg[12].u_ref.ks_vs_gauss(1'b0); ks_h[12] = g_cfg[12].u_ref.ks_emp_model();
      ks_m[13] = g_cfg[13].u_ref.ks_vs_gauss(1'b0); ks_h[13] = g_cfg[13].u_ref.ks_emp_model();
      ks_m[14] = g_cfg[14].u_ref.ks_vs_gauss(1'b0); ks_h[14] = g_cfg[14].u_ref.ks_emp_model();
      $display("thr bits | KS optimised (pipelined) | KS plain (non-pipelined) | KS histogram-vs-model");
      for (int k = 0; k < NCFG; k++) begin
        $display("   %2d    |        %f          |        %f          | %f %f",
                 WIDTHS[k], ks_m[2*k], ks_m[2*k+1], ks_h[2*k], ks_h[2*k+1]);
      end
      $display("3-level symmetric tree: KS %f, histogram-vs-model %f", ks_m[12], ks_h[12]);
      $display("12-bit, mid-multiplexer register: KS %f, histogram-vs-model %f", ks_m[13], ks_h[13]);
      $display("8-bit, multiplexers first: KS %f, histogram-vs-model %f", ks_m[14], ks_h[14]);
      for (int c = 0; c < NALL; c++) begin
        check(mism[c] == 0, $sformatf("config %0d samples equal the model (%0d mismatches)", c, mism[c]));
        check(nval[c] == NS, $sformatf("config %0d one sample per cycle", c));
        // 4-bit thresholds use 4..11-bit LFSRs whose periods share factors, so
        // their levels are not independent and the histogram departs from
        // the independent-levels model; it is reported, not checked.
        if (c >= 2 * NCFG || WIDTHS[c / 2] >= 6)
          check(ks_h[c] < 0.006, $sformatf("config %0d histogram matches the model", c));
        if (c >= 2 * NCFG + 1 || (c < 2 * NCFG && WIDTHS[c / 2] >= 8))
          check(ks_m[c] < 0.012, $sformatf("config %0d KS distance", c));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (NS + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
