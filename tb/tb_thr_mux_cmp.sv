// tb_thr_mux_cmp -- checks the multiplexer-first tree level.
//
// Two instances -- level 7 of the default tree (symmetry, clusters of 8) and
// level 3 of a plain 8-level tree -- are driven with every prefix and every
// uniform number.  The expected bit is the decision of the node named by the
// prefix, with that node's threshold and inversion taken from the reference
// model (thresholds by numeric integration).
module tb_thr_mux_cmp;
  import treegrng_pkg::*;

  logic [7:0] urn;
  logic [6:0] pre7;
  logic [2:0] pre3;
  logic       b7, b3;
  int unsigned checks = 0, failures = 0;
  int unsigned n_inv = 0;

  thr_mux_cmp #(.N_LEVELS(8), .LEVEL(7), .THR_W(8), .SYMMETRY(1'b1), .CLUSTER_LOG2(3)) u7 (
    .urn(urn), .prefix(pre7), .bit_o(b7));
  thr_mux_cmp #(.N_LEVELS(8), .LEVEL(3), .THR_W(8), .SYMMETRY(1'b0), .CLUSTER_LOG2(0)) u3 (
    .urn(urn), .prefix(pre3), .bit_o(b3));

  logic clk = 1'b0, rst = 1'b1;
  logic [7:0] ia, ib;
  logic ma, sa, mb, sb;
  treegrng_ref #(.N_LEVELS(8), .THR_W(8), .SYMMETRY(1'b1), .CLUSTER_LOG2(CLUSTER_LOG2_DEF)) u_ref_opt (
    .clk(clk), .rst(rst), .exp_index(ia), .mirror_used(ma), .shared_used(sa), .hist_en(1'b0), .hist_val(8'h0));
  treegrng_ref #(.N_LEVELS(8), .THR_W(8), .SYMMETRY(1'b0), .CLUSTER_LOG2(64'h0)) u_ref_plain (
    .clk(clk), .rst(rst), .exp_index(ib), .mirror_used(mb), .shared_used(sb), .hist_en(1'b0), .hist_val(8'h0));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #1;
    for (int p = 0; p < 128; p++) begin
      for (int u = 0; u < 256; u++) begin
        bit e7, e3;
        pre7 = 7'(p);
        pre3 = 3'(p);
        urn  = 8'(u);
        #1;
        e7 = u_ref_opt.inv[7][p] ? (u < int'(u_ref_opt.thr[7][p])) : (u >= int'(u_ref_opt.thr[7][p]));
        check(b7 == e7, "level 7, symmetric and clustered");
        if (u_ref_opt.inv[7][p]) n_inv++;
        if (p < 8) begin
          e3 = (u >= int'(u_ref_plain.thr[3][p]));
          check(b3 == e3, "level 3, plain");
        end
      end
    end
    check(n_inv > 0, "mirrored nodes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #10000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
