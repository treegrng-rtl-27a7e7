// tb_level_mux -- checks the threshold-selection multiplexer of a level.
//
// Every combination of prefix and comparator outputs is applied to three
// configurations and the selected bit is compared with the decision of the
// node the prefix names:
//   * level 2, no optimisation: node p takes comparator p;
//   * level 3, symmetry: nodes 0..3 take comparator p, nodes 4..7 take the
//     inverted output of comparator 7 - p (their mirror);
//   * level 3, symmetry and clusters of 2: node p (p < 4) takes comparator
//     p / 2, node p >= 4 the inverted comparator (7 - p) / 2.
module tb_level_mux;

  logic [1:0] pre2;
  logic [3:0] dec2;
  logic [2:0] pre3;
  logic [3:0] dec3;
  logic [1:0] dec3c;
  logic       b2, b3, b3c;
  int unsigned checks = 0, failures = 0;
  int unsigned n_inv = 0;

  level_mux #(.LEVEL(2), .SYMMETRY(1'b0), .CLUSTER_LOG2(0), .N_CMP(4)) u2 (.prefix(pre2), .dec(dec2), .bit_o(b2));
  level_mux #(.LEVEL(3), .SYMMETRY(1'b1), .CLUSTER_LOG2(0), .N_CMP(4)) u3 (.prefix(pre3), .dec(dec3), .bit_o(b3));
  level_mux #(.LEVEL(3), .SYMMETRY(1'b1), .CLUSTER_LOG2(1), .N_CMP(2)) u3c (.prefix(pre3), .dec(dec3c), .bit_o(b3c));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int p = 0; p < 8; p++) begin
      for (int d = 0; d < 16; d++) begin
        pre2  = 2'(p);
        pre3  = 3'(p);
        dec2  = 4'(d);
        dec3  = 4'(d);
        dec3c = 2'(d);
        #1;
        if (p < 4) check(b2 == dec2[p], "level 2 plain selection");
        if (p < 4) begin
          check(b3 == dec3[p], "level 3 left half");
          check(b3c == dec3c[p / 2], "level 3 left half, clustered");
        end else begin
          check(b3 == !dec3[7 - p], "level 3 right half inverted mirror");
          check(b3c == !dec3c[(7 - p) / 2], "level 3 right half, clustered");
          n_inv++;
        end
      end
    end
    check(n_inv > 0, "mirrored nodes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
