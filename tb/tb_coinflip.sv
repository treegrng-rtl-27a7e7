// tb_coinflip -- checks the constant comparator (weighted coin flip).
//
// Four instances with thresholds at the edges and in the middle of the range
// are driven with every possible uniform number; each output is compared
// with the expected decision and the number of "heads" over the whole range
// is compared with 2^W - T, the count that sets the coin's bias.
module tb_coinflip;

  localparam int unsigned W = 8;
  localparam logic [W-1:0] T0 = 8'd0, T1 = 8'd1, T2 = 8'd128, T3 = 8'd255;
  localparam int unsigned W4 = 5;
  localparam logic [W4-1:0] T4 = 5'd11;

  logic [W-1:0]  urn;
  logic [W4-1:0] urn4;
  logic [3:0]    heads;
  logic          heads4;
  int unsigned checks = 0, failures = 0;
  int unsigned cnt [4];
  int unsigned cnt4;

  coinflip #(.W(W), .THRESHOLD(T0)) u0 (.urn(urn), .heads(heads[0]));
  coinflip #(.W(W), .THRESHOLD(T1)) u1 (.urn(urn), .heads(heads[1]));
  coinflip #(.W(W), .THRESHOLD(T2)) u2 (.urn(urn), .heads(heads[2]));
  coinflip #(.W(W), .THRESHOLD(T3)) u3 (.urn(urn), .heads(heads[3]));
  coinflip #(.W(W4), .THRESHOLD(T4)) u4 (.urn(urn4), .heads(heads4));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    int unsigned tv [4];
    tv = '{0, 1, 128, 255};
    for (int k = 0; k < 4; k++) cnt[k] = 0;
    cnt4 = 0;
    urn4 = '0;
    for (int unsigned u = 0; u < (1 << W); u++) begin
      urn = W'(u);
      if (u < (1 << W4)) urn4 = W4'(u);
      #1;
      for (int k = 0; k < 4; k++) begin
        check(heads[k] == (u >= tv[k]), "decision");
        cnt[k] += heads[k];
      end
      if (u < (1 << W4)) begin
        check(heads4 == (u >= 11), "decision W=5");
        cnt4 += heads4;
      end
    end
    for (int k = 0; k < 4; k++) check(cnt[k] == (1 << W) - tv[k], "heads count");
    check(cnt4 == 32 - 11, "heads count W=5");
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
