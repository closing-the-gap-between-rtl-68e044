// tb_bp_regime_prienc: test of the regime priority encoder.
//
// For every one-hot input (run length k = 1 .. RS) the code must be -k in
// 4-bit 2's complement. Also checks priority: with several bits set, the
// highest one decides. RS = 6.
module tb_bp_regime_prienc;

  int checks = 0, failures = 0;

  logic [5:0] oh;
  logic [3:0] code;

  bp_regime_prienc dut (.onehot(oh), .code(code));

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int top, k;
    // Pure one-hot inputs.
    for (int k1 = 1; k1 <= 6; k1++) begin
      oh = 6'b1 << (6 - k1);
      #1;
      checks++;
      if (int'($signed(code)) != -k1) begin
        failures++;
        $display("FAIL onehot=%06b: code=%0d expected %0d", oh, $signed(code), -k1);
      end
    end
    // Any nonzero input: highest set bit wins.
    for (int v = 1; v < 64; v++) begin
      oh = 6'(v);
      #1;
      top = 0;
      for (int i = 0; i < 6; i++) if (((v >> i) & 1) != 0) top = i;
      k = 6 - top;
      checks++;
      if (int'($signed(code)) != -k) begin
        failures++;
        $display("FAIL input=%06b: code=%0d expected %0d", oh, $signed(code), -k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
