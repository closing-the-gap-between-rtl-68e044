// tb_bp_regime_onehot: exhaustive test of the regime run-length detector.
//
// Drives every regime MSB and every pattern of the RS-1 bits below it, for
// the default RS = 6 and for RS = 4, and compares the one-hot output with a
// run length counted bit by bit: bit RS-k of the expected vector is set for
// a run of k identical bits (k = RS when all RS bits are equal).
module tb_bp_regime_onehot;

  int checks = 0, failures = 0;

  logic       rmsb6;
  logic [4:0] rbits6;
  logic [5:0] oh6;
  logic       rmsb4;
  logic [2:0] rbits4;
  logic [3:0] oh4;

  bp_regime_onehot dut6 (.rmsb(rmsb6), .rbits(rbits6), .onehot(oh6));
  bp_regime_onehot #(.RS(4)) dut4 (.rmsb(rmsb4), .rbits(rbits4), .onehot(oh4));

  function automatic int run_len(bit msb, int unsigned bits, int rs);
    int k = 1;
    while (k < rs && ((bits >> (rs - 1 - k)) & 1) == int'(msb)) k++;
    return k;
  endfunction

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k;
    logic [5:0] exp6;
    logic [3:0] exp4;
    for (int m = 0; m < 2; m++) begin
      for (int b = 0; b < 32; b++) begin
        rmsb6 = 1'(m); rbits6 = 5'(b);
        #1;
        k = run_len(1'(m), b, 6);
        exp6 = 6'b1 << (6 - k);
        checks++;
        if (oh6 !== exp6) begin
          failures++;
          $display("FAIL RS=6 msb=%0d bits=%05b: onehot=%06b expected %06b", m, b, oh6, exp6);
        end
      end
      for (int b = 0; b < 8; b++) begin
        rmsb4 = 1'(m); rbits4 = 3'(b);
        #1;
        k = run_len(1'(m), b, 4);
        exp4 = 4'b1 << (4 - k);
        checks++;
        if (oh4 !== exp4) begin
          failures++;
          $display("FAIL RS=4 msb=%0d bits=%03b: onehot=%04b expected %04b", m, b, oh4, exp4);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
