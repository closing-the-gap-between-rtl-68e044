// tb_bp_regime_bindec: test of the encoder's regime binary decoder.
//
// Checks the intermediate regime string against the table for RS = 6
// (x = 0 -> 0100000 ... x = 5 -> 0000001), and that the top min(x+2, 6)
// bits of it are a run of x+1 zeros ended by a 1, or six zeros for x = 5.
// Inputs 6 and 7 are not regimes and must give all zeros.
module tb_bp_regime_bindec;

  int checks = 0, failures = 0;

  logic [2:0] x;
  logic [6:0] inter;

  bp_regime_bindec dut (.x(x), .inter(inter));

  localparam logic [6:0] TABLE [6] = '{7'b0100000, 7'b0010000, 7'b0001000,
                                       7'b0000100, 7'b0000010, 7'b0000001};

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int size;
    logic [6:0] want_str;
    for (int v = 0; v < 8; v++) begin
      x = 3'(v);
      #1;
      checks++;
      if (v < 6) begin
        if (inter !== TABLE[v]) begin
          failures++;
          $display("FAIL x=%0d: %07b expected %07b", v, inter, TABLE[v]);
        end
        // Regime string check, built bit by bit.
        size = (v + 2 < 6) ? v + 2 : 6;
        want_str = '0;
        if (v < 5) want_str[6 - size + 1] = 1'b1;   // terminating 1
        checks++;
        if ((inter >> (7 - size)) !== (want_str >> (7 - size))) begin
          failures++;
          $display("FAIL x=%0d: regime string wrong", v);
        end
      end else if (inter !== '0) begin
        failures++;
        $display("FAIL x=%0d: %07b expected 0", v, inter);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
