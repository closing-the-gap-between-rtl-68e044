// tb_bposit_codec_sizes: the decode/encode unit at the other evaluated sizes.
//
// Runs the end-to-end round trip of bposit_codec_roundtrip on <16,6,5> and
// <64,6,5>, the two other sizes the design was characterised at, and on
// <16,6,3>, the 16-bit b-posit with a 3-bit exponent used to illustrate the
// format's accuracy. Each must complete with no failure and must exercise
// the encoder's exponent-carry correction at least once.
module tb_bposit_codec_sizes;

  logic d0, d1, d2;
  int   c0, c1, c2, f0, f1, f2, k0, k1, k2;
  int   checks, failures;

  bposit_codec_roundtrip #(.N(16), .RS(6), .ES(5)) u16  (.done(d0), .checks(c0), .failures(f0), .carries(k0));
  bposit_codec_roundtrip #(.N(64), .RS(6), .ES(5)) u64  (.done(d1), .checks(c1), .failures(f1), .carries(k1));
  bposit_codec_roundtrip #(.N(16), .RS(6), .ES(3)) u163 (.done(d2), .checks(c2), .failures(f2), .carries(k2));

  initial begin
    #10_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end

  initial begin
    #1;
    wait (d0 && d1 && d2);
    checks   = c0 + c1 + c2 + 3;
    failures = f0 + f1 + f2;
    if (k0 == 0) failures++;
    if (k1 == 0) failures++;
    if (k2 == 0) failures++;
    $display("<16,6,5>: %0d checks, %0d failures, %0d carries", c0, f0, k0);
    $display("<64,6,5>: %0d checks, %0d failures, %0d carries", c1, f1, k1);
    $display("<16,6,3>: %0d checks, %0d failures, %0d carries", c2, f2, k2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
