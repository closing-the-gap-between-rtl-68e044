// tb_bposit_codec: end-to-end test of the b-posit decode/encode unit at its
// default size, <32,6,5>, with no parameter overrides.
//
// Each step applies two operand words a and b. Both decoders' fields are
// checked against the bit-serial reference model. The testbench then plays
// the arithmetic stage with the identity operation on one operand (a on even
// steps, b on odd ones): it adds exp_cin to the scale, splits the scale into
// regime and exponent, and passes sign and significand on. The encoder must
// return the operand word unchanged. Operands are words built for every
// scale, both signs and zero/random fractions, then random words; zero and
// NaR are decoded too (their chck flag is checked, they are not re-encoded).
//
// Mechanisms counted, each of which must happen: every regime size 2 .. 6
// on decode, a regime ended by the bound, exp_cin, zero, NaR, and the three
// exponent-carry corrections of the encoder (run of 1s longer, run of 0s
// shorter, 0..00 -> 0..01 at the bound).
module tb_bposit_codec;
  import bposit_ref_pkg::*;

  localparam int N  = 32;
  localparam int RS = 6;
  localparam int ES = 5;
  localparam int SW = N - 3 - ES;

  int checks = 0, failures = 0;
  int size_seen [2:6];
  int maxrun_seen = 0, cin_seen = 0, zero_seen = 0, nar_seen = 0;
  int ovf_longer = 0, ovf_shorter = 0, ovf_bound = 0, encodes = 0;

  logic [N-1:0]  a, b, res;
  logic          a_sign, a_chck, a_cin, b_sign, b_chck, b_cin;
  logic [3:0]    a_reg, b_reg, res_reg;
  logic [ES-1:0] a_exp, b_exp, res_exp;
  logic [SW-1:0] a_sig, b_sig, res_sig;
  logic          res_sign, res_sz;

  bposit_codec dut (
    .a(a), .a_sign(a_sign), .a_chck(a_chck), .a_regime(a_reg), .a_exponent(a_exp),
    .a_significand(a_sig), .a_exp_cin(a_cin),
    .b(b), .b_sign(b_sign), .b_chck(b_chck), .b_regime(b_reg), .b_exponent(b_exp),
    .b_significand(b_sig), .b_exp_cin(b_cin),
    .res_sign(res_sign), .res_regime(res_reg), .res_exp(res_exp),
    .res_significand(res_sig), .res_sig_zero(res_sz), .res_bposit(res)
  );

  // Check one operand's decoded fields; returns its scale with exp_cin added.
  task automatic check_dec(logic [N-1:0] w, bit sign, bit chck, logic [3:0] rg,
                           logic [ES-1:0] ex, logic [SW-1:0] sig, bit cin, output int scale);
    ref_val_t v;
    logic [SW-1:0] mag;
    v = decode(64'(w), N, RS, ES);
    scale = int'($signed(rg)) * (1 << ES) + int'(ex) + int'(cin);
    checks++;
    if (sign != v.sign || chck != (v.zero || v.nar)) begin
      failures++;
      $display("FAIL decode %h: sign=%0d chck=%0d", w, sign, chck);
      return;
    end
    if (v.zero) begin zero_seen++; return; end
    if (v.nar)  begin nar_seen++;  return; end
    mag = sign ? -sig : sig;
    checks++;
    if (scale != v.scale || (64'(mag) << (64 - SW)) != v.frac || cin != (sign && sig == 0)) begin
      failures++;
      $display("FAIL decode %h: scale=%0d sig=%h cin=%0d, expected scale=%0d", w, scale, sig, cin, v.scale);
    end
    size_seen[v.rsize]++;
    if (v.maxrun) maxrun_seen++;
    if (cin) cin_seen++;
  endtask

  task automatic step(logic [N-1:0] wa, logic [N-1:0] wb, bit pick_b);
    int sa, sb, sc;
    logic [N-1:0] want;
    bit sign, chck;
    logic [SW-1:0] sig;
    a = wa; b = wb;
    #1;
    check_dec(a, a_sign, a_chck, a_reg, a_exp, a_sig, a_cin, sa);
    check_dec(b, b_sign, b_chck, b_reg, b_exp, b_sig, b_cin, sb);
    // Arithmetic stage stand-in: identity on one operand.
    sign = pick_b ? b_sign : a_sign;
    chck = pick_b ? b_chck : a_chck;
    sig  = pick_b ? b_sig  : a_sig;
    sc   = pick_b ? sb : sa;
    want = pick_b ? wb : wa;
    if (chck) return;  // zero and NaR are not encoded by this unit
    res_sign = sign;
    res_reg  = 4'(sc >>> ES);
    res_exp  = ES'(sc);
    res_sig  = sig;
    res_sz   = (sig == 0);
    #1;
    encodes++;
    checks++;
    if (res !== want) begin
      failures++;
      $display("FAIL encode: scale=%0d sign=%0d sig=%h -> %h expected %h", sc, sign, sig, res, want);
    end
    if (sign && sig == 0 && res_exp == 0) begin
      int x;
      x = (res_reg[3]) ? int'(3'(~res_reg[2:0])) : int'(res_reg[2:0]);
      if (res_reg[3] == sign) ovf_longer++;
      else if (x == RS - 1) ovf_bound++;
      else ovf_shorter++;
    end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] prev, w;
    longint unsigned f;
    int k;
    foreach (size_seen[i]) size_seen[i] = 0;
    res_sign = 0; res_reg = 0; res_exp = 0; res_sig = 0; res_sz = 1;
    prev = '0;
    k = 0;
    for (int s = -RS * 32; s < RS * 32; s++) begin
      for (int sg = 0; sg < 2; sg++) begin
        f = (s % 3 == 0 || s % 32 == 0) ? 64'd0 : {$urandom, $urandom};
        w = N'(encode(1'(sg), s, f, N, RS, ES));
        step(prev, w, 1'(k++));
        prev = w;
      end
    end
    step(32'h0, 32'h8000_0000, 1'b0);
    step(32'h8000_0000, 32'h0, 1'b1);
    for (int i = 0; i < 20000; i++) step($urandom, $urandom, 1'(i));

    for (int i = 2; i <= 6; i++) begin
      checks++;
      if (size_seen[i] == 0) begin failures++; $display("FAIL regime size %0d never seen", i); end
    end
    checks++;
    if (maxrun_seen == 0 || cin_seen == 0 || zero_seen == 0 || nar_seen == 0 ||
        ovf_longer == 0 || ovf_shorter == 0 || ovf_bound == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("decoded regime sizes 2..6 = %0d %0d %0d %0d %0d", size_seen[2], size_seen[3],
             size_seen[4], size_seen[5], size_seen[6]);
    $display("bound-ended regimes=%0d exp_cin=%0d zero=%0d NaR=%0d encodes=%0d",
             maxrun_seen, cin_seen, zero_seen, nar_seen, encodes);
    $display("encoder exponent carry: run longer=%0d run shorter=%0d at bound=%0d",
             ovf_longer, ovf_shorter, ovf_bound);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
