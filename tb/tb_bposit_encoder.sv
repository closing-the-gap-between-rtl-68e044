// tb_bposit_encoder: self-checking test of the b-posit encoder.
//
// Three encoders, <16,6,5>, <32,6,5> (the default) and <64,6,5>. Each test
// word is split into fields by the bit-serial reference model (negate,
// count the regime run, read exponent and fraction), the fields are put in
// the encoder's input convention (regime = floor(scale/32), exp = scale mod
// 32, significand = fraction, negated for a negative word, sig_zero) and
// the encoder must give back the word. Every 16-bit word is tried; for 32
// and 64 bits, every scale with both signs and a zero or random fraction,
// and random words. Coverage counts the layouts used (regime size 2 .. 6)
// and the three exponent-carry cases of the second multiplexer; each must
// occur.
module tb_bposit_encoder;
  import bposit_ref_pkg::*;

  localparam int RS = 6;
  localparam int ES = 5;

  int checks = 0, failures = 0;
  int size_seen [2:6];
  int ovf_longer = 0, ovf_shorter = 0, ovf_bound = 0;

  logic        sg16, sg32, sg64, z16, z32, z64;
  logic [3:0]  r16, r32, r64;
  logic [4:0]  e16, e32, e64;
  logic [7:0]  f16;
  logic [23:0] f32;
  logic [55:0] f64;
  logic [15:0] w16;
  logic [31:0] w32;
  logic [63:0] w64;

  bposit_encoder #(.N(16)) dut16 (.sign(sg16), .regime(r16), .exp(e16), .significand(f16),
                                  .sig_zero(z16), .bposit(w16));
  bposit_encoder dut32 (.sign(sg32), .regime(r32), .exp(e32), .significand(f32),
                        .sig_zero(z32), .bposit(w32));
  bposit_encoder #(.N(64)) dut64 (.sign(sg64), .regime(r64), .exp(e64), .significand(f64),
                                  .sig_zero(z64), .bposit(w64));

  // Encoder inputs for word w of width n, then check the result.
  task automatic run(int n, longint unsigned w);
    ref_val_t v;
    int sw, reg_v, exp_v;
    longint unsigned sig, got;
    bit ovf;
    v = decode(w, n, RS, ES);
    if (v.zero || v.nar) return;
    sw    = n - 3 - ES;
    reg_v = v.scale >>> ES;
    exp_v = v.scale & ((1 << ES) - 1);
    sig   = v.frac >> (64 - sw);
    if (v.sign) sig = (~sig + 64'd1) & mask_n(sw);
    case (n)
      16: begin sg16 = v.sign; r16 = 4'(reg_v); e16 = 5'(exp_v); f16 = 8'(sig);  z16 = (sig == 0); end
      32: begin sg32 = v.sign; r32 = 4'(reg_v); e32 = 5'(exp_v); f32 = 24'(sig); z32 = (sig == 0); end
      default: begin sg64 = v.sign; r64 = 4'(reg_v); e64 = 5'(exp_v); f64 = 56'(sig); z64 = (sig == 0); end
    endcase
    #1;
    got = (n == 16) ? 64'(w16) : (n == 32) ? 64'(w32) : w64;
    checks++;
    if (got != (w & mask_n(n))) begin
      failures++;
      $display("FAIL n=%0d: sign=%0d regime=%0d exp=%0d sig=%h -> %h expected %h",
               n, v.sign, reg_v, exp_v, sig, got, w & mask_n(n));
    end
    // Coverage: layout used, and exponent carry into the regime.
    begin
      int x;
      bit neg_raw;
      x = (reg_v < 0) ? ~reg_v : reg_v;
      size_seen[(x + 2 < RS) ? x + 2 : RS]++;
      ovf = v.sign && sig == 0 && exp_v == 0;
      neg_raw = (reg_v < 0) != v.sign;
      if (ovf && !neg_raw) ovf_longer++;
      if (ovf && neg_raw && x == RS - 1) ovf_bound++;
      else if (ovf && neg_raw) ovf_shorter++;
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
    longint unsigned w, f;
    foreach (size_seen[i]) size_seen[i] = 0;
    for (int i = 0; i < 65536; i++) run(16, 64'(i));
    for (int n = 32; n <= 64; n += 32) begin
      for (int s = -RS * 32; s < RS * 32; s++) begin
        for (int sg = 0; sg < 2; sg++) begin
          f = (s % 3 == 0 || s % 32 == 0) ? 64'd0 : {$urandom, $urandom};
          w = encode(1'(sg), s, f, n, RS, ES);
          run(n, w);
        end
      end
      for (int i = 0; i < 30000; i++) run(n, {$urandom, $urandom});
    end
    for (int i = 2; i <= 6; i++) begin
      checks++;
      if (size_seen[i] == 0) begin failures++; $display("FAIL layout %0d never used", i); end
    end
    checks++;
    if (ovf_longer == 0 || ovf_shorter == 0 || ovf_bound == 0) begin
      failures++;
      $display("FAIL carry coverage: longer=%0d shorter=%0d bound=%0d", ovf_longer, ovf_shorter, ovf_bound);
    end
    $display("coverage: layouts 2..6 = %0d %0d %0d %0d %0d, carry longer=%0d shorter=%0d bound=%0d",
             size_seen[2], size_seen[3], size_seen[4], size_seen[5], size_seen[6],
             ovf_longer, ovf_shorter, ovf_bound);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
