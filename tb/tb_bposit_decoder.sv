// tb_bposit_decoder: self-checking test of the b-posit decoder.
//
// Three decoders, <16,6,5>, <32,6,5> (the default) and <64,6,5>. Every
// 16-bit word is decoded; for 32 and 64 bits, random words and words built
// for each regime value, sign and zero/nonzero fraction. The decoder's
// fields are turned into a magnitude, scale = regime*32 + exponent +
// exp_cin and fraction = significand (negated for a negative word), and
// compared with the bit-serial reference model, which negates the word and
// counts the regime run. The coverage of regime sizes, runs ended by the
// bound, exp_cin and zero/NaR is counted and each must occur.
module tb_bposit_decoder;
  import bposit_ref_pkg::*;

  localparam int RS = 6;
  localparam int ES = 5;

  int checks = 0, failures = 0;
  int size_seen [2:6];
  int maxrun_seen = 0, cin_seen = 0, zero_seen = 0, nar_seen = 0;

  // <16,6,5>
  logic [15:0] w16;
  logic        s16, c16, x16;
  logic [3:0]  r16;
  logic [4:0]  e16;
  logic [7:0]  f16;
  // <32,6,5>, default parameters
  logic [31:0] w32;
  logic        s32, c32, x32;
  logic [3:0]  r32;
  logic [4:0]  e32;
  logic [23:0] f32;
  // <64,6,5>
  logic [63:0] w64;
  logic        s64, c64, x64;
  logic [3:0]  r64;
  logic [4:0]  e64;
  logic [55:0] f64;

  bposit_decoder #(.N(16)) dut16 (.bposit(w16), .sign(s16), .chck(c16), .regime(r16),
                                  .exponent(e16), .significand(f16), .exp_cin(x16));
  bposit_decoder dut32 (.bposit(w32), .sign(s32), .chck(c32), .regime(r32),
                        .exponent(e32), .significand(f32), .exp_cin(x32));
  bposit_decoder #(.N(64)) dut64 (.bposit(w64), .sign(s64), .chck(c64), .regime(r64),
                                  .exponent(e64), .significand(f64), .exp_cin(x64));

  // Compare one decoded word with the reference.
  task automatic check(int n, longint unsigned w, bit sign, bit chck, logic [3:0] regime,
                       int expo, longint unsigned sig, bit cin);
    ref_val_t v;
    int sw, scale;
    longint unsigned fr;
    v  = decode(w, n, RS, ES);
    sw = n - 3 - ES;
    checks++;
    if (sign != v.sign || chck != (v.zero || v.nar)) begin
      failures++;
      $display("FAIL n=%0d w=%h: sign=%0d chck=%0d", n, w, sign, chck);
      return;
    end
    if (v.zero) begin zero_seen++; return; end
    if (v.nar)  begin nar_seen++;  return; end
    scale = int'($signed(regime)) * (1 << ES) + expo + int'(cin);
    fr    = sign ? ((~sig + 64'd1) & mask_n(sw)) : sig;
    fr    = fr << (64 - sw);
    checks++;
    if (scale != v.scale || fr != v.frac) begin
      failures++;
      $display("FAIL n=%0d w=%h: scale=%0d frac=%h expected scale=%0d frac=%h",
               n, w, scale, fr, v.scale, v.frac);
    end
    checks++;
    if (cin != (sign && sig == 0)) begin
      failures++;
      $display("FAIL n=%0d w=%h: exp_cin=%0d", n, w, cin);
    end
    size_seen[v.rsize]++;
    if (v.maxrun) maxrun_seen++;
    if (cin) cin_seen++;
  endtask

  task automatic drive(longint unsigned w);
    w16 = w[15:0]; w32 = w[31:0]; w64 = w;
    #1;
    check(16, 64'(w16), s16, c16, r16, int'(e16), 64'(f16), x16);
    check(32, 64'(w32), s32, c32, r32, int'(e32), 64'(f32), x32);
    check(64, w64, s64, c64, r64, int'(e64), 64'(f64), x64);
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
    // Every 16-bit word (the wider decoders see it zero-extended).
    for (int i = 0; i < 65536; i++) begin
      w16 = 16'(i);
      #1;
      check(16, 64'(w16), s16, c16, r16, int'(e16), 64'(f16), x16);
    end
    // Words built per regime value, sign and fraction, for 32 and 64 bits.
    for (int n = 32; n <= 64; n += 32) begin
      for (int s = -RS * 32; s < RS * 32; s++) begin
        for (int sg = 0; sg < 2; sg++) begin
          f = (s % 3 == 0 || s % 32 == 0) ? 64'd0 : {$urandom, $urandom};
          w = encode(1'(sg), s, f, n, RS, ES);
          if (w == 0) continue;  // 2^-192 is not representable
          if (n == 32) begin
            w32 = w[31:0]; #1;
            check(32, w, s32, c32, r32, int'(e32), 64'(f32), x32);
          end else begin
            w64 = w; #1;
            check(64, w, s64, c64, r64, int'(e64), 64'(f64), x64);
          end
        end
      end
    end
    // Random words, and the special words.
    for (int i = 0; i < 50000; i++) drive({$urandom, $urandom});
    drive(64'd0);
    drive(64'h8000_0000_0000_0000);
    w32 = 32'h8000_0000; #1;
    check(32, 64'(w32), s32, c32, r32, int'(e32), 64'(f32), x32);

    for (int i = 2; i <= 6; i++) begin
      checks++;
      if (size_seen[i] == 0) begin failures++; $display("FAIL regime size %0d never seen", i); end
    end
    checks++;
    if (maxrun_seen == 0 || cin_seen == 0 || zero_seen == 0 || nar_seen == 0) begin
      failures++;
      $display("FAIL coverage: maxrun=%0d exp_cin=%0d zero=%0d nar=%0d",
               maxrun_seen, cin_seen, zero_seen, nar_seen);
    end
    $display("coverage: sizes 2..6 = %0d %0d %0d %0d %0d, maxrun=%0d exp_cin=%0d zero=%0d nar=%0d",
             size_seen[2], size_seen[3], size_seen[4], size_seen[5], size_seen[6],
             maxrun_seen, cin_seen, zero_seen, nar_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
