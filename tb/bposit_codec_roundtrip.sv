// bposit_codec_roundtrip: one bposit_codec of a given size together with its
// stimulus and checks, used by tb_bposit_codec_sizes.
//
// Applies operand pairs (words built for every scale, both signs and a zero
// or random fraction, then random words), checks both decoders' fields
// against the reference model, re-encodes operand a or b (alternately)
// through an identity arithmetic stage that adds exp_cin, and requires the
// operand word back. Raises done when finished, with the number of checks
// and failures and a count of encoder exponent-carry corrections.
module bposit_codec_roundtrip #(
  parameter int N   = 16,
  parameter int RS  = 6,
  parameter int ES  = 5,
  parameter int NRAND = 5000
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   carries
);
  import bposit_ref_pkg::*;

  localparam int RW = $clog2(RS) + 1;
  localparam int SW = N - 3 - ES;

  logic [N-1:0]  a, b, res;
  logic          a_sign, a_chck, a_cin, b_sign, b_chck, b_cin;
  logic [RW-1:0] a_reg, b_reg, res_reg;
  logic [ES-1:0] a_exp, b_exp, res_exp;
  logic [SW-1:0] a_sig, b_sig, res_sig;
  logic          res_sign, res_sz;

  bposit_codec #(.N(N), .RS(RS), .ES(ES)) dut (
    .a(a), .a_sign(a_sign), .a_chck(a_chck), .a_regime(a_reg), .a_exponent(a_exp),
    .a_significand(a_sig), .a_exp_cin(a_cin),
    .b(b), .b_sign(b_sign), .b_chck(b_chck), .b_regime(b_reg), .b_exponent(b_exp),
    .b_significand(b_sig), .b_exp_cin(b_cin),
    .res_sign(res_sign), .res_regime(res_reg), .res_exp(res_exp),
    .res_significand(res_sig), .res_sig_zero(res_sz), .res_bposit(res)
  );

  function automatic bit dec_ok(logic [N-1:0] w, bit sign, bit chck, logic [RW-1:0] rg,
                                logic [ES-1:0] ex, logic [SW-1:0] sig, bit cin);
    ref_val_t v;
    logic [SW-1:0] mag;
    int scale;
    v = decode(64'(w), N, RS, ES);
    if (sign != v.sign || chck != (v.zero || v.nar)) return 1'b0;
    if (chck) return 1'b1;
    scale = int'($signed(rg)) * (1 << ES) + int'(ex) + int'(cin);
    mag   = sign ? -sig : sig;
    return scale == v.scale && (64'(mag) << (64 - SW)) == v.frac && cin == (sign && sig == 0);
  endfunction

  task automatic step(logic [N-1:0] wa, logic [N-1:0] wb, bit pick_b);
    int sc;
    a = wa; b = wb;
    #1;
    checks += 2;
    if (!dec_ok(a, a_sign, a_chck, a_reg, a_exp, a_sig, a_cin)) begin
      failures++; $display("FAIL <%0d,%0d,%0d> decode a=%h", N, RS, ES, a);
    end
    if (!dec_ok(b, b_sign, b_chck, b_reg, b_exp, b_sig, b_cin)) begin
      failures++; $display("FAIL <%0d,%0d,%0d> decode b=%h", N, RS, ES, b);
    end
    if (pick_b ? b_chck : a_chck) return;
    res_sign = pick_b ? b_sign : a_sign;
    res_sig  = pick_b ? b_sig  : a_sig;
    sc = pick_b ? int'($signed(b_reg)) * (1 << ES) + int'(b_exp) + int'(b_cin)
                : int'($signed(a_reg)) * (1 << ES) + int'(a_exp) + int'(a_cin);
    res_reg  = RW'(sc >>> ES);
    res_exp  = ES'(sc);
    res_sz   = (res_sig == 0);
    #1;
    checks++;
    if (res !== (pick_b ? wb : wa)) begin
      failures++;
      $display("FAIL <%0d,%0d,%0d> encode -> %h expected %h", N, RS, ES, res, pick_b ? wb : wa);
    end
    if (res_sign && res_sz && res_exp == 0) carries++;
  endtask

  initial begin
    logic [N-1:0] prev, w;
    longint unsigned f;
    int k;
    done = 0; checks = 0; failures = 0; carries = 0; k = 0;
    res_sign = 0; res_reg = 0; res_exp = 0; res_sig = 0; res_sz = 1;
    prev = '0;
    for (int s = -RS * (1 << ES); s < RS * (1 << ES); s++) begin
      for (int sg = 0; sg < 2; sg++) begin
        f = (s % 3 == 0 || s % (1 << ES) == 0) ? 64'd0 : {$urandom, $urandom};
        w = N'(encode(1'(sg), s, f, N, RS, ES));
        step(prev, w, 1'(k++));
        prev = w;
      end
    end
    for (int i = 0; i < NRAND; i++) step(N'({$urandom, $urandom}), N'({$urandom, $urandom}), 1'(i));
    done = 1;
  end

endmodule
