// bposit_decoder: combinational decoder for b-posits <N, RS, ES>.
//
// A b-posit is a posit whose regime is at most RS bits long. With that
// bound the regime can only be 2 .. RS bits wide, so instead of a leading-bit
// counter followed by a shifter, every field is taken from a fixed tap of the
// word through one (RS-1)-input multiplexer, and all fields come out in
// parallel:
//
//   1. bp_regime_onehot XORs bits N-3 .. N-1-RS with the regime MSB (bit N-2)
//      and makes a one-hot string naming the regime size (2 .. RS).
//   2. That string selects, in the EXP_SIG multiplexer, the word without its
//      sign and regime, left-aligned and zero-filled to N-3 bits:
//      word[N-4:0], {word[N-5:0],0}, ..., {word[N-2-RS:0],0..0}.
//      The top ES bits are the raw exponent, the rest the significand.
//   3. In parallel bp_regime_prienc turns the one-hot string into the code -k
//      (k = run length), and an XOR with (bit N-2 ^ bit N-1) gives the regime.
//
// The word stays in 2's-complement form: no negation is done. The outputs
// obey  value = (1 - 3*sign + f) * 2^(regime*2^ES + exponent)  with f the
// significand as a fraction, except that for a negative word with a zero
// significand the true scale is one higher: exp_cin (= sign & significand==0)
// flags that case and is meant to be added to the exponent by the arithmetic
// stage. {regime, exponent} is therefore the raw regime/exponent XORed with
// the sign (a 1's complement), and exponent is raw exponent ^ sign.
// chck is the NOR of bits N-2..0 and marks zero (sign 0) or NaR (sign 1);
// the other outputs are then not meaningful.
//
// Interface: bposit[N-1:0] in; sign, chck, regime[RW-1:0] (2's complement,
// -RS .. RS-1), exponent[ES-1:0], significand[N-4-ES:0], exp_cin out.
// Timing: purely combinational, no clock; the critical path is XOR, NOT,
// AND, then the multiplexer or priority encoder.
//
// Follows the published decoder in structure (taps, one-hot select, XOR of
// the exponent with the sign, exp_cin, NOR for chck). This design's own
// choices: the polarity of the priority-encoder code (so the final XOR takes
// bit N-2 ^ bit N-1 as drawn), exp_cin as sign AND (significand == 0), and
// widths written for any RS rather than only RS = 6.
module bposit_decoder #(
  parameter int unsigned N  = bposit_pkg::DEFAULT_N,
  parameter int unsigned RS = bposit_pkg::DEFAULT_RS,
  parameter int unsigned ES = bposit_pkg::DEFAULT_ES,
  localparam int unsigned RW = bposit_pkg::regime_width(RS),
  localparam int unsigned SW = bposit_pkg::sig_width(N, ES)
) (
  input  logic [N-1:0]  bposit,
  output logic          sign,
  output logic          chck,
  output logic [RW-1:0] regime,
  output logic [ES-1:0] exponent,
  output logic [SW-1:0] significand,
  output logic          exp_cin
);

  // Every regime size must leave room for the whole exponent field.
  if (N < RS + ES + 2) begin : g_bad_size
    $error("bposit_decoder: N must be at least RS + ES + 2");
  end
  if (RS < 2) begin : g_bad_rs
    $error("bposit_decoder: RS must be at least 2");
  end

  localparam int unsigned MW = N - 3;  // multiplexer width: exponent + significand

  logic [RS-1:0] onehot;
  logic [RW-1:0] pe_code;
  logic [MW-1:0] exp_sig;
  logic [MW-1:0] taps [RS];  // tap j: regime size min(j+2, RS)

  assign sign = bposit[N-1];
  assign chck = ~|bposit[N-2:0];

  bp_regime_onehot #(.RS(RS)) u_onehot (
    .rmsb  (bposit[N-2]),
    .rbits (bposit[N-3 -: RS-1]),
    .onehot(onehot)
  );

  bp_regime_prienc #(.RS(RS)) u_prienc (
    .onehot(onehot),
    .code  (pe_code)
  );

  // Multiplexer inputs: the word without sign and regime, zero-filled.
  // Sizes RS-1 (ended by an opposite bit) and RS (ended by the bound) both
  // have an RS-bit regime and share one tap.
  for (genvar j = 0; j < RS; j++) begin : g_tap
    localparam int unsigned SZ = (j + 2 < RS) ? j + 2 : RS;
    assign taps[j] = MW'({bposit[N-2-SZ:0], {(SZ-2){1'b0}}});
  end

  // EXP_SIG MUX: one-hot select, MSB of onehot = smallest regime.
  always_comb begin
    exp_sig = '0;
    for (int unsigned j = 0; j < RS; j++) begin
      if (onehot[RS-1-j]) exp_sig = taps[j];
    end
  end

  assign exponent    = exp_sig[MW-1 -: ES] ^ {ES{sign}};
  assign significand = exp_sig[SW-1:0];
  assign exp_cin     = sign & ~|exp_sig[SW-1:0];
  assign regime      = pe_code ^ {RW{bposit[N-2] ^ bposit[N-1]}};

endmodule
