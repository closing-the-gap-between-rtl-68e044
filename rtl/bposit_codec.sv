// bposit_codec: b-posit decode/encode front and back end of a two-operand
// arithmetic unit.
//
// A posit operation is done in three steps: decode each operand into a
// float-like set of fields, do the arithmetic on those fields, and encode
// the result back into a posit word. This module holds the two decode steps
// and the encode step for b-posits <N, RS, ES>: two bposit_decoder instances
// work side by side on operands a and b, and one bposit_encoder packs the
// result. The arithmetic (add, multiply, ..., and rounding) sits outside, on
// the a_*/b_* outputs and res_* inputs.
//
// Field conventions (see bposit_decoder and bposit_encoder):
//   decoded:  value = (1 - 3*sign + f) * 2^(regime*2^ES + exponent), f the
//             significand as a fraction; for a negative word with a zero
//             significand exp_cin is 1 and the value is
//             -2^(regime*2^ES + exponent + 1). The arithmetic stage adds
//             exp_cin to the scale. chck marks zero (sign 0) or NaR (sign 1).
//   result:   the same fields with that carry already added; res_sig_zero
//             must be 1 exactly when res_significand is zero.
// A result that decodes straight back (regime/exponent + exp_cin, same
// sign and significand) re-encodes to the operand word.
//
// Timing: purely combinational from a to a_*, b to b_*, res_* to
// res_bposit; nothing is registered. Splitting decode and encode around one
// arithmetic stage, and decoding both operands in parallel, follow the
// published energy model; the module boundary and port names are this
// design's.
module bposit_codec #(
  parameter int unsigned N  = bposit_pkg::DEFAULT_N,
  parameter int unsigned RS = bposit_pkg::DEFAULT_RS,
  parameter int unsigned ES = bposit_pkg::DEFAULT_ES,
  localparam int unsigned RW = bposit_pkg::regime_width(RS),
  localparam int unsigned SW = bposit_pkg::sig_width(N, ES)
) (
  // operand a
  input  logic [N-1:0]  a,
  output logic          a_sign,
  output logic          a_chck,
  output logic [RW-1:0] a_regime,
  output logic [ES-1:0] a_exponent,
  output logic [SW-1:0] a_significand,
  output logic          a_exp_cin,
  // operand b
  input  logic [N-1:0]  b,
  output logic          b_sign,
  output logic          b_chck,
  output logic [RW-1:0] b_regime,
  output logic [ES-1:0] b_exponent,
  output logic [SW-1:0] b_significand,
  output logic          b_exp_cin,
  // result from the arithmetic stage
  input  logic          res_sign,
  input  logic [RW-1:0] res_regime,
  input  logic [ES-1:0] res_exp,
  input  logic [SW-1:0] res_significand,
  input  logic          res_sig_zero,
  output logic [N-1:0]  res_bposit
);

  bposit_decoder #(.N(N), .RS(RS), .ES(ES)) u_dec_a (
    .bposit     (a),
    .sign       (a_sign),
    .chck       (a_chck),
    .regime     (a_regime),
    .exponent   (a_exponent),
    .significand(a_significand),
    .exp_cin    (a_exp_cin)
  );

  bposit_decoder #(.N(N), .RS(RS), .ES(ES)) u_dec_b (
    .bposit     (b),
    .sign       (b_sign),
    .chck       (b_chck),
    .regime     (b_regime),
    .exponent   (b_exponent),
    .significand(b_significand),
    .exp_cin    (b_exp_cin)
  );

  bposit_encoder #(.N(N), .RS(RS), .ES(ES)) u_enc (
    .sign       (res_sign),
    .regime     (res_regime),
    .exp        (res_exp),
    .significand(res_significand),
    .sig_zero   (res_sig_zero),
    .bposit     (res_bposit)
  );

endmodule
