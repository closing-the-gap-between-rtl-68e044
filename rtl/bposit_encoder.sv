// bposit_encoder: combinational encoder for b-posits <N, RS, ES>.
//
// The inverse of bposit_decoder. Because the regime is at most RS bits, the
// word can only be laid out in RS-1 ways (regime sizes 2 .. RS); all of them
// are built in parallel and a multiplexer picks one:
//
//   1. x = regime[RW-2:0] ^ regime[RW-1] (the regime after 1's complement;
//      r and ~r give regimes of the same size, Table 3). x selects the
//      layout (size min(x+2, RS)) and drives the binary decoder
//      bp_regime_bindec, whose output with a 0 prepended is the intermediate
//      regime string (Table 4).
//   2. That string is XORed with the inverse of (regime MSB ^ sign), giving
//      raw_reg: the regime bits as they appear in the word.
//   3. The exponent is put in 2's complement form: exp ^ sign, plus 1 when the
//      word is negative and its significand is zero (sig_zero). The result
//      and the significand form exp_sig[N-4:0].
//   4. Layout multiplexer: {raw_reg[RS:RS+1-SZ], exp_sig[N-4:SZ-2]} for
//      regime size SZ; significand LSBs that do not fit are dropped.
//   5. If the exponent increment carried out, the regime string must change
//      by one instead of being added to: a second multiplexer shifts the
//      layout left (regime run of 0 bits one shorter) or right with a new
//      leading regime bit (run of 1 bits one longer).
//
// Input convention (the decoder's, after the arithmetic stage has absorbed
// exp_cin): value = (1 - 3*sign + f) * 2^(regime*2^ES + exp) where f is
// significand as a fraction, except that a negative value with significand 0
// is -2^(regime*2^ES + exp). So decode -> add exp_cin to {regime, exponent}
// -> encode gives back the original word. regime must be -RS .. RS-1 and the
// value must be representable; there is no rounding, no saturation, and no
// zero/NaR input (the word for those is a constant the caller can select).
//
// Interface: sign, regime[RW-1:0], exp[ES-1:0], significand[N-4-ES:0],
// sig_zero in; bposit[N-1:0] out. Timing: purely combinational; critical
// path three XORs, the binary decoder and two multiplexers.
//
// Follows the published encoder in structure. This design's own choices:
// the XOR polarities, selecting the layout with x in binary, and one extra
// input on the second multiplexer: a carry into the RS-bit regime of 0 bits
// (0..00, value -RS) must give 0..01, which neither a shift nor the
// unshifted layout produces. The carry-adjust inputs follow the text
// ("reduced by one" / "increases by one"); the figure prints [N-3:0] beside
// the raw_reg[6] input, read here as the word shifted right by one.
module bposit_encoder #(
  parameter int unsigned N  = bposit_pkg::DEFAULT_N,
  parameter int unsigned RS = bposit_pkg::DEFAULT_RS,
  parameter int unsigned ES = bposit_pkg::DEFAULT_ES,
  localparam int unsigned RW = bposit_pkg::regime_width(RS),
  localparam int unsigned SW = bposit_pkg::sig_width(N, ES)
) (
  input  logic          sign,
  input  logic [RW-1:0] regime,
  input  logic [ES-1:0] exp,
  input  logic [SW-1:0] significand,
  input  logic          sig_zero,
  output logic [N-1:0]  bposit
);

  if (N < RS + ES + 2) begin : g_bad_size
    $error("bposit_encoder: N must be at least RS + ES + 2");
  end
  if (RS < 2) begin : g_bad_rs
    $error("bposit_encoder: RS must be at least 2");
  end

  localparam int unsigned MW = N - 3;  // exponent + significand
  localparam int unsigned XW = RW - 1;

  logic [XW-1:0] x;          // regime after 1's complement
  logic [RS:0]   inter;      // intermediate regime string
  logic          raw_neg;    // regime as stored in the word is negative
  logic [RS:0]   raw_reg;    // regime bits as stored in the word
  logic [ES-1:0] exp_tc;     // exponent in 2's complement form
  logic          exp_ovf;    // carry out of the exponent increment
  logic [MW-1:0] exp_sig;
  logic [N-2:0]  layout [RS-1];  // layout j: regime size j+2
  logic [N-2:0]  packed_w;       // first multiplexer
  logic [N-2:0]  body;           // second multiplexer

  assign x       = regime[XW-1:0] ^ {XW{regime[RW-1]}};
  assign raw_neg = regime[RW-1] ^ sign;

  bp_regime_bindec #(.RS(RS)) u_bindec (
    .x    (x),
    .inter(inter)
  );

  assign raw_reg = inter ^ {(RS+1){~raw_neg}};

  assign {exp_ovf, exp_tc} = {1'b0, exp ^ {ES{sign}}} + (ES+1)'(sign & sig_zero);
  assign exp_sig = {exp_tc, significand};

  for (genvar j = 0; j < RS - 1; j++) begin : g_layout
    localparam int unsigned SZ = j + 2;
    assign layout[j] = {raw_reg[RS -: SZ], exp_sig[MW-1 : SZ-2]};
  end

  // Layout multiplexer, selected by x (x = RS-1 also has an RS-bit regime).
  always_comb begin
    packed_w = layout[RS-2];
    for (int unsigned j = 0; j < RS - 1; j++) begin
      if (x == XW'(j)) packed_w = layout[j];
    end
  end

  // Exponent-overflow multiplexer. On a carry the exponent and significand
  // are all zero, so shifting moves only regime bits.
  always_comb begin
    if (!exp_ovf) begin
      body = packed_w;
    end else if (!raw_neg) begin
      body = {raw_reg[RS], packed_w[N-2:1]};          // run of 1s one longer
    end else if (x == XW'(RS - 1)) begin
      body = {{(RS-1){1'b0}}, 1'b1, {(N-1-RS){1'b0}}}; // 0..00 -> 0..01
    end else begin
      body = {packed_w[N-3:0], 1'b0};                 // run of 0s one shorter
    end
  end

  assign bposit = {sign, body};

endmodule
