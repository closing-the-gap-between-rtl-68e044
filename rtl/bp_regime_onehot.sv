// bp_regime_onehot: regime run-length detector of the b-posit decoder.
//
// The regime of a b-posit starts at bit N-2 (its MSB, rmsb) and is a run of
// identical bits that ends either at the first opposite bit or when it has
// reached the maximum size RS. Each of the RS-1 bits below the regime MSB
// (rbits = word[N-3 : N-1-RS]) is XORed with rmsb, so that a bit of the run
// becomes 0 and the terminating opposite bit becomes 1. A NOT/AND network
// then marks the first 1 of that string as a one-hot vector (Table 2 of the
// format description):
//
//   x = rbits ^ rmsb   onehot        regime size   run length k
//   1xxxx              100000        2             1
//   01xxx              010000        3             2
//   ...
//   00001              000010        6             5 (ended by opposite bit)
//   00000              000001        6             6 (ended by reaching rS)
//
// Purely combinational, no clock. Interface: rmsb, rbits in; onehot out,
// exactly one bit set. The XOR/NOT/AND structure and the Table 2 mapping
// follow the published decoder; the generalisation of the widths to any RS
// (five XOR bits and six one-hot bits at RS = 6) is this design's.
module bp_regime_onehot #(
  parameter int unsigned RS = bposit_pkg::DEFAULT_RS
) (
  input  logic          rmsb,
  input  logic [RS-2:0] rbits,
  output logic [RS-1:0] onehot
);

  logic [RS-2:0] x;   // 1 where the bit differs from the regime MSB
  logic [RS-2:0] nx;  // its complement (the NOT row of the network)

  assign x  = rbits ^ {(RS-1){rmsb}};
  assign nx = ~x;

  // onehot[RS-1-j] is set when x[RS-2-j] is the first 1 seen from the MSB:
  // AND of that x bit with the inverted bits above it.
  for (genvar j = 0; j < RS - 1; j++) begin : g_and
    if (j == 0) begin : g_first
      assign onehot[RS-1] = x[RS-2];
    end else begin : g_rest
      assign onehot[RS-1-j] = x[RS-2-j] & (&nx[RS-2 -: j]);
    end
  end
  // Run of RS identical bits: regime ended by reaching its maximum size.
  assign onehot[0] = &nx;

endmodule
