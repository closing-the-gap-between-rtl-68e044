// bp_regime_prienc: priority encoder that turns the one-hot regime run length
// into the regime value.
//
// Input: the one-hot string from bp_regime_onehot, MSB first, where bit
// RS-1-j set means a run of k = j+1 identical regime bits. Output: the
// regime value a run of k 0 bits stands for, r = -k, as a 2's-complement
// number of $clog2(RS)+1 bits (4 bits at RS = 6). The decoder XORs this code
// with (regime MSB ^ sign), which turns -k into k-1 for a run of 1 bits and
// folds in the sign (see bposit_decoder).
//
// The encoder is a priority encoder as in the published decoder: the highest
// set bit wins, so it also gives a defined result for a non-one-hot input.
// Choosing -k (rather than k-1) as the code is this design's choice; it lets
// the final XOR take (regime MSB ^ sign) exactly as drawn. Combinational.
module bp_regime_prienc #(
  parameter int unsigned RS = bposit_pkg::DEFAULT_RS,
  localparam int unsigned RW = bposit_pkg::regime_width(RS)
) (
  input  logic [RS-1:0] onehot,
  output logic [RW-1:0] code
);

  always_comb begin
    code = '1;  // -1: run of one bit, also the default
    // Scan from the lowest priority (LSB) to the highest so the last
    // assignment, i.e. the highest set bit, wins.
    for (int unsigned i = 0; i < RS; i++) begin
      if (onehot[i]) begin
        // bit i set -> j = RS-1-i -> code = ~j = -(j+1)
        code = ~RW'(RS - 1 - i);
      end
    end
  end

endmodule
