// bp_regime_bindec: binary decoder of the b-posit encoder that builds the
// intermediate regime string.
//
// Input x is the regime value after 1's complement (its low bits XORed with
// its MSB), 0 .. RS-1. The decoder sets one of RS outputs, MSB first, and a
// 0 is prepended, giving an (RS+1)-bit intermediate string (Table 4 of the
// format description, RS = 6):
//
//   x     decoder out   intermediate string
//   000   100000        0100000
//   001   010000        0010000
//   ...
//   100   000010        0000010
//   101   000001        0000001
//
// The top (x+2) bits of that string (at most RS) are a run of 0 bits ended
// by a 1, or RS 0 bits for x = RS-1: the regime string of a negative regime.
// Inputs above RS-1 are not valid regimes and give an all-zero output, which
// is why a 3x6 rather than a 3x8 decoder suffices. Combinational. The table
// is the published one; the width generalisation is this design's.
module bp_regime_bindec #(
  parameter int unsigned RS = bposit_pkg::DEFAULT_RS,
  localparam int unsigned XW = bposit_pkg::regime_width(RS) - 1
) (
  input  logic [XW-1:0] x,
  output logic [RS:0]   inter   // {1'b0, decoder output}
);

  logic [RS-1:0] dec;

  always_comb begin
    dec = '0;
    for (int unsigned i = 0; i < RS; i++) begin
      if (x == XW'(i)) dec[RS-1-i] = 1'b1;
    end
  end

  assign inter = {1'b0, dec};

endmodule
