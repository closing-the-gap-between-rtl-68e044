// bposit_pkg: constants and helper functions shared by the b-posit decoder
// and encoder.
//
// A b-posit <N, rS, eS> is an N-bit posit whose regime field is at most rS
// bits long. The regime value then lies in -rS .. rS-1, which needs
// $clog2(rS)+1 bits in 2's complement (4 bits for the default rS = 6, as in
// the published circuit). The defaults here are the main configuration,
// <32, 6, 5>; N = 16 and N = 64 with the same rS and eS are the other two
// sizes the design was characterised at.
package bposit_pkg;

  localparam int unsigned DEFAULT_N  = 32;  // precision
  localparam int unsigned DEFAULT_RS = 6;   // maximum regime size rS
  localparam int unsigned DEFAULT_ES = 5;   // exponent size eS

  // Width of the 2's-complement regime value for a maximum regime size rs.
  function automatic int unsigned regime_width(int unsigned rs);
    return $clog2(rs) + 1;
  endfunction

  // Width of the significand (fraction) port: the word minus the sign bit,
  // the shortest (2-bit) regime and the exponent.
  function automatic int unsigned sig_width(int unsigned n, int unsigned es);
    return n - 3 - es;
  endfunction

endpackage
