// tanh_pwl: soft bit p = tanh(L/2) from an LLR, with the paper's
// piecewise-linear tanh whose slopes and offsets are powers of two:
//   tanh(u) = u                    |u| < 0.5
//           = u/2 + sign(u)/4      0.5 <= |u| < 1
//           = u/4 + sign(u)/2      1   <= |u| < 2
//           = sign(u)              otherwise
// With u = L/2, L in s4.3 and p in s1.6, each segment is a shift and an add:
// |L| < 8 LSB: p = 4L; |L| < 16: p = 2L +- 16; |L| < 32: p = L +- 32; else +-64.
//
// Interface: llr (s4.3) -> p (s1.6). Combinational, no multiplier.
module tanh_pwl
  import smd_pkg::*;
(
  input  llr8_t  llr,
  output pbit8_t p
);
  logic signed [9:0] l, al, pv;

  always_comb begin
    l  = 10'(llr);
    al = (l < 0) ? -l : l;
    if (al < 10'sd8)       pv = l <<< 2;
    else if (al < 10'sd16) pv = (l <<< 1) + ((l < 0) ? -10'sd16 : 10'sd16);
    else if (al < 10'sd32) pv = l + ((l < 0) ? -10'sd32 : 10'sd32);
    else                   pv = (l < 0) ? -10'sd64 : 10'sd64;
    p = sat_s8(32'(pv));
  end
endmodule
