// qpsk_demap: bitwise max-log-MAP demapper for one real component of a
// Gray-mapped QPSK symbol.
//
// For unit-energy QPSK the exact max-log-MAP LLR of the bit carried by a
// component x is L = 2*sqrt(2) * x / v_x^e (closed form from the paper). Bit 1
// of the label is carried by the real part (1 when R(x) < 0) and bit 2 by the
// imaginary part (1 when I(x) < 0); a positive LLR favours bit 0. The same
// block therefore serves both components.
//
// Interface: x (s2.5), ve = v_x^e (u3.5) -> llr (s4.3). Purely combinational;
// the caller registers the output. The fixed-point formats, the constant
// 2*sqrt(2) = 11585/4096 and the truncating, saturating division are this design's
// choices; the formula is the paper's.
module qpsk_demap
  import smd_pkg::*;
(
  input  sym8_t x,
  input  var8_t ve,
  output llr8_t llr
);
  localparam int K_2SQRT2_F12 = 11585;  // 2*sqrt(2) * 2^12

  logic signed [31:0] num;   // 2*sqrt(2)*x, 17 fractional bits

  always_comb begin
    num = 32'(K_2SQRT2_F12) * 32'(x);
    llr = llr_div(num, ve, 12);
  end
endmodule
