// qpsk_softmap: bitwise soft mapper for one component of a QPSK symbol.
//
// With Gray labelling and independent bits, the a posteriori mean of a
// component is mu = p / sqrt(2), p being the soft bit of the bit that
// component carries (paper's closed form).
//
// Interface: p (s1.6) -> mu (s2.5). Combinational. 1/sqrt(2) = 181/256 and
// rounding to nearest are this design's choices.
module qpsk_softmap
  import smd_pkg::*;
(
  input  pbit8_t p,
  output sym8_t  mu
);
  localparam int K_ISQRT2_F8 = 181;  // 1/sqrt(2) * 2^8

  logic signed [31:0] prod;  // 14 fractional bits

  always_comb begin
    prod = 32'(p) * 32'(K_ISQRT2_F8);
    mu   = sym_from_pbit(prod, 8);
  end
endmodule
