// qam16_softmap: bitwise soft mapper for one component of a 16-QAM symbol.
//
// The component is sign * level * d with level 1 or 3 and d = 1/sqrt(10).
// With independent bits, E[level] = 2 - p_amp and E[sign] = p_sgn, so
// mu = (2 - p_amp) * p_sgn / sqrt(10) (paper's closed form). For the real
// part p_amp = p_2 and p_sgn = p_4; for the imaginary part p_1 and p_3.
//
// Interface: p_amp, p_sgn (s1.6) -> mu (s2.5). Combinational.
// 1/sqrt(10) = 81/256 and rounding to nearest are this design's choices.
module qam16_softmap
  import smd_pkg::*;
(
  input  pbit8_t p_amp,
  input  pbit8_t p_sgn,
  output sym8_t  mu
);
  localparam int K_ISQRT10_F8 = 81;              // 1/sqrt(10) * 2^8
  localparam int PBIT_ONE     = 1 << PBIT_FRAC;  // 1.0 in s1.6

  logic signed [31:0] lvl, prod;  // lvl: 6 fractional bits, prod: 20

  always_comb begin
    lvl  = 32'sd2 * PBIT_ONE - 32'(p_amp);
    prod = lvl * 32'(p_sgn) * 32'(K_ISQRT10_F8);
    mu   = sym_from_pbit(prod, PBIT_FRAC + 8);
  end
endmodule
