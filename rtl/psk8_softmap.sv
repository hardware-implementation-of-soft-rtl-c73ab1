// psk8_softmap: bitwise soft mapper for a Gray-mapped 8-PSK symbol.
//
// Each component is sign * magnitude, where the magnitude is cos(pi/8) or
// sin(pi/8) depending on bit d_1 (the |R|<|I| bit). Writing
// cos(pi/8) = b8 + a8 and sin(pi/8) = b8 - a8 with
// a8 = sqrt((2-sqrt(2))/8), b8 = sqrt((2+sqrt(2))/8), the mean is
//   R(mu) = (b8 + a8 p_1) p_2,   I(mu) = (b8 - a8 p_1) p_3
// (paper's closed form; p_2 is the soft bit of the R<0 bit, p_3 of the I<0 bit).
//
// Interface: p[0..2] = p_1..p_3 (s1.6) -> mu_re, mu_im (s2.5). Combinational.
// a8 = 69/256, b8 = 167/256 and rounding to nearest are design choices.
module psk8_softmap
  import smd_pkg::*;
(
  input  pbit8_t p [3],
  output sym8_t  mu_re,
  output sym8_t  mu_im
);
  localparam int K_A8_F8 = 69;   // sqrt((2-sqrt(2))/8) * 2^8
  localparam int K_B8_F8 = 167;  // sqrt((2+sqrt(2))/8) * 2^8

  logic signed [31:0] mag_re, mag_im, pr, pi;  // mag: 14 frac bits, pr/pi: 20

  always_comb begin
    mag_re = (32'(K_B8_F8) <<< PBIT_FRAC) + 32'(K_A8_F8) * 32'(p[0]);
    mag_im = (32'(K_B8_F8) <<< PBIT_FRAC) - 32'(K_A8_F8) * 32'(p[0]);
    pr     = mag_re * 32'(p[1]);
    pi     = mag_im * 32'(p[2]);
    mu_re  = sym_from_pbit(pr, PBIT_FRAC + 8);
    mu_im  = sym_from_pbit(pi, PBIT_FRAC + 8);
  end
endmodule
