// qam16_demap: bitwise max-log-MAP demapper for one real component of a
// Gray-mapped, unit-energy 16-QAM symbol (levels +-d, +-3d, d = 1/sqrt(10)).
//
// A component carries two bits. The amplitude bit (d1 for I, d2 for R) is 1
// on the outer levels; its LLR is 4d(2d - |x|)/v_x^e. The sign bit (d3 for I,
// d4 for R) is 1 for negative values; its LLR is piecewise linear:
//   4d x / v            for |x| < 2d
//   8d (x - d) / v      for x >= 2d
//   8d (x + d) / v      for x <= -2d
// These are the paper's closed forms; the two branches agree at |x| = 2d.
//
// Interface: x (s2.5), ve (u3.5) -> llr_amp, llr_sgn (s4.3). Combinational.
// Internally x is shifted to 8 fractional bits so that the thresholds 2d and d
// keep 8 fractional bits of precision (design choice); 4d and 8d have 6.
module qam16_demap
  import smd_pkg::*;
(
  input  sym8_t x,
  input  var8_t ve,
  output llr8_t llr_amp,
  output llr8_t llr_sgn
);
  localparam int K_4D_F6 = 81;   // 4/sqrt(10) * 2^6
  localparam int K_8D_F6 = 162;  // 8/sqrt(10) * 2^6
  localparam int K_2D_F8 = 162;  // 2/sqrt(10) * 2^8
  localparam int K_D_F8  = 81;   // 1/sqrt(10) * 2^8
  localparam int KF      = 9;    // 6 (slope) + 3 (x rescaled to 8 frac bits)

  logic signed [31:0] x8, ax8, num_amp, num_sgn;

  always_comb begin
    x8  = 32'(x) <<< 3;                // x with 8 fractional bits
    ax8 = (x8 < 0) ? -x8 : x8;
    num_amp = 32'(K_4D_F6) * (32'(K_2D_F8) - ax8);
    if (ax8 < 32'(K_2D_F8))
      num_sgn = 32'(K_4D_F6) * x8;
    else if (x8 > 0)
      num_sgn = 32'(K_8D_F6) * (x8 - 32'(K_D_F8));
    else
      num_sgn = 32'(K_8D_F6) * (x8 + 32'(K_D_F8));
    llr_amp = llr_div(num_amp, ve, KF);
    llr_sgn = llr_div(num_sgn, ve, KF);
  end
endmodule
