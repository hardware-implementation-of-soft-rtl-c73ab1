// smd_pkg: shared types, fixed-point formats, constants and arithmetic helpers
// of the EP soft mapper/demapper.
//
// Every named quantity of the datapath is 8 bits wide, as the fixed-point study
// behind this design concluded. Only the format of the equalized symbols is
// fixed by that study (1 sign, 2 integer, 5 fractional bits); the others are
// this design's choice and are listed here in one place:
//   x^e, x^d, mu^d, Delta  : signed   s2.5  (LSB 1/32)
//   v_x^e, v_x^d           : unsigned u3.5  (LSB 1/32)
//   L_e(d_q)               : signed   s4.3  (LSB 1/8, saturated to +-127)
//   p_q (soft bit)         : signed   s1.6  (LSB 1/64, range [-1, 1])
//   C_EP                   : unsigned u2.6  (LSB 1/64)
// The constants of the closed-form expressions live in the blocks that use
// them, as integers at the fractional scale noted beside each. Internal products are wider than 8 bits and are
// rounded or saturated back to 8 bits at each block's output.
package smd_pkg;

  typedef logic signed [7:0] sym8_t;   // s2.5
  typedef logic        [7:0] var8_t;   // u3.5
  typedef logic signed [7:0] llr8_t;   // s4.3
  typedef logic signed [7:0] pbit8_t;  // s1.6
  typedef logic        [7:0] cep8_t;   // u2.6

  typedef struct packed {
    sym8_t im;
    sym8_t re;
  } csym8_t;

  // One accelerator is built per constellation.
  typedef enum logic [1:0] {
    MOD_QPSK  = 2'd0,
    MOD_PSK8  = 2'd1,
    MOD_QAM16 = 2'd2
  } mod_t;

  localparam int SYM_FRAC  = 5;
  localparam int VAR_FRAC  = 5;
  localparam int LLR_FRAC  = 3;
  localparam int PBIT_FRAC = 6;
  localparam int CEP_FRAC  = 6;

  // Signed saturation of a 32-bit value to 8 bits.
  function automatic logic signed [7:0] sat_s8(input logic signed [31:0] v);
    if (v > 32'sd127)       return 8'sd127;
    else if (v < -32'sd128) return -8'sd128;
    else                    return v[7:0];
  endfunction

  // Unsigned saturation of a non-negative 32-bit value to 8 bits.
  function automatic logic [7:0] sat_u8(input logic signed [31:0] v);
    if (v > 32'sd255)    return 8'd255;
    else if (v < 32'sd0) return 8'd0;
    else                 return v[7:0];
  endfunction

  // Arithmetic right shift by sh with rounding to nearest (ties upward).
  function automatic logic signed [31:0] rshift_rnd(input logic signed [31:0] v,
                                                     input int unsigned sh);
    logic signed [31:0] half;
    half = 32'sd1 <<< (sh - 1);
    return (v + half) >>> sh;
  endfunction

  // LLR = num / v_x^e. num is a product of a symbol value (s2.5) and a
  // factor with kf fractional bits, so it carries SYM_FRAC + kf fractional
  // bits; v_x^e is u3.5 and the result s4.3. The quotient is truncated toward
  // zero and saturated symmetrically to +-127. A zero variance saturates to
  // the sign of num.
  function automatic logic signed [7:0] llr_div(input logic signed [31:0] num,
                                                input logic [7:0] ve,
                                                input int unsigned kf);
    logic signed [31:0] den, q;
    den = $signed({24'd0, ve}) <<< (SYM_FRAC + kf - LLR_FRAC - VAR_FRAC);
    if (ve == 8'd0) begin
      if (num > 0)      return 8'sd127;
      else if (num < 0) return -8'sd127;
      else              return 8'sd0;
    end
    q = num / den;
    if (q > 32'sd127)       return 8'sd127;
    else if (q < -32'sd127) return -8'sd127;
    else                    return q[7:0];
  endfunction

  // Soft-mapper output: v is a soft bit (s1.6) times a factor with kf
  // fractional bits; it is rounded to s2.5 and saturated.
  function automatic logic signed [7:0] sym_from_pbit(input logic signed [31:0] v,
                                                      input int unsigned kf);
    return sat_s8(rshift_rnd(v, PBIT_FRAC + kf - SYM_FRAC));
  endfunction

  // x * C_EP rounded back to the scale of x (C_EP is u2.6).
  function automatic logic signed [31:0] cep_scale(input logic signed [31:0] x,
                                                   input logic [7:0] cep);
    return rshift_rnd(x * $signed({24'd0, cep}), CEP_FRAC);
  endfunction

endpackage
