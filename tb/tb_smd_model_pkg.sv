// tb_smd_model_pkg: floating-point reference of the soft mapper/demapper,
// written directly from the closed-form expressions with exact constants.
// Used by the end-to-end testbenches; independent of the RTL arithmetic.
package tb_smd_model_pkg;
  import smd_pkg::*;

  localparam real PI_V = 3.14159265358979;

  // Unit-energy 8-PSK point with Gray label m (m[2] = I<0, m[1] = R<0,
  // m[0] = |R|<|I|).
  function automatic void psk8_point(input int m, output real re, output real im);
    for (int k = 0; k < 8; k++) begin
      real a = (2 * k + 1) * PI_V / 8.0;
      real r = $cos(a), i = $sin(a);
      int lbl = ((i < 0) ? 4 : 0) + ((r < 0) ? 2 : 0) +
                (((r < 0 ? -r : r) < (i < 0 ? -i : i)) ? 1 : 0);
      if (lbl == m) begin re = r; im = i; end
    end
  endfunction

  function automatic real clamp127(real r);
    if (r > 127.0) return 127.0;
    if (r < -127.0) return -127.0;
    return r;
  endfunction

  // Max-log-MAP LLR of bit q (0-based) in units of 1/8, before clamping.
  // xr, xi and v are real values.
  function automatic real llr_ref(mod_t md, real xr, real xi, real v, int q);
    real d = 1.0 / $sqrt(10.0);
    real x, ax;
    case (md)
      MOD_QPSK: return 2.0 * $sqrt(2.0) * ((q == 0) ? xr : xi) / v * 8.0;
      MOD_QAM16: begin
        // q=0: d1 (I amplitude), 1: d2 (R amplitude), 2: d3 (I sign), 3: d4 (R sign)
        x  = (q == 0 || q == 2) ? xi : xr;
        ax = (x < 0) ? -x : x;
        if (q < 2) return 4.0 * d * (2.0 * d - ax) / v * 8.0;
        if (ax < 2.0 * d) return 4.0 * d * x / v * 8.0;
        if (x > 0) return 8.0 * d * (x - d) / v * 8.0;
        return 8.0 * d * (x + d) / v * 8.0;
      end
      default: begin
        real d0 = 1.0e9, d1 = 1.0e9;
        if (q > 2) return 0.0;
        for (int b = 0; b < 8; b++) begin
          real pr, pi, dd;
          psk8_point(b, pr, pi);
          dd = (xr - pr) ** 2 + (xi - pi) ** 2;
          if (((b >> q) & 1) == 0) begin if (dd < d0) d0 = dd; end
          else begin if (dd < d1) d1 = dd; end
        end
        return (d1 - d0) / v * 8.0;
      end
    endcase
  endfunction

  // Piecewise-linear tanh(L/2) of an s4.3 LLR value, as a real in [-1, 1].
  function automatic real pwl_soft_bit(int l);
    real u = (l / 8.0) / 2.0;
    real au = (u < 0) ? -u : u;
    real sg = (u > 0) ? 1.0 : (u < 0) ? -1.0 : 0.0;
    if (au < 0.5) return u;
    if (au < 1.0) return 0.5 * u + 0.25 * sg;
    if (au < 2.0) return 0.25 * u + 0.5 * sg;
    return sg;
  endfunction

  // Soft symbol from soft bits p[0..3] (p_1..p_4), in units of 1/32.
  function automatic void mu_ref(mod_t md, input real p [4], output real re, output real im);
    real a8 = $sqrt((2.0 - $sqrt(2.0)) / 8.0);
    real b8 = $sqrt((2.0 + $sqrt(2.0)) / 8.0);
    case (md)
      MOD_QPSK: begin
        re = p[0] / $sqrt(2.0); im = p[1] / $sqrt(2.0);
      end
      MOD_QAM16: begin
        re = (2.0 - p[1]) * p[3] / $sqrt(10.0);
        im = (2.0 - p[0]) * p[2] / $sqrt(10.0);
      end
      default: begin
        re = (b8 + a8 * p[0]) * p[1];
        im = (b8 - a8 * p[0]) * p[2];
      end
    endcase
    re = re * 32.0;
    im = im * 32.0;
  endfunction
endpackage
