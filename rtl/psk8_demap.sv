// psk8_demap: semi-analytical max-log-MAP demapper for Gray-mapped 8-PSK.
//
// Step 1, hard decision: m = 4(I(x)<0) + 2(R(x)<0) + (|R(x)| < |I(x)|), which
// is the label of the nearest constellation point alpha*.
// Step 2, LUT_8PSK(m) gives Delta_{alpha*,q} for q = 1..3.
// Step 3, L_e(d_q) = (R(x) R(Delta_q) + I(x) I(Delta_q)) / v_x^e.
// This replaces the search for the nearest opposite-bit symbol by one table
// read and two products per bit (the paper's method). Bit d_q is label bit
// m[q-1]: d_1 is the |R|<|I| bit, d_2 the R<0 bit, d_3 the I<0 bit.
//
// Interface: xr, xi (s2.5), ve (u3.5) -> llr[0..2] = L_e(d_1..d_3) (s4.3),
// m. Combinational. Formats and the divider are this design's choices.
module psk8_demap
  import smd_pkg::*;
(
  input  sym8_t      xr,
  input  sym8_t      xi,
  input  var8_t      ve,
  output llr8_t      llr [3],
  output logic [2:0] m
);
  sym8_t dre [3];
  sym8_t dim [3];
  logic signed [8:0] axr, axi;
  logic signed [31:0] num [3];

  psk8_lut u_lut (.m(m), .delta_re(dre), .delta_im(dim));

  // hard decision (eq. for m)
  always_comb begin
    axr = (xr < 0) ? -9'(xr) : 9'(xr);
    axi = (xi < 0) ? -9'(xi) : 9'(xi);
    m = {xi < 0, xr < 0, axr < axi};
  end

  // projections on the table vectors, divided by the variance
  always_comb begin
    for (int q = 0; q < 3; q++) begin
      num[q] = 32'(xr) * 32'(dre[q]) + 32'(xi) * 32'(dim[q]);
      llr[q] = llr_div(num[q], ve, SYM_FRAC);
    end
  end
endmodule
