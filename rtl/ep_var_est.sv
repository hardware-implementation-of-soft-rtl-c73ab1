// ep_var_est: EP extrinsic feedback variance v_x^d = v_x^e * C_EP(v_x^e).
//
// With the tabulated C_EP the variance needs one product and no division
// (paper's expression). One instance serves a whole word, as v_x^e is common
// to all symbols of a block.
//
// Interface: ve (u3.5), cep (u2.6) -> vd (u3.5, saturated). Combinational.
// Rounding to nearest and saturation are design choices.
module ep_var_est
  import smd_pkg::*;
(
  input  var8_t ve,
  input  cep8_t cep,
  output var8_t vd
);
  logic signed [31:0] prod;

  always_comb begin
    prod = cep_scale($signed({24'd0, ve}), cep);
    vd   = sat_u8(prod);
  end
endmodule
