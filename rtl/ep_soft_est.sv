// ep_soft_est: EP extrinsic soft feedback mean for one real component.
//
// The Gaussian division of the a posteriori estimate mu by the equalizer
// output x^e reduces, with the tabulated C_EP, to
//   x^d = mu + C_EP (mu - x^e)
// (paper's expression). Four instances run in parallel, one per real value of
// a two-symbol word; the block is the same for every constellation.
//
// Interface: mu, xe (s2.5), cep (u2.6) -> xd (s2.5, saturated).
// Combinational. Rounding to nearest and saturation are design choices.
module ep_soft_est
  import smd_pkg::*;
(
  input  sym8_t mu,
  input  sym8_t xe,
  input  cep8_t cep,
  output sym8_t xd
);
  logic signed [31:0] diff, corr;

  always_comb begin
    diff = 32'(mu) - 32'(xe);
    corr = cep_scale(diff, cep);
    xd   = sat_s8(32'(mu) + corr);
  end
endmodule
