// psk8_lut: the 8-PSK demapping look-up table LUT_8PSK.
//
// For each hard-decided symbol alpha* (label m) the table holds three complex
// vectors Delta_{alpha*,q} = 2(1 - 2 d_q*)(alpha* - alpha_qbar*), where
// alpha_qbar* is the symbol nearest to alpha* whose q-th bit differs. The
// values are the paper's table, rounded to s2.5 (1.0824 -> 35/32,
// 1.5307 -> 49/32, 2.6131 -> 84/32). Column q belongs to label bit m[q-1].
//
// Interface: m (3 bits) -> delta_re[q], delta_im[q], q = 0..2 for d_1..d_3.
// Combinational ROM (a small LUT in an FPGA).
module psk8_lut
  import smd_pkg::*;
(
  input  logic [2:0] m,
  output sym8_t      delta_re [3],
  output sym8_t      delta_im [3]
);
  localparam sym8_t A = 8'sd35;  // 1.0824
  localparam sym8_t B = 8'sd49;  // 1.5307
  localparam sym8_t C = 8'sd84;  // 2.6131
  localparam sym8_t Z = 8'sd0;

  always_comb begin
    unique case (m)
      3'd0: begin delta_re = '{ A,  C,  Z}; delta_im = '{-A, -A,  B}; end
      3'd1: begin delta_re = '{ A,  B, -A}; delta_im = '{-A,  Z,  C}; end
      3'd2: begin delta_re = '{-A,  C,  Z}; delta_im = '{-A,  A,  B}; end
      3'd3: begin delta_re = '{-A,  B,  A}; delta_im = '{-A,  Z,  C}; end
      3'd4: begin delta_re = '{ A,  C,  Z}; delta_im = '{ A,  A,  B}; end
      3'd5: begin delta_re = '{ A,  B,  A}; delta_im = '{ A,  Z,  C}; end
      3'd6: begin delta_re = '{-A,  C,  Z}; delta_im = '{ A, -A,  B}; end
      default: begin delta_re = '{-A,  B, -A}; delta_im = '{ A,  Z,  C}; end
    endcase
  end
endmodule
