// tb_psk8_demap: checks the 8-PSK demapper against exact max-log-MAP LLRs
// computed by brute force over the 8 constellation points:
//   L(d_q) = (min_{b_q=1} |x-a|^2 - min_{b_q=0} |x-a|^2) / v.
// The semi-analytical method is exact max-log-MAP, so the only differences
// come from the s2.5 table entries and the truncating divider; a tolerance of
// 2 LSB plus 3% of |L| covers them. The hard decision is checked exactly
// against the index of the nearest point. All 8 decision regions are hit.
module tb_psk8_demap;
  import smd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int hits [8];

  sym8_t xr, xi;
  var8_t ve;
  llr8_t llr [3];
  logic [2:0] m;

  psk8_demap dut (.xr(xr), .xi(xi), .ve(ve), .llr(llr), .m(m));

  real pr [8], pim [8];

  task automatic run();
    real pi_v = 3.14159265358979;
    for (int k = 0; k < 8; k++) begin
      real a = (2 * k + 1) * pi_v / 8.0;
      real re = $cos(a), im = $sin(a);
      int lbl = ((im < 0) ? 4 : 0) + ((re < 0) ? 2 : 0) + (((re < 0 ? -re : re) < (im < 0 ? -im : im)) ? 1 : 0);
      pr[lbl] = re;
      pim[lbl] = im;
    end
    for (int n = 0; n < 6000; n++) begin
      int ir = $signed($urandom_range(0, 120)) - 60;
      int ii = $signed($urandom_range(0, 120)) - 60;
      int iv = $urandom_range(3, 255);
      real x_r = ir / 32.0, x_i = ii / 32.0, v = iv / 32.0;
      real dmin = 1.0e9;
      int best = 0;
      if ((ir < 0 ? -ir : ir) == (ii < 0 ? -ii : ii) || ir == 0 || ii == 0) continue;  // skip ties
      xr = 8'(ir); xi = 8'(ii); ve = 8'(iv);
      #1;
      for (int b = 0; b < 8; b++) begin
        real dd = (x_r - pr[b]) ** 2 + (x_i - pim[b]) ** 2;
        if (dd < dmin) begin dmin = dd; best = b; end
      end
      hits[best]++;
      checks++;
      if (m != 3'(best)) begin
        failures++;
        if (failures < 10) $display("FAIL m x=(%0d,%0d) got=%0d ref=%0d", ir, ii, m, best);
      end
      for (int q = 0; q < 3; q++) begin
        real d0 = 1.0e9, d1 = 1.0e9, r, e, tol;
        for (int b = 0; b < 8; b++) begin
          real dd = (x_r - pr[b]) ** 2 + (x_i - pim[b]) ** 2;
          if (((b >> q) & 1) == 0) begin if (dd < d0) d0 = dd; end
          else begin if (dd < d1) d1 = dd; end
        end
        r = (d1 - d0) / v * 8.0;
        if (r > 127.0) r = 127.0;
        if (r < -127.0) r = -127.0;
        e = r - real'(llr[q]);
        tol = 2.0 + 0.03 * (r < 0 ? -r : r);
        checks++;
        if (e > tol || e < -tol) begin
          failures++;
          if (failures < 10) $display("FAIL q=%0d x=(%0d,%0d) v=%0d got=%0d ref=%f", q + 1, ir, ii, iv, llr[q], r);
        end
      end
    end
    for (int b = 0; b < 8; b++) begin
      checks++;
      if (hits[b] == 0) begin failures++; $display("FAIL region %0d never hit", b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run();

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
