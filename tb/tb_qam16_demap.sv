// tb_qam16_demap: checks the 16-QAM component demapper against the closed
// forms of the amplitude and sign bit LLRs evaluated in floating point with
// d = 1/sqrt(10), for every 8-bit x and a spread of variances. The constants
// are rounded in hardware (2d = 162/256 instead of 0.63246), so a deviation of
// up to 1.5 LSB (1/8 each) is accepted; region and sign errors exceed it.
module tb_qam16_demap;
  import smd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_inner = 0, n_outer = 0;

  sym8_t x;
  var8_t ve;
  llr8_t la, ls;

  qam16_demap dut (.x(x), .ve(ve), .llr_amp(la), .llr_sgn(ls));

  function automatic real clamp(real r);
    if (r > 127.0) return 127.0;
    if (r < -127.0) return -127.0;
    return r;
  endfunction

  task automatic chk(string what, real r, llr8_t got, int xi, int vi);
    real e = r - real'(got);
    checks++;
    if (e > 1.5 || e < -1.5) begin
      failures++;
      if (failures < 10) $display("FAIL %s x=%0d v=%0d got=%0d ref=%f", what, xi, vi, got, r);
    end
  endtask

  task automatic run();
    real d = 1.0 / $sqrt(10.0);
    int vlist[$] = '{4, 8, 13, 16, 21, 32, 40, 64, 100, 128, 200, 255};
    for (int k = 0; k < 8; k++) vlist.push_back($urandom_range(4, 255));
    foreach (vlist[j]) begin
      for (int xi = -128; xi < 128; xi++) begin
        real xr, v, ra, rs;
        x  = 8'(xi);
        ve = 8'(vlist[j]);
        #1;
        xr = xi / 32.0;
        v  = vlist[j] / 32.0;
        ra = clamp(4.0 * d * (2.0 * d - (xr < 0 ? -xr : xr)) / v * 8.0);
        if (xr < 2.0 * d && xr > -2.0 * d) begin
          rs = 4.0 * d * xr / v * 8.0; n_inner++;
        end else if (xr > 0) begin
          rs = 8.0 * d * (xr - d) / v * 8.0; n_outer++;
        end else begin
          rs = 8.0 * d * (xr + d) / v * 8.0; n_outer++;
        end
        chk("amp", ra, la, xi, vlist[j]);
        chk("sgn", clamp(rs), ls, xi, vlist[j]);
      end
    end
    checks++;
    if (n_inner == 0 || n_outer == 0) failures++;
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
