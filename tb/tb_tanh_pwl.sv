// tb_tanh_pwl: checks the soft-bit unit against the four-segment
// piecewise-linear tanh evaluated in floating point at u = L/2 for every 8-bit
// LLR. All slopes and offsets are powers of two, so the result must match
// exactly. Each segment must be visited, and the approximation must stay
// within 0.07 of the true tanh.
module tb_tanh_pwl;
  import smd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int seg [4];

  llr8_t  llr;
  pbit8_t p;

  tanh_pwl dut (.llr(llr), .p(p));

  task automatic run();
    for (int l = -128; l < 128; l++) begin
      real u = (l / 8.0) / 2.0;
      real au = (u < 0) ? -u : u;
      real sg = (u > 0) ? 1.0 : (u < 0) ? -1.0 : 0.0;
      real r, t;
      int k;
      if (au < 0.5)      begin r = u;                    k = 0; end
      else if (au < 1.0) begin r = 0.5 * u + 0.25 * sg;  k = 1; end
      else if (au < 2.0) begin r = 0.25 * u + 0.5 * sg;  k = 2; end
      else               begin r = sg;                   k = 3; end
      seg[k]++;
      llr = 8'(l);
      #1;
      checks++;
      if (real'(p) != r * 64.0) begin
        failures++;
        if (failures < 10) $display("FAIL L=%0d p=%0d ref=%f", l, p, r * 64.0);
      end
      t = (($exp(2.0 * u) - 1.0) / ($exp(2.0 * u) + 1.0)) * 64.0;
      checks++;
      if (real'(p) - t > 4.5 || real'(p) - t < -4.5) begin
        failures++;
        if (failures < 10) $display("FAIL tanh L=%0d p=%0d tanh=%f", l, p, t);
      end
    end
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (seg[k] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run();

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
