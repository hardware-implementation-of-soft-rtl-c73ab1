// tb_ep_soft_est: checks x^d = mu + C_EP (mu - x^e) against floating point for
// random operands, including saturating cases; within 0.55 LSB of s2.5.
module tb_ep_soft_est;
  import smd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_sat = 0;

  sym8_t mu, xe, xd;
  cep8_t cep;

  ep_soft_est dut (.mu(mu), .xe(xe), .cep(cep), .xd(xd));

  task automatic run();
    for (int n = 0; n < 20000; n++) begin
      int m = $signed($urandom_range(0, 255)) - 128;
      int x = $signed($urandom_range(0, 255)) - 128;
      int c = $urandom_range(0, 255);
      real r = m + (c / 64.0) * (m - x);
      if (r > 127.0) begin r = 127.0; n_sat++; end
      if (r < -128.0) begin r = -128.0; n_sat++; end
      mu = 8'(m); xe = 8'(x); cep = 8'(c);
      #1;
      checks++;
      if (real'(xd) - r > 0.55 || real'(xd) - r < -0.55) begin
        failures++;
        if (failures < 10) $display("FAIL mu=%0d xe=%0d c=%0d xd=%0d ref=%f", m, x, c, xd, r);
      end
    end
    checks++;
    if (n_sat == 0) failures++;
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
