// tb_qam16_softmap: checks mu = (2 - p_amp) p_sgn / sqrt(10) against floating
// point for every pair of soft bits in [-1, 1]; within 0.75 LSB of s2.5.
// Hard soft bits must land exactly on the levels +-d, +-3d.
module tb_qam16_softmap;
  import smd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pbit8_t pa, ps;
  sym8_t  mu;

  qam16_softmap dut (.p_amp(pa), .p_sgn(ps), .mu(mu));

  task automatic run();
    for (int a = -64; a <= 64; a++) begin
      for (int s = -64; s <= 64; s++) begin
        real r = (2.0 - a / 64.0) * (s / 64.0) / $sqrt(10.0) * 32.0;
        pa = 8'(a);
        ps = 8'(s);
        #1;
        checks++;
        if (real'(mu) - r > 0.75 || real'(mu) - r < -0.75) begin
          failures++;
          if (failures < 10) $display("FAIL pa=%0d ps=%0d mu=%0d ref=%f", a, s, mu, r);
        end
      end
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
