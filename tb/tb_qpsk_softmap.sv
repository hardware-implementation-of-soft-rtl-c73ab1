// tb_qpsk_softmap: checks mu = p / sqrt(2) against floating point for every
// 8-bit soft bit in [-1, 1]; the s2.5 result must be within 0.6 LSB.
module tb_qpsk_softmap;
  import smd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pbit8_t p;
  sym8_t  mu;

  qpsk_softmap dut (.p(p), .mu(mu));

  task automatic run();
    for (int k = -64; k <= 64; k++) begin
      real r = (k / 64.0) / $sqrt(2.0) * 32.0;
      p = 8'(k);
      #1;
      checks++;
      if (real'(mu) - r > 0.6 || real'(mu) - r < -0.6) begin
        failures++;
        if (failures < 10) $display("FAIL p=%0d mu=%0d ref=%f", k, mu, r);
      end
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
