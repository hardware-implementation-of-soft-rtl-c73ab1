// tb_ep_var_est: checks v^d = v^e C_EP against floating point for every
// v^e and C_EP pair (u3.5 times u2.6, saturated to u3.5); within 0.5 LSB.
module tb_ep_var_est;
  import smd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  var8_t ve, vd;
  cep8_t cep;

  ep_var_est dut (.ve(ve), .cep(cep), .vd(vd));

  task automatic run();
    for (int v = 0; v < 256; v++) begin
      for (int c = 0; c < 256; c++) begin
        real r = v * (c / 64.0);
        if (r > 255.0) r = 255.0;
        ve = 8'(v); cep = 8'(c);
        #1;
        checks++;
        if (real'(vd) - r > 0.5 || real'(vd) - r < -0.5) begin
          failures++;
          if (failures < 10) $display("FAIL ve=%0d c=%0d vd=%0d ref=%f", v, c, vd, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run();

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
