// tb_psk8_softmap: checks R(mu) = (b8 + a8 p1) p2 and I(mu) = (b8 - a8 p1) p3
// against floating point for random soft bits, and checks that hard soft bits
// (+-1) give the 8-PSK point whose Gray label they encode (label bit b_q = 1
// when p_q = -1; b1 = |R|<|I|, b2 = R<0, b3 = I<0). Tolerance 0.75 LSB.
module tb_psk8_softmap;
  import smd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pbit8_t p [3];
  sym8_t  mr, mi;

  psk8_softmap dut (.p(p), .mu_re(mr), .mu_im(mi));

  task automatic one(int p1, int p2, int p3, real rr, real ri);
    p[0] = 8'(p1); p[1] = 8'(p2); p[2] = 8'(p3);
    #1;
    checks += 2;
    if (real'(mr) - rr > 0.75 || real'(mr) - rr < -0.75 ||
        real'(mi) - ri > 0.75 || real'(mi) - ri < -0.75) begin
      failures++;
      if (failures < 10) $display("FAIL p=(%0d,%0d,%0d) mu=(%0d,%0d) ref=(%f,%f)", p1, p2, p3, mr, mi, rr, ri);
    end
  endtask

  task automatic run();
    real a8 = $sqrt((2.0 - $sqrt(2.0)) / 8.0);
    real b8 = $sqrt((2.0 + $sqrt(2.0)) / 8.0);
    real pi_v = 3.14159265358979;
    for (int n = 0; n < 5000; n++) begin
      int p1 = $signed($urandom_range(0, 128)) - 64;
      int p2 = $signed($urandom_range(0, 128)) - 64;
      int p3 = $signed($urandom_range(0, 128)) - 64;
      one(p1, p2, p3, (b8 + a8 * p1 / 64.0) * (p2 / 64.0) * 32.0,
                      (b8 - a8 * p1 / 64.0) * (p3 / 64.0) * 32.0);
    end
    for (int k = 0; k < 8; k++) begin
      real ang = (2 * k + 1) * pi_v / 8.0;
      real re = $cos(ang), im = $sin(ang);
      int b1 = ((re < 0 ? -re : re) < (im < 0 ? -im : im)) ? 1 : 0;
      int b2 = (re < 0) ? 1 : 0;
      int b3 = (im < 0) ? 1 : 0;
      one(64 - 128 * b1, 64 - 128 * b2, 64 - 128 * b3, re * 32.0, im * 32.0);
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
