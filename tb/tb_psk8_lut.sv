// tb_psk8_lut: recomputes every entry of the 8-PSK demapping table from the
// constellation geometry and compares it with the ROM. The constellation is
// unit-energy 8-PSK with Gray labels: label m = 4 b3 + 2 b2 + b1, where
// b3 = (I<0), b2 = (R<0), b1 = (|R|<|I|). For each alpha and bit q the entry is
// 2 (1 - 2 b_q(alpha)) (alpha - alpha'), alpha' being the nearest point whose
// bit q differs. Entries are s2.5, so each part must be within 1 LSB.
module tb_psk8_lut;
  import smd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0] m;
  sym8_t dre [3];
  sym8_t dim [3];

  psk8_lut dut (.m(m), .delta_re(dre), .delta_im(dim));

  real pr [8], pim [8];

  task automatic run();
    real pi_v = 3.14159265358979;
    // place the 8 points at angles (2k+1) pi/8 and label them from the signs
    for (int k = 0; k < 8; k++) begin
      real a = (2 * k + 1) * pi_v / 8.0;
      real re = $cos(a), im = $sin(a);
      int lbl = ((im < 0) ? 4 : 0) + ((re < 0) ? 2 : 0) + (((re < 0 ? -re : re) < (im < 0 ? -im : im)) ? 1 : 0);
      pr[lbl] = re;
      pim[lbl] = im;
    end
    for (int a = 0; a < 8; a++) begin
      m = 3'(a);
      #1;
      for (int q = 0; q < 3; q++) begin
        int bq = (a >> q) & 1;
        real best = 1.0e9, er = 0.0, ei = 0.0;
        for (int b = 0; b < 8; b++) begin
          if (((b >> q) & 1) != bq) begin
            real dd = (pr[a] - pr[b]) ** 2 + (pim[a] - pim[b]) ** 2;
            if (dd < best) begin
              best = dd;
              er = 2.0 * (1 - 2 * bq) * (pr[a] - pr[b]);
              ei = 2.0 * (1 - 2 * bq) * (pim[a] - pim[b]);
            end
          end
        end
        checks += 2;
        if (er * 32.0 - real'(dre[q]) > 1.0 || er * 32.0 - real'(dre[q]) < -1.0) begin
          failures++; $display("FAIL re m=%0d q=%0d got=%0d ref=%f", a, q, dre[q], er * 32.0);
        end
        if (ei * 32.0 - real'(dim[q]) > 1.0 || ei * 32.0 - real'(dim[q]) < -1.0) begin
          failures++; $display("FAIL im m=%0d q=%0d got=%0d ref=%f", a, q, dim[q], ei * 32.0);
        end
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
