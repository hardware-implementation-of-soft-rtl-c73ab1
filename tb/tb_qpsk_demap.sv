// tb_qpsk_demap: checks the QPSK component demapper against the closed form
// L = 2*sqrt(2) x / v evaluated in floating point, for every 8-bit x and a
// spread of variances including v = 0. The LLR is s4.3 saturated to +-127
// and the divider truncates, so a deviation below one LSB is accepted.
module tb_qpsk_demap;
  import smd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  sym8_t x;
  var8_t ve;
  llr8_t llr;

  qpsk_demap dut (.x(x), .ve(ve), .llr(llr));

  function automatic real ref_llr(int xi, int vi);
    real r;
    if (vi == 0) return (xi > 0) ? 127.0 : (xi < 0) ? -127.0 : 0.0;
    r = 2.0 * $sqrt(2.0) * (xi / 32.0) / (vi / 32.0) * 8.0;
    if (r > 127.0) r = 127.0;
    if (r < -127.0) r = -127.0;
    return r;
  endfunction

  task automatic run();
    int vlist[$] = '{0, 1, 2, 3, 5, 8, 13, 16, 21, 32, 40, 64, 100, 128, 200, 255};
    for (int k = 0; k < 10; k++) vlist.push_back($urandom_range(1, 255));
    foreach (vlist[j]) begin
      for (int xi = -128; xi < 128; xi++) begin
        real r, e;
        x  = 8'(xi);
        ve = 8'(vlist[j]);
        #1;
        r = ref_llr(xi, vlist[j]);
        e = r - real'(llr);
        checks++;
        if (e >= 1.0 || e <= -1.0 || (xi > 0 && llr < 0) || (xi < 0 && llr > 0)) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d v=%0d llr=%0d ref=%f", xi, vlist[j], llr, r);
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
