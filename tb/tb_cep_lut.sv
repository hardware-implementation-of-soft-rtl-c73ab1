// tb_cep_lut: loads every entry of the C_EP table with a random value through
// the write port, then reads all entries back in random order and checks the
// one-cycle read latency, that rd_data holds while rd_en is low, and that
// a rewritten entry reads back with its new value.
module tb_cep_lut;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       rd_en = 0, wr_en = 0;
  logic [7:0] rd_addr = 0, wr_addr = 0, wr_data = 0;
  logic [7:0] rd_data;
  logic [7:0] model [256];

  cep_lut dut (.clk(clk), .rd_en(rd_en), .rd_addr(rd_addr), .rd_data(rd_data),
               .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data));

  task automatic check(logic [7:0] exp, string what);
    checks++;
    if (rd_data !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%0d exp=%0d", what, rd_data, exp);
    end
  endtask

  task automatic run();
    @(negedge clk);
    for (int a = 0; a < 256; a++) begin
      model[a] = 8'($urandom);
      wr_en = 1; wr_addr = 8'(a); wr_data = model[a];
      @(negedge clk);
    end
    wr_en = 0;
    for (int n = 0; n < 1000; n++) begin
      logic [7:0] a = 8'($urandom);
      rd_en = 1; rd_addr = a;
      @(negedge clk);
      check(model[a], "read");
      // hold: address changes but rd_en is low
      rd_en = 0; rd_addr = a + 8'd1;
      @(negedge clk);
      check(model[a], "hold");
    end
    // rewrite one entry and read it back
    wr_en = 1; wr_addr = 8'd77; wr_data = ~model[77]; model[77] = ~model[77];
    @(negedge clk);
    wr_en = 0; rd_en = 1; rd_addr = 8'd77;
    @(negedge clk);
    check(model[77], "rewrite");
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
