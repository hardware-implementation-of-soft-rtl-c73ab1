// tb_ep_smd_full: one complete block through the accelerator at its default
// parameters (16-QAM, 32-bit words of two symbols): the C_EP table is
// loaded, 4096 words (8192 symbols) are streamed in two halves with a table
// reload between them, and every output word is checked by tb_smd_env.
module tb_ep_smd_full;
  import smd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic        rst_n, s_valid, s_ready, cep_wr_en, m_valid, m_ready, done;
  logic [31:0] s_data, m_xd;
  var8_t       s_ve, m_vd;
  logic [7:0]  cep_wr_addr;
  cep8_t       cep_wr_data;
  llr8_t       m_llr [2][4];
  int          checks, failures;

  ep_smd_top dut (
    .clk(clk), .rst_n(rst_n), .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data),
    .s_ve(s_ve), .cep_wr_en(cep_wr_en), .cep_wr_addr(cep_wr_addr), .cep_wr_data(cep_wr_data),
    .m_valid(m_valid), .m_ready(m_ready), .m_llr(m_llr), .m_xd(m_xd), .m_vd(m_vd));

  tb_smd_env #(.MOD(MOD_QAM16), .NWORDS(4096)) env (
    .clk(clk), .rst_n(rst_n), .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data),
    .s_ve(s_ve), .cep_wr_en(cep_wr_en), .cep_wr_addr(cep_wr_addr), .cep_wr_data(cep_wr_data),
    .m_valid(m_valid), .m_ready(m_ready), .m_llr(m_llr), .m_xd(m_xd), .m_vd(m_vd),
    .done(done), .checks(checks), .failures(failures));

  initial begin
    repeat (2) @(posedge clk);
    wait (done);
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
