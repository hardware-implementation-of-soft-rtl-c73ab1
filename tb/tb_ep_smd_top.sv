// tb_ep_smd_top: end-to-end test of the soft mapper/demapper accelerator for
// all three constellations. One accelerator is built per constellation, each
// driven and checked by its own tb_smd_env (see there for what is checked and
// which mechanisms must occur). The 16-QAM instance uses the default
// parameters.
module tb_ep_smd_top;
  import smd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int NW = 600;

  logic done [3];
  int   checks_i [3], failures_i [3];

  // one accelerator and one environment per constellation; instance 0 keeps
  // the default parameters
  for (genvar i = 0; i < 3; i++) begin : g_inst
    localparam mod_t M = (i == 0) ? MOD_QAM16 : (i == 1) ? MOD_QPSK : MOD_PSK8;
    logic        rst_n, s_valid, s_ready, cep_wr_en, m_valid, m_ready;
    logic [31:0] s_data, m_xd;
    var8_t       s_ve, m_vd;
    logic [7:0]  cep_wr_addr;
    cep8_t       cep_wr_data;
    llr8_t       m_llr [2][4];

    if (i == 0) begin : g_default
      ep_smd_top dut (
        .clk(clk), .rst_n(rst_n), .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data),
        .s_ve(s_ve), .cep_wr_en(cep_wr_en), .cep_wr_addr(cep_wr_addr), .cep_wr_data(cep_wr_data),
        .m_valid(m_valid), .m_ready(m_ready), .m_llr(m_llr), .m_xd(m_xd), .m_vd(m_vd));
    end else begin : g_other
      ep_smd_top #(.MOD(M)) dut (
        .clk(clk), .rst_n(rst_n), .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data),
        .s_ve(s_ve), .cep_wr_en(cep_wr_en), .cep_wr_addr(cep_wr_addr), .cep_wr_data(cep_wr_data),
        .m_valid(m_valid), .m_ready(m_ready), .m_llr(m_llr), .m_xd(m_xd), .m_vd(m_vd));
    end

    tb_smd_env #(.MOD(M), .NWORDS(NW)) env (
      .clk(clk), .rst_n(rst_n), .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data),
      .s_ve(s_ve), .cep_wr_en(cep_wr_en), .cep_wr_addr(cep_wr_addr), .cep_wr_data(cep_wr_data),
      .m_valid(m_valid), .m_ready(m_ready), .m_llr(m_llr), .m_xd(m_xd), .m_vd(m_vd),
      .done(done[i]), .checks(checks_i[i]), .failures(failures_i[i]));
  end

  initial begin
    repeat (2) @(posedge clk);
    wait (done[0] && done[1] && done[2]);
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d",
             checks_i[0] + checks_i[1] + checks_i[2], failures_i[0] + failures_i[1] + failures_i[2]);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d",
             checks_i[0] + checks_i[1] + checks_i[2], failures_i[0] + failures_i[1] + failures_i[2] + 1);
    $finish;
  end
endmodule
