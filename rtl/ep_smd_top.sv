// ep_smd_top: soft mapper/demapper accelerator of an EP-based frequency-domain
// self-iterated linear equalizer (FD-SILE).
//
// The equalizer runs elsewhere and streams its time-domain outputs x^e with
// their common variance v_x^e. For every pair of symbols this block computes
//   * the bitwise extrinsic LLRs L_e(d_q) (closed-form max-log-MAP demapping
//     for QPSK and 16-QAM, LUT-aided semi-analytical demapping for 8-PSK),
//   * the soft bits p_q = tanh(L_e/2) with a piecewise-linear tanh,
//   * the soft symbols mu^d (closed-form bitwise soft mapping),
//   * the EP feedback x^d = mu^d + C_EP (mu^d - x^e), v_x^d = v_x^e C_EP,
//     with C_EP read from a table addressed by v_x^e.
// The equalizer uses x^d, v_x^d in the next self-iteration and the L_e of the
// last self-iteration go to the channel decoder; both are produced for every
// word and the consumer keeps what it needs.
//
// One accelerator is built per constellation (parameter MOD). A 32-bit input
// word carries two symbols (8-bit real and imaginary parts); four real values
// are processed in parallel: four component demappers for QPSK and 16-QAM, two
// symbol demappers for 8-PSK, and four EP estimate units for all.
//
// Interface and timing (design choices, the source gives only 100 MHz):
//   * s_valid/s_ready/s_data/s_ve: input stream, one word per cycle. Word
//     layout: [7:0] R(x_0), [15:8] I(x_0), [23:16] R(x_1), [31:24] I(x_1).
//   * m_valid/m_ready: output stream; m_llr[s][q] = L_e(d_{q+1}) of symbol s
//     (entries beyond log2(M) are zero), m_xd packed like s_data, m_vd.
//   * Four register stages: demap, tanh, soft map (with the C_EP read), EP
//     estimate. A word accepted at a clock edge appears on the outputs after
//     the third edge that follows. When m_valid is high and m_ready low, the
//     whole pipeline holds (s_ready low).
//   * rst_n: synchronous, active-low; it clears only the stage valid bits.
//   * cep_wr_*: host port that loads the C_EP table before use.
module ep_smd_top
  import smd_pkg::*;
#(
  parameter mod_t MOD    = MOD_QAM16,
  parameter int   DATA_W = 32,
  parameter int   NSYM   = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // input stream: equalized symbols
  input  logic              s_valid,
  output logic              s_ready,
  input  logic [DATA_W-1:0] s_data,
  input  var8_t             s_ve,
  // C_EP table loading
  input  logic              cep_wr_en,
  input  logic [7:0]        cep_wr_addr,
  input  cep8_t             cep_wr_data,
  // output stream: LLRs and EP feedback
  output logic              m_valid,
  input  logic              m_ready,
  output llr8_t             m_llr [NSYM][4],
  output logic [DATA_W-1:0] m_xd,
  output var8_t             m_vd
);

  // ---------------------------------------------------------------- control
  logic en;                       // pipeline advance
  logic v1, v2, v3, v4;

  assign en      = !(v4 && !m_ready);
  assign s_ready = en;
  assign m_valid = v4;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      {v1, v2, v3, v4} <= '0;
    end else if (en) begin
      v1 <= s_valid;
      v2 <= v1;
      v3 <= v2;
      v4 <= v3;
    end
  end

  // ------------------------------------------------------- input unpacking
  csym8_t xe_in [NSYM];
  always_comb begin
    for (int s = 0; s < NSYM; s++) xe_in[s] = s_data[16*s +: 16];
  end

  // --------------------------------------------------- stage 1: demapping
  llr8_t  llr_c [NSYM][4];
  csym8_t xe1 [NSYM];
  var8_t  ve1;
  llr8_t  llr1 [NSYM][4];

  for (genvar s = 0; s < NSYM; s++) begin : g_demap
    if (MOD == MOD_QPSK) begin : g_qpsk
      qpsk_demap u_re (.x(xe_in[s].re), .ve(s_ve), .llr(llr_c[s][0]));
      qpsk_demap u_im (.x(xe_in[s].im), .ve(s_ve), .llr(llr_c[s][1]));
      assign llr_c[s][2] = '0;
      assign llr_c[s][3] = '0;
    end else if (MOD == MOD_PSK8) begin : g_psk8
      llr8_t      l3 [3];
      logic [2:0] m_unused;
      psk8_demap u_sym (.xr(xe_in[s].re), .xi(xe_in[s].im), .ve(s_ve),
                        .llr(l3), .m(m_unused));
      assign llr_c[s][0] = l3[0];
      assign llr_c[s][1] = l3[1];
      assign llr_c[s][2] = l3[2];
      assign llr_c[s][3] = '0;
    end else begin : g_qam16
      // imaginary part carries d1 (amplitude) and d3 (sign),
      // real part carries d2 (amplitude) and d4 (sign)
      qam16_demap u_im (.x(xe_in[s].im), .ve(s_ve),
                        .llr_amp(llr_c[s][0]), .llr_sgn(llr_c[s][2]));
      qam16_demap u_re (.x(xe_in[s].re), .ve(s_ve),
                        .llr_amp(llr_c[s][1]), .llr_sgn(llr_c[s][3]));
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      xe1  <= xe_in;
      ve1  <= s_ve;
      llr1 <= llr_c;
    end
  end

  // ------------------------------------------------ stage 2: soft bits
  pbit8_t p_c [NSYM][4];
  csym8_t xe2 [NSYM];
  var8_t  ve2;
  llr8_t  llr2 [NSYM][4];
  pbit8_t p2 [NSYM][4];

  for (genvar s = 0; s < NSYM; s++) begin : g_sb
    for (genvar q = 0; q < 4; q++) begin : g_q
      tanh_pwl u_tanh (.llr(llr1[s][q]), .p(p_c[s][q]));
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      xe2  <= xe1;
      ve2  <= ve1;
      llr2 <= llr1;
      p2   <= p_c;
    end
  end

  // ------------------------------- stage 3: soft mapping and C_EP look-up
  csym8_t mu_c [NSYM];
  csym8_t xe3 [NSYM];
  var8_t  ve3;
  llr8_t  llr3 [NSYM][4];
  csym8_t mu3 [NSYM];
  cep8_t  cep3;

  for (genvar s = 0; s < NSYM; s++) begin : g_map
    if (MOD == MOD_QPSK) begin : g_qpsk
      qpsk_softmap u_re (.p(p2[s][0]), .mu(mu_c[s].re));
      qpsk_softmap u_im (.p(p2[s][1]), .mu(mu_c[s].im));
    end else if (MOD == MOD_PSK8) begin : g_psk8
      pbit8_t p3 [3];
      assign p3[0] = p2[s][0];
      assign p3[1] = p2[s][1];
      assign p3[2] = p2[s][2];
      psk8_softmap u_sym (.p(p3), .mu_re(mu_c[s].re), .mu_im(mu_c[s].im));
    end else begin : g_qam16
      qam16_softmap u_re (.p_amp(p2[s][1]), .p_sgn(p2[s][3]), .mu(mu_c[s].re));
      qam16_softmap u_im (.p_amp(p2[s][0]), .p_sgn(p2[s][2]), .mu(mu_c[s].im));
    end
  end

  cep_lut #(.AW(8), .DW(8)) u_cep (
    .clk     (clk),
    .rd_en   (en),
    .rd_addr (ve2),
    .rd_data (cep3),
    .wr_en   (cep_wr_en),
    .wr_addr (cep_wr_addr),
    .wr_data (cep_wr_data)
  );

  always_ff @(posedge clk) begin
    if (en) begin
      xe3  <= xe2;
      ve3  <= ve2;
      llr3 <= llr2;
      mu3  <= mu_c;
    end
  end

  // ------------------------------------------ stage 4: EP soft estimates
  csym8_t xd_c [NSYM];
  var8_t  vd_c;

  for (genvar s = 0; s < NSYM; s++) begin : g_ep
    ep_soft_est u_re (.mu(mu3[s].re), .xe(xe3[s].re), .cep(cep3), .xd(xd_c[s].re));
    ep_soft_est u_im (.mu(mu3[s].im), .xe(xe3[s].im), .cep(cep3), .xd(xd_c[s].im));
  end

  ep_var_est u_var (.ve(ve3), .cep(cep3), .vd(vd_c));

  always_ff @(posedge clk) begin
    if (en) begin
      m_llr <= llr3;
      m_vd  <= vd_c;
      for (int s = 0; s < NSYM; s++) m_xd[16*s +: 16] <= xd_c[s];
    end
  end

  // ------------------------------------------------------------ checks
  // The output holds while it is stalled.
  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
                            m_valid && !m_ready |=> m_valid && $stable(m_xd) && $stable(m_vd));

  initial begin
    assert (DATA_W == 16 * NSYM)
      else $error("ep_smd_top: DATA_W must hold NSYM symbols of 16 bits");
  end
endmodule
