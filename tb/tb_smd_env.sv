// tb_smd_env: stimulus, scoreboard and coverage for one ep_smd_top instance.
//
// The environment loads the C_EP table, streams NWORDS words of noisy
// constellation symbols with random input bubbles and random output stalls,
// drains the pipeline, reloads the table with new contents and streams a
// second block. Each output word is checked:
//   * LLRs against the floating-point max-log-MAP reference (tolerance of a
//     few LSB for the rounded constants and the truncating divider);
//   * x^d and v^d against mu + C (mu - x^e) and v^e C, where mu is computed in
//     floating point from the soft bits of the LLRs the design produced;
//   * latency: exactly 4 clock edges from acceptance to consumption while the
//     output is never stalled (first block), at least 4 otherwise;
//   * throughput: one word per cycle while input and output are always ready.
// It counts how often each mechanism happened (stall, input bubble, table
// reload, LLR saturation, each tanh segment, each constellation region,
// x^d saturation) and counts a failure for any that never did.
module tb_smd_env
  import smd_pkg::*;
  import tb_smd_model_pkg::*;
#(
  parameter mod_t MOD    = MOD_QAM16,
  parameter int   NWORDS = 400
) (
  input  logic        clk,
  output logic        rst_n,
  output logic        s_valid,
  input  logic        s_ready,
  output logic [31:0] s_data,
  output var8_t       s_ve,
  output logic        cep_wr_en,
  output logic [7:0]  cep_wr_addr,
  output cep8_t       cep_wr_data,
  input  logic        m_valid,
  output logic        m_ready,
  input  llr8_t       m_llr [2][4],
  input  logic [31:0] m_xd,
  input  var8_t       m_vd,
  output logic        done,
  output int          checks,
  output int          failures
);
  typedef struct {
    logic [31:0] data;
    int          ve;
    int          t_in;
  } item_t;

  item_t exp_q [$];
  cep8_t cep_model [256];
  int    cycle = 0;
  int    stall_pct = 0, bubble_pct = 0;
  bit    exact_latency = 1;
  int    n_out = 0;
  bit    acc_flag = 0;    // the word on s_data was accepted at the last edge

  // mechanism counters
  int n_stall = 0, n_bubble = 0, n_reload = 0, n_llr_sat = 0, n_xd_sat = 0;
  int n_seg [4];
  int n_region [16];
  int n_burst_words = 0;

  initial begin
    checks = 0; failures = 0; done = 0;
    rst_n = 0; s_valid = 0; s_data = '0; s_ve = '0; m_ready = 1;
    cep_wr_en = 0; cep_wr_addr = '0; cep_wr_data = '0;
  end

  always @(posedge clk) cycle <= cycle + 1;

  function automatic int nbits();
    return (MOD == MOD_QPSK) ? 2 : (MOD == MOD_PSK8) ? 3 : 4;
  endfunction

  // one noisy constellation component/symbol, in s2.5 integers
  task automatic gen_symbol(output int ir, output int ii);
    real re, im, nr, ni;
    int lvl;
    case (MOD)
      MOD_QPSK: begin
        re = (($urandom_range(0, 1) != 0) ? 1.0 : -1.0) / $sqrt(2.0);
        im = (($urandom_range(0, 1) != 0) ? 1.0 : -1.0) / $sqrt(2.0);
      end
      MOD_QAM16: begin
        lvl = 2 * $signed($urandom_range(0, 3)) - 3;
        re = lvl / $sqrt(10.0);
        lvl = 2 * $signed($urandom_range(0, 3)) - 3;
        im = lvl / $sqrt(10.0);
      end
      default: psk8_point($urandom_range(0, 7), re, im);
    endcase
    // uniform noise of up to +-0.6, occasionally large to reach saturation
    nr = ($urandom_range(0, 1200) - 600) / 1000.0;
    ni = ($urandom_range(0, 1200) - 600) / 1000.0;
    if ($urandom_range(0, 19) == 0) begin nr = nr * 5.0; ni = ni * 5.0; end
    ir = $rtoi((re + nr) * 32.0);
    ii = $rtoi((im + ni) * 32.0);
    if (ir > 127) ir = 127;
    if (ir < -128) ir = -128;
    if (ii > 127) ii = 127;
    if (ii < -128) ii = -128;
  endtask

  task automatic load_table();
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      cep_model[a] = 8'($urandom_range(0, 127));   // C_EP in [0, 2)
      cep_wr_en = 1; cep_wr_addr = 8'(a); cep_wr_data = cep_model[a];
    end
    @(negedge clk);
    cep_wr_en = 0;
  endtask

  task automatic send_block(int nw);
    int sent = 0;
    int ve = $urandom_range(4, 80);
    while (sent < nw) begin
      @(negedge clk);
      if (!s_valid || acc_flag) begin
        acc_flag = 0;
        if ($urandom_range(0, 99) < bubble_pct) begin
          s_valid = 0;
          n_bubble++;
        end else begin
          int r0, i0, r1, i1;
          gen_symbol(r0, i0);
          gen_symbol(r1, i1);
          if (sent % 64 == 0) ve = $urandom_range(4, 80);   // new block variance
          s_valid = 1;
          s_data  = {8'(i1), 8'(r1), 8'(i0), 8'(r0)};
          s_ve    = 8'(ve);
          sent++;
        end
      end
    end
    @(negedge clk);
    while (s_valid && !acc_flag) @(negedge clk);
    acc_flag = 0;
    s_valid = 0;
  endtask

  task automatic drain();
    int guard = 0;
    while (exp_q.size() != 0 && guard < 1000) begin
      @(negedge clk);
      guard++;
    end
  endtask

  // output stall generator
  always @(negedge clk) begin
    if (rst_n) m_ready <= ($urandom_range(0, 99) >= stall_pct);
  end

  // input side: record accepted words
  always @(posedge clk) begin
    if (rst_n && s_valid && s_ready) begin
      item_t it;
      it.data = s_data;
      it.ve   = int'(s_ve);
      it.t_in = cycle;
      exp_q.push_back(it);
      acc_flag = 1;
    end
    if (rst_n && m_valid && !m_ready) n_stall++;
  end

  function automatic int s8(logic [7:0] v);
    return int'($signed(v));
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL [%s] %s at cycle %0d", MOD.name(), what, cycle);
    end
  endtask

  // output side: scoreboard (automatic so that the locals are fresh per word)
  task automatic score();
    item_t it;
    real v, c;
    n_out++;
    if (exp_q.size() == 0) begin
      chk(0, "output without input");
    end else begin
      it = exp_q.pop_front();
      v = it.ve / 32.0;
      c = cep_model[it.ve] / 64.0;
      if (exact_latency) chk(cycle - it.t_in == 4, $sformatf("latency %0d", cycle - it.t_in));
      else               chk(cycle - it.t_in >= 4, "latency below 4");
      for (int s = 0; s < 2; s++) begin
        int xr = s8(it.data[16*s +: 8]);
        int xi = s8(it.data[16*s+8 +: 8]);
        real p [4];
        real mr, mi, xdr, xdi, tol;
        int rr, ri;
        bit tie = 0;
        if (MOD == MOD_PSK8)
          tie = (xr == 0 || xi == 0 || xr == xi || xr == -xi);
        // coverage of constellation regions
        if (MOD == MOD_QAM16) begin
          n_region[((xr < -20) ? 0 : (xr < 0) ? 1 : (xr < 20) ? 2 : 3) * 4 +
                   ((xi < -20) ? 0 : (xi < 0) ? 1 : (xi < 20) ? 2 : 3)]++;
        end else if (MOD == MOD_PSK8) begin
          n_region[((xi < 0) ? 4 : 0) + ((xr < 0) ? 2 : 0) +
                   (((xr < 0 ? -xr : xr) < (xi < 0 ? -xi : xi)) ? 1 : 0)]++;
        end else begin
          n_region[((xr < 0) ? 2 : 0) + ((xi < 0) ? 1 : 0)]++;
        end
        for (int q = 0; q < 4; q++) begin
          int l = int'(m_llr[s][q]);
          if (q < nbits()) begin
            real r = clamp127(llr_ref(MOD, xr / 32.0, xi / 32.0, v, q));
            real e = r - real'(l);
            real tl = (MOD == MOD_QPSK) ? 1.0 : (MOD == MOD_QAM16) ? 1.5 :
                      2.0 + 0.03 * ((r < 0) ? -r : r);
            if (!tie) chk(e <= tl && e >= -tl,
                          $sformatf("llr s%0d q%0d x=(%0d,%0d) v=%0d got %0d ref %f",
                                    s, q, xr, xi, it.ve, l, r));
            if (l == 127 || l == -127) n_llr_sat++;
            begin
              int al = (l < 0) ? -l : l;
              n_seg[(al < 8) ? 0 : (al < 16) ? 1 : (al < 32) ? 2 : 3]++;
            end
          end else begin
            chk(l == 0, "unused llr not zero");
          end
          p[q] = (q < nbits()) ? pwl_soft_bit(l) : 0.0;
        end
        mu_ref(MOD, p, mr, mi);
        xdr = mr + c * (mr - xr);
        xdi = mi + c * (mi - xi);
        if (xdr > 127.0 || xdr < -128.0 || xdi > 127.0 || xdi < -128.0) n_xd_sat++;
        if (xdr > 127.0) xdr = 127.0;
        if (xdr < -128.0) xdr = -128.0;
        if (xdi > 127.0) xdi = 127.0;
        if (xdi < -128.0) xdi = -128.0;
        rr = s8(m_xd[16*s +: 8]);
        ri = s8(m_xd[16*s+8 +: 8]);
        tol = 0.8 * (1.0 + c) + 0.6;
        chk(rr - xdr <= tol && rr - xdr >= -tol && ri - xdi <= tol && ri - xdi >= -tol,
            $sformatf("xd s%0d got (%0d,%0d) ref (%f,%f)", s, rr, ri, xdr, xdi));
      end
      begin
        real vr = it.ve * c;
        if (vr > 255.0) vr = 255.0;
        chk(real'(m_vd) - vr <= 0.5 && real'(m_vd) - vr >= -0.5,
            $sformatf("vd got %0d ref %f", m_vd, vr));
      end
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && m_valid && m_ready) score();
  end

  initial begin
    int t0, n0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_table();
    n_reload++;
    // block 1: no stalls, no bubbles: exact latency and full throughput
    stall_pct = 0; bubble_pct = 0; exact_latency = 1;
    @(negedge clk);
    t0 = cycle; n0 = n_out;
    send_block(NWORDS / 2);
    drain();
    // NWORDS/2 words in NWORDS/2 + 4 pipeline cycles (+ a few for the driver)
    chk(cycle - t0 <= NWORDS / 2 + 8, $sformatf("throughput: %0d words took %0d cycles", n_out - n0, cycle - t0));
    // reload the table between blocks, then stalls and bubbles
    load_table();
    n_reload++;
    stall_pct = 30; bubble_pct = 20; exact_latency = 0;
    send_block(NWORDS / 2);
    drain();
    stall_pct = 0;
    repeat (5) @(negedge clk);
    chk(exp_q.size() == 0, "words lost in the pipeline");
    chk(n_out == 2 * (NWORDS / 2), $sformatf("output count %0d", n_out));
    // mechanism coverage
    chk(n_stall > 0, "no output stall happened");
    chk(n_bubble > 0, "no input bubble happened");
    chk(n_reload == 2, "table reload");
    chk(n_llr_sat > 0, "no LLR saturation happened");
    chk(n_xd_sat > 0, "no x^d saturation happened");
    for (int k = 0; k < 4; k++) chk(n_seg[k] > 0, $sformatf("tanh segment %0d never used", k));
    for (int k = 0; k < ((MOD == MOD_QAM16) ? 16 : (MOD == MOD_PSK8) ? 8 : 4); k++)
      chk(n_region[k] > 0, $sformatf("region %0d never hit", k));
    $display("[%s] words=%0d stalls=%0d bubbles=%0d reloads=%0d llr_sat=%0d xd_sat=%0d seg=%0d/%0d/%0d/%0d",
             MOD.name(), n_out, n_stall, n_bubble, n_reload, n_llr_sat, n_xd_sat,
             n_seg[0], n_seg[1], n_seg[2], n_seg[3]);
    done = 1;
  end
endmodule
