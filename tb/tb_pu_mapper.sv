// tb_pu_mapper: self-checking test of the QAM mapper.
// Random bit packets are mapped at every modulation. The reference maps
// with the IEEE 802.11a/g Gray tables written out as levels (-7..7) and the
// unit-power factors 1, 1/sqrt(2), 1/sqrt(10), 1/sqrt(42) computed in real
// arithmetic, then compares I and Q (to within 4 LSB of Q2.13, the rounding of the
// constants times the largest level), symbol
// count and TLAST, including a packet that ends in a partial symbol.
module tb_pu_mapper;
  import sdr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  mod_e mod;
  logic s_tdata, s_tvalid = 0, s_tready, s_tlast;
  iq_t  m_tdata; logic m_tvalid, m_tready, m_tlast;

  pu_mapper dut (.clk, .rst_n, .cfg_mod(mod), .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid),
                 .s_axis_tready(s_tready), .s_axis_tlast(s_tlast), .m_axis_tdata(m_tdata),
                 .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .m_axis_tlast(m_tlast));

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  always @(posedge clk) m_tready <= ($urandom_range(0, 3) != 0);
  iq_t got_s [$]; bit got_l [$];
  always @(negedge clk) if (m_tvalid && m_tready) begin got_s.push_back(m_tdata); got_l.push_back(m_tlast); end

  function automatic int level(input int nb, input bit b [$], input int off);
    int v;
    // Gray tables of 802.11a (Table 17-x): index = bits in order b0 b1 b2
    int t2 [4] = '{-3, -1, 3, 1};                       // b0b1 = 00,01,10,11
    int t3 [8] = '{-7, -5, -1, -3, 7, 5, 1, 3};         // b0b1b2 = 000..111
    if (nb == 1) return b[off] ? 1 : -1;
    if (nb == 2) return t2[{b[off], b[off+1]}];
    return t3[{b[off], b[off+1], b[off+2]}];
  endfunction

  function automatic real rabs(input real x); return x < 0.0 ? -x : x; endfunction

  task automatic run(input mod_e m, input int nbits);
    bit bits [$]; int nb, per_axis, nsym, errs; real k;
    for (int n = 0; n < nbits; n++) bits.push_back(1'($urandom));
    nb = (m == MOD_BPSK) ? 1 : (m == MOD_QPSK) ? 2 : (m == MOD_QAM16) ? 4 : 6;
    k  = (m == MOD_BPSK) ? 1.0 : (m == MOD_QPSK) ? 1.0 / $sqrt(2.0) :
         (m == MOD_QAM16) ? 1.0 / $sqrt(10.0) : 1.0 / $sqrt(42.0);
    nsym = (nbits + nb - 1) / nb;
    got_s.delete(); got_l.delete();
    mod = m;
    for (int n = 0; n < nbits; n++) begin
      @(negedge clk);
      s_tdata = bits[n]; s_tlast = (n == nbits - 1); s_tvalid = 1;
      while (!s_tready) @(negedge clk);
      @(posedge clk); #1 s_tvalid = 0;
    end
    while (bits.size() < nsym * nb) bits.push_back(0);
    repeat (20) @(posedge clk);
    check("symbol count", got_s.size(), nsym);
    errs = 0;
    for (int s = 0; s < nsym && s < got_s.size(); s++) begin
      real ei, eq; int li, lq;
      per_axis = (nb == 1) ? 1 : nb / 2;
      li = level(per_axis, bits, s * nb);
      lq = (nb == 1) ? 0 : level(per_axis, bits, s * nb + per_axis);
      ei = real'(li) * k * 8192.0; eq = real'(lq) * k * 8192.0;
      if (rabs(real'(got_s[s].i) - ei) > 4.0 || rabs(real'(got_s[s].q) - eq) > 4.0) begin
        errs++;
        if (errs < 4) $display("sym %0d mod %0d: got %0d,%0d expected %f,%f", s, m, got_s[s].i, got_s[s].q, ei, eq);
      end
      if (got_l[s] != (s == nsym - 1)) errs++;
    end
    check("symbol errors", errs, 0);
  endtask

  initial begin
    mod = MOD_BPSK; s_tdata = 0; s_tlast = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      run(MOD_BPSK, 24); run(MOD_QPSK, 48); run(MOD_QAM16, 96); run(MOD_QAM64, 144);
    end
    run(MOD_QAM64, 100);   // partial last symbol
    run(MOD_QAM16, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
