// tb_pu_ofdm: self-checking test of the OFDM modem unit.
// For every FFT length (8..64), both directions and several cyclic-prefix
// lengths, random symbols are transformed and compared with a direct DFT
// computed in real arithmetic, scaled by 1/N (tolerance 12 LSB for the
// fixed-point rounding). Also checked: the cyclic prefix equals the symbol
// tail, output length CP+N, TLAST handling of a packet that ends inside a
// symbol (zero fill), and the latency of a 64-point symbol with CP 16:
// 64 load + 192 butterfly + 80 output cycles = last output 335 cycles after
// the first input.
module tb_pu_ofdm;
  import sdr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0] log2n; logic fwd; logic [15:0] cp;
  iq_t s_tdata; logic s_tvalid = 0, s_tready, s_tlast;
  iq_t m_tdata; logic m_tvalid, m_tready, m_tlast, busy;
  bit stall_en = 1;

  pu_ofdm #(.MAX_LOG2N(6)) dut (.clk, .rst_n, .cfg_log2n(log2n), .cfg_fwd(fwd), .cfg_cp(cp),
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready), .s_axis_tlast(s_tlast),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .m_axis_tlast(m_tlast), .busy);

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask
  function automatic real rabs(input real x); return x < 0.0 ? -x : x; endfunction

  int cyc; always @(posedge clk) cyc++;
  always @(posedge clk) m_tready <= stall_en ? ($urandom_range(0, 3) != 0) : 1'b1;
  iq_t got [$]; bit got_l [$]; int first_in, last_out;
  always @(negedge clk) begin
    if (m_tvalid && m_tready) begin got.push_back(m_tdata); got_l.push_back(m_tlast); last_out = cyc; end
  end

  task automatic symbol(input int l2, input bit f, input int cpl, input int nin, input bit last);
    int n; real xr [64], xi [64]; int errs;
    n = 1 << l2;
    log2n = 3'(l2); fwd = f; cp = 16'(cpl);
    got.delete(); got_l.delete();
    for (int k = 0; k < n; k++) begin
      xr[k] = (k < nin) ? real'($urandom_range(0, 16000)) - 8000.0 : 0.0;
      xi[k] = (k < nin) ? real'($urandom_range(0, 16000)) - 8000.0 : 0.0;
    end
    for (int k = 0; k < nin; k++) begin
      @(negedge clk);
      s_tdata.i = 16'(int'(xr[k])); s_tdata.q = 16'(int'(xi[k]));
      s_tlast = last && (k == nin - 1); s_tvalid = 1;
      while (!s_tready) @(negedge clk);
      if (k == 0) first_in = cyc;
      @(posedge clk); #1 s_tvalid = 0;
    end
    begin int c; c = 0; while (got.size() < n + cpl && c < 5000) begin @(posedge clk); c++; end end
    repeat (3) @(posedge clk);
    check($sformatf("output length N=%0d cp=%0d", n, cpl), got.size(), n + cpl);
    errs = 0;
    for (int m = 0; m < n && m + cpl < got.size(); m++) begin
      real er, ei, sgn;
      sgn = f ? -1.0 : 1.0;
      er = 0.0; ei = 0.0;
      for (int k = 0; k < n; k++) begin
        real a;
        a = sgn * 6.283185307179586 * real'((m * k) % n) / real'(n);
        er += xr[k] * $cos(a) - xi[k] * $sin(a);
        ei += xr[k] * $sin(a) + xi[k] * $cos(a);
      end
      er /= real'(n); ei /= real'(n);
      if (rabs(real'(got[m + cpl].i) - er) > 12.0 || rabs(real'(got[m + cpl].q) - ei) > 12.0) begin
        errs++;
        if (errs < 4) $display("N=%0d fwd=%0d bin %0d: got %0d,%0d expected %f,%f", n, f, m, got[m+cpl].i, got[m+cpl].q, er, ei);
      end
    end
    check("transform errors", errs, 0);
    errs = 0;
    for (int k = 0; k < cpl && k < got.size(); k++) if (got[k] != got[n + k]) errs++;
    check("cyclic prefix = symbol tail", errs, 0);
    errs = 0;
    foreach (got_l[k]) if (got_l[k] != (last && k == n + cpl - 1)) errs++;
    check("TLAST", errs, 0);
  endtask

  initial begin
    log2n = 6; fwd = 0; cp = 16; s_tdata = '0; s_tlast = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int l2 = 3; l2 <= 6; l2++) begin
      symbol(l2, 0, (1 << l2) / 4, 1 << l2, 0);
      symbol(l2, 1, 0, 1 << l2, 1);
    end
    symbol(6, 0, 16, 64, 1);
    symbol(6, 1, 64, 64, 0);
    symbol(5, 0, 3, 20, 1);           // packet ends inside the symbol
    symbol(4, 0, 16, 16, 0);
    // latency without back-pressure
    stall_en = 0; @(posedge clk); @(posedge clk);
    symbol(6, 0, 16, 64, 0);
    check("64-point symbol, CP 16: first input to last output", last_out - first_in, 335);
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
