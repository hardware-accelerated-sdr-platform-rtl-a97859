// tb_pu_pulse_shaping: self-checking test of the FIR pulse-shaping unit.
// Random coefficients and random complex packets; the reference is the FIR
// sum computed in the testbench (shift by 14, saturation to 16 bits), with
// the delay line cleared between packets. Output count, TLAST, saturation
// and one-sample-per-clock throughput are checked.
module tb_pu_pulse_shaping;
  import sdr_pkg::*;
  localparam int T = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [15:0] coef [T];
  iq_t s_tdata; logic s_tvalid = 0, s_tready, s_tlast;
  iq_t m_tdata; logic m_tvalid, m_tready, m_tlast;
  bit stall_en = 1;

  pu_pulse_shaping #(.NUM_TAPS(T)) dut (.clk, .rst_n, .cfg_coef(coef),
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready), .s_axis_tlast(s_tlast),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .m_axis_tlast(m_tlast));

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  int cyc; always @(posedge clk) cyc++;
  always @(posedge clk) m_tready <= stall_en ? ($urandom_range(0, 3) != 0) : 1'b1;
  iq_t got [$]; bit got_l [$]; int first_out, last_out;
  always @(negedge clk) if (m_tvalid && m_tready) begin
    if (got.size() == 0) first_out = cyc;
    last_out = cyc; got.push_back(m_tdata); got_l.push_back(m_tlast);
  end

  function automatic int sat(input longint v);
    longint s; s = v >>> 14;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return int'(s);
  endfunction

  task automatic packet(input int len, input int amp);
    int xi [$], xq [$]; int errs, lasts;
    got.delete(); got_l.delete();
    for (int k = 0; k < len; k++) begin
      xi.push_back($urandom_range(0, 2 * amp) - amp); xq.push_back($urandom_range(0, 2 * amp) - amp);
    end
    for (int k = 0; k < len; k++) begin
      @(negedge clk);
      s_tdata.i = 16'(xi[k]); s_tdata.q = 16'(xq[k]); s_tlast = (k == len - 1); s_tvalid = 1;
      while (!s_tready) @(negedge clk);
      @(posedge clk); #1 s_tvalid = 0;
    end
    repeat (6) @(posedge clk);
    check("output samples", got.size(), len);
    errs = 0; lasts = 0;
    for (int nn = 0; nn < len && nn < got.size(); nn++) begin
      longint ai, aq;
      ai = 0; aq = 0;
      for (int k = 0; k < T; k++) if (nn - k >= 0) begin
        ai += longint'(xi[nn-k]) * longint'(coef[k]); aq += longint'(xq[nn-k]) * longint'(coef[k]);
      end
      if (int'(got[nn].i) != sat(ai) || int'(got[nn].q) != sat(aq)) errs++;
      if (got_l[nn] != (nn == len - 1)) lasts++;
    end
    check("filter output errors", errs, 0);
    check("TLAST errors", lasts, 0);
  endtask

  initial begin
    s_tdata = '0; s_tlast = 0;
    for (int k = 0; k < T; k++) coef[k] = 16'($urandom_range(0, 8000) - 4000);
    repeat (3) @(posedge clk); rst_n = 1;
    packet(40, 8000); packet(5, 30000); packet(33, 1000);
    for (int k = 0; k < T; k++) coef[k] = 16'sd16383;     // forces saturation
    packet(20, 30000);
    for (int k = 0; k < T; k++) coef[k] = 16'($urandom_range(0, 8000) - 4000);
    stall_en = 0; @(posedge clk); @(posedge clk);
    packet(50, 5000);
    check("one sample per clock", last_out - first_out + 1, 50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
