// tb_pu_coder: self-checking test of the convolutional coder unit.
// Random packets (1..40 bytes, random TKEEP on the last word) are coded at
// each rate; a reference encoder in the testbench works from the generator
// polynomials (133, 171 octal) and the puncturing patterns, and the output
// bit stream, its length and its TLAST position are compared. Back-pressure
// is random. The rate-1/2 throughput of one coded bit per clock is checked
// on an unstalled packet.
module tb_pu_coder;
  import sdr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  rate_e rate;
  logic [31:0] s_tdata; logic [3:0] s_tkeep; logic s_tvalid = 0, s_tready, s_tlast;
  logic m_tdata, m_tvalid, m_tready, m_tlast;
  bit   stall_en = 1;

  pu_coder dut (.clk, .rst_n, .cfg_rate(rate), .s_axis_tdata(s_tdata), .s_axis_tkeep(s_tkeep),
                .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready), .s_axis_tlast(s_tlast),
                .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready),
                .m_axis_tlast(m_tlast));

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  always @(posedge clk) m_tready <= stall_en ? ($urandom_range(0, 3) != 0) : 1'b1;

  bit got_bits [$]; bit got_last [$];
  int first_out_cycle, last_out_cycle, cyc;
  always @(posedge clk) cyc++;
  always @(negedge clk) if (m_tvalid && m_tready) begin
    if (got_bits.size() == 0) first_out_cycle = cyc;
    last_out_cycle = cyc;
    got_bits.push_back(m_tdata); got_last.push_back(m_tlast);
  end

  function automatic void encode(input bit data [$], input rate_e r, ref bit out [$]);
    bit [6:0] g0 = 7'o133, g1 = 7'o171;
    bit [6:0] hist = '0;   // hist[6] = newest
    int pos = 0;
    for (int n = 0; n < data.size(); n++) begin
      bit a, b; bit ka, kb;
      hist = {data[n], hist[6:1]};
      a = ^(hist & g0); b = ^(hist & g1);
      ka = 1; kb = 1;
      if (r == RATE_2_3 && pos == 1) kb = 0;
      if (r == RATE_3_4 && pos == 1) kb = 0;
      if (r == RATE_3_4 && pos == 2) ka = 0;
      if (ka) out.push_back(a);
      if (kb) out.push_back(b);
      pos = (r == RATE_2_3) ? (pos + 1) % 2 : (r == RATE_3_4) ? (pos + 1) % 3 : 0;
    end
  endfunction

  task automatic run_packet(input rate_e r, input int nbytes);
    bit data [$]; bit exp [$]; byte unsigned bytes [$];
    int nwords;
    for (int k = 0; k < nbytes; k++) bytes.push_back(8'($urandom));
    foreach (bytes[k]) for (int b = 0; b < 8; b++) data.push_back(bytes[k][b]);
    for (int t = 0; t < 6; t++) data.push_back(0);
    encode(data, r, exp);
    got_bits.delete(); got_last.delete();
    rate = r;
    nwords = (nbytes + 3) / 4;
    for (int w = 0; w < nwords; w++) begin
      logic [31:0] d; logic [3:0] k;
      d = $urandom; k = 0;
      for (int y = 0; y < 4; y++) if (w * 4 + y < nbytes) begin d[y*8 +: 8] = bytes[w*4 + y]; k[y] = 1; end
      @(negedge clk);
      s_tdata = d; s_tkeep = k; s_tlast = (w == nwords - 1); s_tvalid = 1;
      while (!s_tready) @(negedge clk);
      @(posedge clk); #1 s_tvalid = 0;
    end
    begin int c; c = 0; while (got_bits.size() < exp.size() && c < 20000) begin @(posedge clk); c++; end end
    repeat (10) @(posedge clk);
    check($sformatf("coded length rate %0d", r), got_bits.size(), exp.size());
    begin
      int errs = 0, lasts = 0;
      foreach (exp[k]) if (k < got_bits.size() && got_bits[k] != exp[k]) errs++;
      foreach (got_last[k]) if (got_last[k]) lasts++;
      check("coded bit errors", errs, 0);
      check("one TLAST", lasts, 1);
      check("TLAST on last bit", int'(got_last[got_last.size()-1]), 1);
    end
  endtask

  initial begin
    rate = RATE_1_2; s_tdata = 0; s_tkeep = 0; s_tlast = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 5; n++) begin
      run_packet(RATE_1_2, $urandom_range(1, 40));
      run_packet(RATE_2_3, $urandom_range(1, 40));
      run_packet(RATE_3_4, $urandom_range(1, 40));
    end
    run_packet(RATE_3_4, 3);
    run_packet(RATE_2_3, 4);
    // throughput: rate 1/2, 4 bytes -> 76 coded bits in 76 consecutive cycles
    stall_en = 0; @(posedge clk);
    run_packet(RATE_1_2, 4);
    check("1 coded bit per clock", last_out_cycle - first_out_cycle + 1, 76);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
