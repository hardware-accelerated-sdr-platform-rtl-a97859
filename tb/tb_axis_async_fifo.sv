// tb_axis_async_fifo: self-checking test of the dual-clock FIFO.
// Writer at 100 MHz and reader at ~71 MHz and then ~140 MHz, both with
// random stalls; every word and TLAST must arrive once and in order. With
// the reader stopped the FIFO must take exactly DEPTH words and then hold
// TREADY low.
module tb_axis_async_fifo;
  localparam int W = 16, D = 8;
  logic s_clk = 0, m_clk = 0, rst_n = 0;
  int m_half = 7;
  always #5 s_clk = ~s_clk;
  always #(m_half) m_clk = ~m_clk;
  int checks = 0, failures = 0;

  logic [W-1:0] s_tdata = 0, m_tdata; logic s_tvalid = 0, s_tready, s_tlast = 0;
  logic m_tvalid, m_tready = 0, m_tlast;
  bit rd_en = 0;

  axis_async_fifo #(.WIDTH(W), .DEPTH(D)) dut (
    .s_clk, .s_rst_n(rst_n), .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid),
    .s_axis_tready(s_tready), .s_axis_tlast(s_tlast),
    .m_clk, .m_rst_n(rst_n), .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid),
    .m_axis_tready(m_tready), .m_axis_tlast(m_tlast));

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  logic [W:0] exp_q [$]; int errs = 0, nread = 0;
  always @(posedge m_clk) m_tready <= rd_en && ($urandom_range(0, 3) != 0);
  always @(negedge m_clk) if (m_tvalid && m_tready) begin
    logic [W:0] e;
    if (exp_q.size() == 0) errs++;
    else begin e = exp_q.pop_front(); if (e != {m_tlast, m_tdata}) errs++; end
    nread++;
  end

  task automatic push(input logic [W-1:0] d, input bit l);
    @(negedge s_clk);
    s_tdata = d; s_tlast = l; s_tvalid = 1;
    while (!s_tready) @(negedge s_clk);
    exp_q.push_back({l, d});
    @(posedge s_clk); #1 s_tvalid = 0;
    repeat ($urandom_range(0, 1)) @(negedge s_clk);
  endtask

  initial begin
    repeat (3) @(posedge s_clk); rst_n = 1; repeat (3) @(posedge s_clk);
    // fill with the reader stopped
    for (int k = 0; k < D; k++) push(W'(k), 0);
    repeat (10) @(posedge s_clk);
    check("full after DEPTH words: tready", int'(s_tready), 0);
    rd_en = 1;
    for (int k = 0; k < 300; k++) push(W'($urandom), ($urandom_range(0, 7) == 0));
    repeat (60) @(posedge s_clk);
    m_half = 3;
    for (int k = 0; k < 300; k++) push(W'($urandom), ($urandom_range(0, 7) == 0));
    repeat (60) @(posedge s_clk);
    check("words read", nread, 608);
    check("order/data errors", errs, 0);
    check("left over", exp_q.size(), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge s_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
