// tb_rf_interface: self-checking test of the RF interface.
// Three clocks: processing 100 MHz, DAC 125 MHz, ADC 80 MHz.
// TX: a packet loaded while TX is disabled plays out back to back with no
// underflow; a packet fed slower than the DAC rate plays out in order and
// the underflow counter rises. RX: ADC samples (a counter) arrive in order, in packets of
// cfg_rx_len with TLAST; with the reader stopped, the overflow counter
// rises, and it equals the number of ADC samples that never arrived.
// RF control words are forwarded.
module tb_rf_interface;
  import sdr_pkg::*;
  logic clk = 0, dac_clk = 0, adc_clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  always #4 dac_clk = ~dac_clk;
  always #6.25 adc_clk = ~adc_clk;
  int checks = 0, failures = 0;

  logic tx_en = 0, rx_en = 0; logic [15:0] rx_len = 8, gain = 16'h1234; logic [31:0] lo = 32'h2400_0000;
  logic [31:0] rf_lo; logic [15:0] rf_gain; logic [31:0] unf, ovf;
  iq_t s_tdata = '0, m_tdata, dac_data, adc_data = '0;
  logic s_tvalid = 0, s_tready, s_tlast = 0, m_tvalid, m_tready = 0, m_tlast, dac_valid;

  rf_interface #(.FIFO_DEPTH(16)) dut (
    .clk, .rst_n, .cfg_tx_en(tx_en), .cfg_rx_en(rx_en), .cfg_rx_len(rx_len), .cfg_lo_freq(lo),
    .cfg_gain(gain), .rf_lo_freq(rf_lo), .rf_gain, .tx_underflows(unf), .rx_overflows(ovf),
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready), .s_axis_tlast(s_tlast),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .m_axis_tlast(m_tlast),
    .dac_clk, .dac_rst_n(rst_n), .dac_data, .dac_valid, .adc_clk, .adc_rst_n(rst_n), .adc_data);

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // DAC monitor
  iq_t dac_got [$]; int gaps = 0, in_pkt = 0;
  always @(posedge dac_clk) begin
    if (dac_valid) begin dac_got.push_back(dac_data); end
  end
  task automatic push(input int v, input bit l);
    @(negedge clk);
    s_tdata.i = 16'(v); s_tdata.q = 16'(-v); s_tlast = l; s_tvalid = 1;
    while (!s_tready) @(negedge clk);
    @(posedge clk); #1 s_tvalid = 0;
  endtask

  // ADC source: counter
  int adc_n = 0;
  always @(posedge adc_clk) begin adc_data.i <= 16'(adc_n); adc_data.q <= 16'(adc_n >> 16); adc_n <= adc_n + 1; end
  int rx_errs = 0, rx_cnt = 0, rx_prev = -1, rx_lost = 0, rx_first = -1;
  always @(negedge clk) if (m_tvalid && m_tready) begin
    int v; v = int'({m_tdata.q, m_tdata.i});
    if (rx_prev >= 0) rx_lost += v - rx_prev - 1;
    if (rx_first < 0) rx_first = v;
    rx_prev = v;
    rx_cnt++;
    if (m_tlast != (rx_cnt % int'(rx_len) == 0)) rx_errs++;
  end

  initial begin
    int errs, first_idx, last_idx, holes;
    repeat (4) @(posedge clk); rst_n = 1; repeat (4) @(posedge clk);
    check("lo forwarded", int'(rf_lo), int'(lo));
    check("gain forwarded", int'(rf_gain), int'(gain));
    // TX 1: preload then enable
    for (int k = 0; k < 12; k++) push(k + 1, k == 11);
    repeat (5) @(posedge clk);
    tx_en = 1;
    repeat (40) @(posedge clk);
    check("preloaded packet samples", dac_got.size(), 12);
    errs = 0; foreach (dac_got[k]) if (dac_got[k].i != 16'(k + 1) || dac_got[k].q != 16'(-(k + 1))) errs++;
    check("preloaded packet order", errs, 0);
    check("no underflow", int'(unf), 0);
    // TX 2: slow feed
    dac_got.delete();
    for (int k = 0; k < 30; k++) begin push(100 + k, k == 29); repeat (3) @(posedge clk); end
    repeat (40) @(posedge clk);
    check("slow packet samples", dac_got.size(), 30);
    errs = 0; foreach (dac_got[k]) if (dac_got[k].i != 16'(100 + k)) errs++;
    check("slow packet order", errs, 0);
    checks++; if (unf == 0) begin failures++; $display("FAIL underflow not counted"); end
    tx_en = 0;
    // RX: read continuously
    m_tready = 1; rx_en = 1;
    repeat (400) @(posedge clk);
    check("rx samples in order, none lost", rx_lost, 0);
    check("rx TLAST every rx_len", rx_errs, 0);
    checks++; if (rx_cnt < 200) begin failures++; $display("FAIL too few rx samples %0d", rx_cnt); end
    // RX overflow: stop the reader
    m_tready = 0; repeat (200) @(posedge clk);
    m_tready = 1; repeat (100) @(posedge clk);
    rx_en = 0; repeat (60) @(posedge clk);
    checks++; if (ovf == 0) begin failures++; $display("FAIL overflow not counted"); end
    check("overflow count = samples lost", int'(ovf), rx_lost);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
