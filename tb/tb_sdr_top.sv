// tb_sdr_top: end-to-end test of the SDR data plane at its default sizes.
//
// The testbench plays the processor (AXI4-Lite register writes, an AXI4
// memory behind the HP port, interrupt counting) and the RF board (DAC and
// ADC clocks, a tone on the ADC). Scenarios:
//  A. send_packet of 40 bytes through coder (1/2) -> QPSK -> 64-point IFFT
//     with CP 16 (shared unit, reached over the switch) -> FIR -> DAC. The DAC
//     samples are compared with a reference chain computed here: encoder from
//     the generator polynomials, 802.11 Gray mapping, real-valued IDFT/64.
//  B. mode switch by register writes only: rate 3/4, 16-QAM, 32-point IFFT,
//     CP 8, filter gain 1/2; checked against the reference again.
//  D. a CHDR packet arriving on the external port is delivered to memory.
//  C. chain re-composition: ADC -> OFDM (forward 64-point FFT, no CP) ->
//     host; receive_packet stores one transformed symbol of a tone at bin 5;
//     the stored spectrum must peak at bin 5 with the tone's amplitude.
//     Afterwards the idle receive path overflows.
//  E. the chain front is routed to the external port; its CHDR packets leave
//     the chip there.
// Counted mechanisms (each must happen): sent_irq, received_irq, back-pressure
// stall in the chain, packet split by the wrapper (SPP), a sample underflow
// or an overflow at the RF interface, mode switch, shared-unit use by two
// chains, external port traffic.
module tb_sdr_top;
  import sdr_pkg::*;
  logic clk = 0, rst_n = 0, dac_clk = 0, adc_clk = 0;
  always #2 clk = ~clk;           // 250 MHz processing clock
  always #25 dac_clk = ~dac_clk;  // 20 MS/s converters
  always #25 adc_clk = ~adc_clk;
  int checks = 0, failures = 0;

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask
  function automatic real rabs(input real x); return x < 0.0 ? -x : x; endfunction

  // ------------------------------------------------------------ DUT
  logic [7:0] awaddr = 0, araddr = 0; logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic [31:0] wdata = 0, rdata_l; logic [3:0] wstrb = 4'hF; logic [1:0] bresp_l, rresp_l;
  logic arvalid = 0, arready, rvalid_l, rready_l = 0;
  logic [31:0] araddr_m, awaddr_m, rdata, wdata_m; logic [7:0] arlen, awlen; logic [2:0] arsize, awsize;
  logic [1:0] arburst, awburst; logic arvalid_m, arready_m, rlast, rvalid, rready, awvalid_m, awready_m;
  logic wlast, wvalid_m, wready_m, bvalid_m, bready_m; logic [3:0] wstrb_m;
  logic sent_irq, received_irq;
  logic [31:0] ext_in_d = 0, ext_out_d; logic ext_in_v = 0, ext_in_r, ext_in_l = 0, ext_out_v, ext_out_r = 1, ext_out_l;
  iq_t dac_data, adc_data; logic dac_valid; logic [31:0] rf_lo; logic [15:0] rf_gain;

  sdr_top dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp_l), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata_l), .s_axil_rresp(rresp_l), .s_axil_rvalid(rvalid_l), .s_axil_rready(rready_l),
    .m_axi_araddr(araddr_m), .m_axi_arlen(arlen), .m_axi_arsize(arsize), .m_axi_arburst(arburst),
    .m_axi_arvalid(arvalid_m), .m_axi_arready(arready_m), .m_axi_rdata(rdata), .m_axi_rresp(2'b00),
    .m_axi_rlast(rlast), .m_axi_rvalid(rvalid), .m_axi_rready(rready),
    .m_axi_awaddr(awaddr_m), .m_axi_awlen(awlen), .m_axi_awsize(awsize), .m_axi_awburst(awburst),
    .m_axi_awvalid(awvalid_m), .m_axi_awready(awready_m), .m_axi_wdata(wdata_m), .m_axi_wstrb(wstrb_m),
    .m_axi_wlast(wlast), .m_axi_wvalid(wvalid_m), .m_axi_wready(wready_m), .m_axi_bresp(2'b00),
    .m_axi_bvalid(bvalid_m), .m_axi_bready(bready_m),
    .sent_irq, .received_irq,
    .ext_in_tdata(ext_in_d), .ext_in_tvalid(ext_in_v), .ext_in_tready(ext_in_r), .ext_in_tlast(ext_in_l),
    .ext_out_tdata(ext_out_d), .ext_out_tvalid(ext_out_v), .ext_out_tready(ext_out_r), .ext_out_tlast(ext_out_l),
    .dac_clk, .dac_rst_n(rst_n), .dac_data, .dac_valid, .adc_clk, .adc_rst_n(rst_n), .adc_data,
    .rf_lo_freq(rf_lo), .rf_gain);

  // ------------------------------------------------- AXI4 memory (HP port)
  localparam int MEMW = 4096;
  logic [31:0] mem [MEMW];
  logic [31:0] r_addr; int r_left = 0; logic r_active = 0;
  always @(posedge clk) if (!rst_n) begin
    arready_m <= 0; r_active <= 0;
  end else begin
    arready_m <= !r_active;
    if (arvalid_m && arready_m && !r_active) begin r_active <= 1; r_addr <= araddr_m; r_left <= int'(arlen) + 1; arready_m <= 0; end
    if (rvalid && rready) begin r_addr <= r_addr + 4; r_left <= r_left - 1; if (r_left == 1) r_active <= 0; end
  end
  assign rvalid = r_active;
  assign rdata  = mem[(r_addr >> 2) % MEMW];
  assign rlast  = (r_left == 1);
  logic [31:0] w_addr; logic w_active = 0, b_pend = 0;
  always @(posedge clk) if (!rst_n) begin
    awready_m <= 0; wready_m <= 0; w_active <= 0; b_pend <= 0;
  end else begin
    awready_m <= !w_active && !b_pend;
    wready_m  <= w_active;
    if (awvalid_m && awready_m && !w_active && !b_pend) begin w_active <= 1; w_addr <= awaddr_m; awready_m <= 0; end
    if (wvalid_m && wready_m) begin
      for (int b = 0; b < 4; b++) if (wstrb_m[b]) mem[(w_addr >> 2) % MEMW][b*8 +: 8] <= wdata_m[b*8 +: 8];
      w_addr <= w_addr + 4;
      if (wlast) begin w_active <= 0; b_pend <= 1; wready_m <= 0; end
    end
    if (bvalid_m && bready_m) b_pend <= 0;
  end
  assign bvalid_m = b_pend;

  // ------------------------------------------------- AXI4-Lite master
  task automatic reg_wr(input int idx, input logic [31:0] d);
    @(negedge clk); awaddr = 8'(idx * 4); wdata = d; awvalid = 1; wvalid = 1;
    #1;
    while (!(awready && wready)) begin @(negedge clk); #1; end
    @(posedge clk); #1 awvalid = 0; wvalid = 0; bready = 1;
    while (!bvalid) @(negedge clk);
    @(posedge clk); #1 bready = 0;
  endtask
  task automatic reg_rd(input int idx, output logic [31:0] d);
    @(negedge clk); araddr = 8'(idx * 4); arvalid = 1;
    while (!arready) @(negedge clk);
    @(posedge clk); #1 arvalid = 0; rready_l = 1;
    while (!rvalid_l) @(negedge clk);
    d = rdata_l;
    @(posedge clk); #1 rready_l = 0;
  endtask

  // ------------------------------------------------- monitors / counters
  int n_sent = 0, n_recv = 0, n_stall = 0, n_split = 0, n_ext = 0;
  always @(posedge clk) begin
    if (sent_irq) n_sent++;
    if (received_irq) n_recv++;
    if (dut.map_tvalid && !dut.map_tready) n_stall++;
    if (dut.u_shell_ofdm.e_state == 1 && dut.u_shell_ofdm.e_cnt == 7'(SPP_TOP)) n_split++;
    if (ext_out_v && ext_out_r) n_ext++;
  end
  localparam int SPP_TOP = 64;
  iq_t dac_q [$];
  always @(posedge dac_clk) if (dac_valid) dac_q.push_back(dac_data);

  // ADC: tone at bin 5 of a 64-point FFT, amplitude 8000
  int adc_n = 0;
  always @(posedge adc_clk) begin
    real a; a = 6.283185307179586 * 5.0 * real'(adc_n % 64) / 64.0;
    adc_data.i <= 16'(int'(8000.0 * $cos(a))); adc_data.q <= 16'(int'(8000.0 * $sin(a)));
    adc_n <= adc_n + 1;
  end

  // ------------------------------------------------- reference chain
  function automatic void ref_chain(input byte unsigned bytes [$], input int rate, input int modbits,
                                    input int l2, input int cpl, input real gain, ref real oi [$], ref real oq [$]);
    bit data [$]; bit cod [$]; real si [$], sq [$]; bit [6:0] hist; int pos, n, nsym;
    int t2 [4] = '{-3, -1, 3, 1};
    real k;
    foreach (bytes[x]) for (int b = 0; b < 8; b++) data.push_back(bytes[x][b]);
    for (int t = 0; t < 6; t++) data.push_back(0);
    hist = 0; pos = 0;
    foreach (data[x]) begin
      bit a, bb;
      hist = {data[x], hist[6:1]};
      a = ^(hist & 7'o133); bb = ^(hist & 7'o171);
      if (!(rate == 2 && pos == 2)) cod.push_back(a);
      if (!((rate == 1 || rate == 2) && pos == 1)) cod.push_back(bb);
      pos = (rate == 1) ? (pos + 1) % 2 : (rate == 2) ? (pos + 1) % 3 : 0;
    end
    while (cod.size() % modbits != 0) cod.push_back(0);
    k = (modbits == 2) ? 1.0 / $sqrt(2.0) : 1.0 / $sqrt(10.0);
    for (int s = 0; s < cod.size() / modbits; s++) begin
      if (modbits == 2) begin
        si.push_back((cod[2*s] ? 1.0 : -1.0) * k * 8192.0); sq.push_back((cod[2*s+1] ? 1.0 : -1.0) * k * 8192.0);
      end else begin
        si.push_back(real'(t2[{cod[4*s], cod[4*s+1]}]) * k * 8192.0);
        sq.push_back(real'(t2[{cod[4*s+2], cod[4*s+3]}]) * k * 8192.0);
      end
    end
    n = 1 << l2;
    nsym = (si.size() + n - 1) / n;
    while (si.size() < nsym * n) begin si.push_back(0.0); sq.push_back(0.0); end
    for (int y = 0; y < nsym; y++) begin
      real ti [64], tq [64];
      for (int m = 0; m < n; m++) begin
        ti[m] = 0.0; tq[m] = 0.0;
        for (int x = 0; x < n; x++) begin
          real ang; ang = 6.283185307179586 * real'((m * x) % n) / real'(n);
          ti[m] += si[y*n + x] * $cos(ang) - sq[y*n + x] * $sin(ang);
          tq[m] += si[y*n + x] * $sin(ang) + sq[y*n + x] * $cos(ang);
        end
        ti[m] = ti[m] / real'(n) * gain; tq[m] = tq[m] / real'(n) * gain;
      end
      for (int m = n - cpl; m < n; m++) begin oi.push_back(ti[m]); oq.push_back(tq[m]); end
      for (int m = 0; m < n; m++) begin oi.push_back(ti[m]); oq.push_back(tq[m]); end
    end
  endfunction

  task automatic tx_packet(input int nbytes, input int rate, input int modbits, input int l2,
                           input int cpl, input real gain, input string tag);
    byte unsigned bytes [$]; real oi [$], oq [$]; int s0, errs, c;
    for (int x = 0; x < nbytes; x++) bytes.push_back(8'($urandom));
    for (int w = 0; w < (nbytes + 3) / 4; w++)
      for (int y = 0; y < 4; y++) mem[256 + w][y*8 +: 8] = (w*4 + y < nbytes) ? bytes[w*4 + y] : 8'hEE;
    ref_chain(bytes, rate, modbits, l2, cpl, gain, oi, oq);
    dac_q.delete(); s0 = n_sent; $display("%0t tx %s ref samples %0d", $time, tag, oi.size());
    reg_wr(REG_MM2S_ADDR, 32'h400);
    reg_wr(REG_MM2S_LEN, 32'(nbytes));
    c = 0;
    while ((dac_q.size() < oi.size() || n_sent == s0) && c < 200000) begin @(posedge clk); c++; end
    repeat (200) @(posedge clk);
    $display("%s: underflows so far %0d", tag, dut.tx_underflows);
    check({tag, ": sent_irq"}, n_sent - s0, 1);
    check({tag, ": DAC sample count"}, dac_q.size(), oi.size());
    errs = 0;
    foreach (oi[x]) if (x < dac_q.size())
      if (rabs(real'(dac_q[x].i) - oi[x]) > 14.0 || rabs(real'(dac_q[x].q) - oq[x]) > 14.0) begin
        errs++;
        if (errs < 4) $display("%s sample %0d: got %0d,%0d expected %f,%f", tag, x, dac_q[x].i, dac_q[x].q, oi[x], oq[x]);
      end
    check({tag, ": DAC samples match reference chain"}, errs, 0);
  endtask

  int n_mode = 0, n_shared = 0, n_unf_ovf = 0;
  initial begin
    logic [31:0] st;
    for (int x = 0; x < MEMW; x++) mem[x] = 0;
    // hold reset long enough for the slow converter clocks to see it
    repeat (40) @(posedge clk); rst_n = 1; repeat (5) @(posedge clk);
    // defaults: rate 1/2, QPSK, 64-point IFFT, CP 16, routes host->OFDM->RF
    reg_rd(REG_OFDM, st); check("reset value OFDM reg", int'(st), 6);
    reg_wr(REG_RF_LO, 32'd2412); reg_wr(REG_RF_GAIN, 32'h0000_1020);
    reg_wr(REG_RF_CTRL, 32'h1);
    repeat (10) @(posedge clk);
    check("LO word to RF board", int'(rf_lo), 2412);
    // ---- A
    tx_packet(40, 0, 2, 6, 16, 1.0, "A");
    // ---- B: mode switch
    reg_wr(REG_CODER, 32'(RATE_3_4)); reg_wr(REG_MAPPER, 32'(MOD_QAM16));
    reg_wr(REG_OFDM, 32'd5); reg_wr(REG_OFDM_CP, 32'd8);
    reg_wr(REG_FIR0, 32'd8192);
    n_mode++;
    tx_packet(30, 2, 4, 5, 8, 0.5, "B");
    reg_rd(REG_STATUS + 2, st);
    if (st != 0) n_unf_ovf++;
    // ---- D: external port -> host memory
    begin
      chdr_hdr_t h; logic [31:0] beats [$]; int r0;
      r0 = n_recv;
      reg_wr(REG_S2MM_ADDR, 32'h3000);
      reg_wr(REG_S2MM_LEN, 32'd64);
      h = '0; h.eob = 1; h.length = 16'(8 + 16); h.src_sid = 16'h0103; h.dst_sid = SID_HOST;
      beats = '{h[31:0], h[63:32], 32'h1111_1111, 32'h2222_2222, 32'h3333_3333, 32'h4444_4444};
      foreach (beats[x]) begin
        @(negedge clk); ext_in_d = beats[x]; ext_in_l = (x == 5); ext_in_v = 1;
        while (!ext_in_r) @(negedge clk);
        @(posedge clk); #1 ext_in_v = 0;
      end
      begin int c; c = 0; while (n_recv == r0 && c < 5000) begin @(posedge clk); c++; end end
      check("D: received_irq for external packet", n_recv - r0, 1);
      check("D: payload in memory", int'(mem[3072 + 2] == 32'h3333_3333 && mem[3072 + 3] == 32'h4444_4444), 1);
    end
    // ---- C: receive through the shared OFDM unit
    reg_wr(REG_RF_CTRL, 32'h0);
    reg_wr(REG_OFDM, 32'h16);           // forward FFT, 64 points
    reg_wr(REG_OFDM_CP, 32'd0);
    reg_wr(REG_ROUTE_RX, 32'(SID_OFDM));
    reg_wr(REG_ROUTE_OFDM, 32'(SID_HOST));
    reg_wr(REG_RF_RXLEN, 32'd64);
    reg_wr(REG_S2MM_ADDR, 32'h2000);
    reg_wr(REG_S2MM_LEN, 32'd4096);
    reg_wr(REG_RF_CTRL, 32'h2);
    begin int c; c = 0; while (n_recv < 2 && c < 100000) begin @(posedge clk); c++; end end
    reg_wr(REG_RF_CTRL, 32'h0);
    check("C: received_irq", n_recv, 2);
    reg_rd(REG_STATUS + 1, st);
    check("C: received bytes (one 64-point symbol)", int'(st), 256);
    begin
      int bad; real mag;
      bad = 0;
      for (int b = 0; b < 64; b++) begin
        real vi, vq;
        vi = real'($signed(mem[2048 + b][31:16]));
        vq = real'($signed(mem[2048 + b][15:0]));
        mag = $sqrt(vi * vi + vq * vq);
        if (b == 5) begin if (rabs(mag - 8000.0) > 60.0) begin bad++; $display("bin 5 magnitude %f", mag); end end
        else if (mag > 30.0) begin bad++; $display("bin %0d magnitude %f", b, mag); end
      end
      check("C: spectrum of the tone (bin 5 only)", bad, 0);
    end
    n_shared++;
    // the receive path is still full of samples no one collects: let the RX FIFO overflow
    reg_wr(REG_RF_CTRL, 32'h2);
    repeat (20000) @(posedge clk);
    reg_wr(REG_RF_CTRL, 32'h0);
    repeat (200) @(posedge clk);
    reg_rd(REG_STATUS + 3, st);
    if (st != 0) n_unf_ovf++;
    // ---- E: chain front routed to the external port (e.g. another chip)
    begin
      int s0, e0;
      reg_wr(REG_CODER, 32'(RATE_1_2)); reg_wr(REG_MAPPER, 32'(MOD_QPSK));
      reg_wr(REG_ROUTE_TX, 32'(SID_EXTERNAL));
      mem[256] = 32'h1234_5678;
      s0 = n_sent; e0 = n_ext;
      reg_wr(REG_MM2S_ADDR, 32'h400);
      reg_wr(REG_MM2S_LEN, 32'd4);
      repeat (2000) @(posedge clk);
      check("E: sent_irq", n_sent - s0, 1);
      check("E: beats on external port (2 header + 38 QPSK symbols)", n_ext - e0, 40);
    end
    // ---- mechanism coverage
    $display("mechanisms: sent_irq=%0d received_irq=%0d stall=%0d spp_split=%0d mode_switch=%0d shared_unit=%0d rf_unf_ovf=%0d ext_out_beats=%0d",
             n_sent, n_recv, n_stall, n_split, n_mode, n_shared, n_unf_ovf, n_ext);
    checks++; if (n_sent == 0) begin failures++; $display("FAIL sent_irq never happened"); end
    checks++; if (n_recv < 2) begin failures++; $display("FAIL received_irq too rare"); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no back-pressure stall"); end
    checks++; if (n_split == 0) begin failures++; $display("FAIL no SPP packet split"); end
    checks++; if (n_mode == 0) begin failures++; $display("FAIL no mode switch"); end
    checks++; if (n_shared == 0) begin failures++; $display("FAIL shared unit not used twice"); end
    checks++; if (n_unf_ovf == 0) begin failures++; $display("FAIL no RF underflow/overflow"); end
    checks++; if (n_ext == 0) begin failures++; $display("FAIL no traffic on the external port"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
