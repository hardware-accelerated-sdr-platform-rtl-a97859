// tb_axis_dma: self-checking test of the DMA engine.
// A behavioural AXI4 slave memory (random stalls on every channel) serves
// the DMA. send_packet: packets of random size and start address, some
// crossing a 4 KiB boundary, are read out under random back-pressure; the
// stream must carry memory contents in order with the right TKEEP/TLAST and
// sent_irq must pulse once. receive_packet: streamed packets must land in
// memory (byte strobes honoured, neighbouring bytes untouched), with
// received_irq, the byte count and truncation of an over-long packet.
// Every burst is checked against the AXI rules (<= MAX_BURST beats, no 4 KiB
// crossing).
module tb_axis_dma;
  localparam int MB = 16;
  localparam int MEMW = 4096;            // words of model memory (16 KiB)
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic mm2s_start = 0, s2mm_start = 0; logic [31:0] mm2s_addr = 0, mm2s_len = 0, s2mm_addr = 0, s2mm_len = 0;
  logic sent_irq, received_irq, mm2s_busy, s2mm_busy, s2mm_trunc; logic [31:0] s2mm_bytes;
  logic [31:0] m_tdata; logic [3:0] m_tkeep; logic m_tvalid, m_tready, m_tlast;
  logic [31:0] s_tdata; logic [3:0] s_tkeep; logic s_tvalid, s_tready, s_tlast;
  logic [31:0] araddr, awaddr, rdata, wdata; logic [7:0] arlen, awlen; logic [2:0] arsize, awsize;
  logic [1:0] arburst, awburst, rresp, bresp; logic arvalid, arready, rlast, rvalid, rready;
  logic awvalid, awready, wlast, wvalid, wready, bvalid, bready; logic [3:0] wstrb;

  axis_dma #(.MAX_BURST(MB)) dut (
    .clk, .rst_n, .mm2s_start, .mm2s_addr, .mm2s_len, .s2mm_start, .s2mm_addr, .s2mm_len,
    .sent_irq, .received_irq, .mm2s_busy, .s2mm_busy, .s2mm_bytes, .s2mm_trunc,
    .m_axis_tdata(m_tdata), .m_axis_tkeep(m_tkeep), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .m_axis_tlast(m_tlast),
    .s_axis_tdata(s_tdata), .s_axis_tkeep(s_tkeep), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready), .s_axis_tlast(s_tlast),
    .m_araddr(araddr), .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst), .m_arvalid(arvalid), .m_arready(arready),
    .m_rdata(rdata), .m_rresp(rresp), .m_rlast(rlast), .m_rvalid(rvalid), .m_rready(rready),
    .m_awaddr(awaddr), .m_awlen(awlen), .m_awsize(awsize), .m_awburst(awburst), .m_awvalid(awvalid), .m_awready(awready),
    .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast), .m_wvalid(wvalid), .m_wready(wready),
    .m_bresp(bresp), .m_bvalid(bvalid), .m_bready(bready));

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  // ---------------------------------------------------- AXI slave memory
  logic [31:0] mem [MEMW];
  int rule_errors = 0;
  // read channel
  logic [31:0] r_addr; int r_left; logic r_active = 0;
  assign rresp = 2'b00; assign bresp = 2'b00;
  always @(posedge clk) begin
    arready <= !r_active && ($urandom_range(0, 3) != 0);
    if (arvalid && arready && !r_active) begin
      r_active <= 1; r_addr <= araddr; r_left <= int'(arlen) + 1;
      if (int'(arlen) + 1 > MB) rule_errors++;
      if ((araddr >> 12) != ((araddr + (32'(arlen) << 2)) >> 12)) rule_errors++;
      if (arsize != 3'd2 || arburst != 2'b01) rule_errors++;
      arready <= 0;
    end
    if (rvalid && rready) begin
      r_addr <= r_addr + 4; r_left <= r_left - 1;
      if (r_left == 1) r_active <= 0;
    end
  end
  logic r_go;
  always @(posedge clk) r_go <= ($urandom_range(0, 3) != 0);
  assign rvalid = r_active && r_go;
  assign rdata  = mem[(r_addr >> 2) % MEMW];
  assign rlast  = (r_left == 1);
  // write channel
  logic [31:0] w_addr; int w_left; logic w_active = 0, b_pend = 0;
  always @(posedge clk) begin
    awready <= !w_active && !b_pend && ($urandom_range(0, 3) != 0);
    wready  <= w_active && ($urandom_range(0, 3) != 0);
    if (awvalid && awready && !w_active && !b_pend) begin
      w_active <= 1; w_addr <= awaddr; w_left <= int'(awlen) + 1; awready <= 0;
      if (int'(awlen) + 1 > MB) rule_errors++;
      if ((awaddr >> 12) != ((awaddr + (32'(awlen) << 2)) >> 12)) rule_errors++;
    end
    if (wvalid && wready) begin
      for (int b = 0; b < 4; b++) if (wstrb[b]) mem[(w_addr >> 2) % MEMW][b*8 +: 8] <= wdata[b*8 +: 8];
      w_addr <= w_addr + 4; w_left <= w_left - 1;
      if (wlast != (w_left == 1)) rule_errors++;
      if (w_left == 1) begin w_active <= 0; b_pend <= 1; wready <= 0; end
    end
    if (bvalid && bready) b_pend <= 0;
  end
  assign bvalid = b_pend;

  int sent_cnt = 0, recv_cnt = 0;
  always @(posedge clk) begin
    if (sent_irq) sent_cnt++;
    if (received_irq) recv_cnt++;
  end
  always @(posedge clk) m_tready <= ($urandom_range(0, 2) != 0);

  // ---------------------------------------------------------- MM2S test
  task automatic do_send(input logic [31:0] addr, input int len);
    int nwords, got, s0, cycles;
    nwords = (len + 3) / 4; got = 0; s0 = sent_cnt; cycles = 0;
    @(posedge clk); mm2s_addr <= addr; mm2s_len <= 32'(len); mm2s_start <= 1;
    @(posedge clk); mm2s_start <= 0;
    while (got < nwords && cycles < 5000) begin
      @(negedge clk); cycles++;
      if (m_tvalid && m_tready) begin
        check("mm2s data", m_tdata, mem[((addr >> 2) + 32'(got)) % MEMW]);
        check("mm2s tlast", 32'(m_tlast), 32'(got == nwords - 1));
        if (got == nwords - 1)
          check("mm2s tkeep", 32'(m_tkeep), (len % 4 == 0) ? 32'hF : (32'(1) << (len % 4)) - 1);
        else check("mm2s tkeep", 32'(m_tkeep), 32'hF);
        got++;
      end
    end
    repeat (3) @(posedge clk);
    check("sent_irq once", 32'(sent_cnt - s0), 1);
    check("mm2s idle", 32'(mm2s_busy), 0);
  endtask

  // ---------------------------------------------------------- S2MM test
  logic [31:0] golden [MEMW];
  task automatic do_recv(input logic [31:0] addr, input int max_len, input int pkt_bytes);
    int r0, sent_b, nbeats, stored;
    r0 = recv_cnt;
    for (int k = 0; k < MEMW; k++) golden[k] = mem[k];
    @(posedge clk); s2mm_addr <= addr; s2mm_len <= 32'(max_len); s2mm_start <= 1;
    @(posedge clk); s2mm_start <= 0;
    nbeats = (pkt_bytes + 3) / 4; stored = 0;
    for (int b = 0; b < nbeats; b++) begin
      logic [31:0] d; logic [3:0] k; int nb;
      d = $urandom;
      nb = (b == nbeats - 1 && pkt_bytes % 4 != 0) ? pkt_bytes % 4 : 4;
      k = 4'((1 << nb) - 1);
      repeat ($urandom_range(0, 2)) @(negedge clk);
      @(negedge clk);
      s_tdata = d; s_tkeep = k; s_tlast = (b == nbeats - 1); s_tvalid = 1;
      while (!s_tready) @(negedge clk);
      @(posedge clk);
      #1 s_tvalid = 0;
      if (stored < (max_len + 3) / 4) begin
        for (int y = 0; y < 4; y++) if (k[y]) golden[((addr >> 2) + 32'(b)) % MEMW][y*8 +: 8] = d[y*8 +: 8];
        stored++;
      end
    end
    sent_b = 0;
    begin int c; c = 0; while (recv_cnt == r0 && c < 3000) begin @(posedge clk); c++; end end
    repeat (2) @(posedge clk);
    check("received_irq once", 32'(recv_cnt - r0), 1);
    begin
      int errs; errs = 0;
      for (int k = 0; k < MEMW; k++) if (mem[k] !== golden[k]) errs++;
      check("s2mm memory image", 32'(errs), 0);
    end
    check("s2mm bytes", s2mm_bytes, (pkt_bytes <= max_len) ? 32'(pkt_bytes) : 32'(stored * 4));
    check("s2mm trunc", 32'(s2mm_trunc), 32'(pkt_bytes > ((max_len + 3) / 4) * 4));
  endtask

  initial begin
    s_tvalid = 0; s_tdata = 0; s_tkeep = 0; s_tlast = 0;
    for (int k = 0; k < MEMW; k++) mem[k] = $urandom;
    repeat (3) @(posedge clk); rst_n = 1;
    do_send(32'h0000_0100, 64);
    do_send(32'h0000_0FF0, 100);          // crosses 4 KiB
    do_send(32'h0000_2000, 7);
    do_send(32'h0000_3004, 1);
    for (int n = 0; n < 6; n++) do_send(32'($urandom_range(0, 3000)) << 2, $urandom_range(1, 300));
    do_recv(32'h0000_0400, 256, 64);
    do_recv(32'h0000_1FE8, 256, 101);     // crosses 4 KiB, partial last beat
    do_recv(32'h0000_0800, 32, 64);       // longer than the buffer: truncated
    do_recv(32'h0000_0C00, 256, 3);
    check("AXI burst rule violations", 32'(rule_errors), 0);
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
