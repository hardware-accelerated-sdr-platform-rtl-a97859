// tb_rfnoc_xbar: self-checking test of the RFNoC crossbar switch.
// Every input sends packets of random length to random outputs (first beat
// = {src_sid, dst_sid}, payload beats tagged with source and packet number),
// under random back-pressure on every output; then all inputs send to one
// output at once. Checked: each packet arrives whole and uninterleaved at
// the output its dst_sid names, packets of one source to one destination
// keep their order, nothing is lost, the per-output packet counters match,
// and under full contention every input is served (round robin).
module tb_rfnoc_xbar;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] s_d [N], m_d [N]; logic s_v [N], s_r [N], s_l [N], m_v [N], m_r [N], m_l [N];
  logic [31:0] pkt_count [N];

  rfnoc_xbar #(.NUM_PORTS(N), .DATA_W(32)) dut (.clk, .rst_n,
    .s_axis_tdata(s_d), .s_axis_tvalid(s_v), .s_axis_tready(s_r), .s_axis_tlast(s_l),
    .m_axis_tdata(m_d), .m_axis_tvalid(m_v), .m_axis_tready(m_r), .m_axis_tlast(m_l), .pkt_count);

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  always @(posedge clk) for (int o = 0; o < N; o++) m_r[o] <= ($urandom_range(0, 3) != 0);

  // receive side: reassemble and check
  int errs = 0, rx_pkts = 0;
  int next_pkt [N][N];           // [src][dst] next expected packet number
  int cur_src [N], cur_pkt [N], cur_beat [N], cur_len [N];
  bit in_pkt [N];
  int served [N];
  always @(negedge clk) begin
    for (int o = 0; o < N; o++) if (m_v[o] && m_r[o]) begin
      if (!in_pkt[o]) begin
        if (int'(m_d[o][15:0]) % N != o) errs++;
        cur_src[o] = int'(m_d[o][31:16]); cur_beat[o] = 0; in_pkt[o] = 1;
        if (m_l[o]) errs++;
      end else begin
        // payload: {src[7:0], pkt[7:0], len[7:0], beat[7:0]}
        if (cur_beat[o] == 0) begin
          cur_pkt[o] = int'(m_d[o][23:16]); cur_len[o] = int'(m_d[o][15:8]);
          if (cur_pkt[o] != next_pkt[cur_src[o]][o] % 256) errs++;
          next_pkt[cur_src[o]][o]++;
        end
        if (int'(m_d[o][31:24]) != cur_src[o] || int'(m_d[o][23:16]) != cur_pkt[o] ||
            int'(m_d[o][7:0]) != cur_beat[o]) errs++;
        cur_beat[o]++;
        if (m_l[o] != (cur_beat[o] == cur_len[o])) errs++;
        if (m_l[o]) begin in_pkt[o] = 0; rx_pkts++; served[cur_src[o]]++; end
      end
    end
  end

  int sent_to [N];
  task automatic send(input int src, input int dst, input int pkt, input int len);
    for (int k = 0; k <= len; k++) begin
      @(negedge clk);
      s_d[src] = (k == 0) ? {16'(src), 16'(dst)} : {8'(src), 8'(pkt), 8'(len), 8'(k - 1)};
      s_l[src] = (k == len); s_v[src] = 1;
      while (!s_r[src]) @(negedge clk);
      @(posedge clk); #1 s_v[src] = 0;
    end
  endtask

  task automatic source(input int src, input int npk, input int fixed_dst);
    int cnt [N];
    for (int d = 0; d < N; d++) cnt[d] = 0;
    for (int p = 0; p < npk; p++) begin
      int d; d = (fixed_dst >= 0) ? fixed_dst : $urandom_range(0, N - 1);
      send(src, d, cnt[d], $urandom_range(1, 12)); cnt[d]++; sent_to[d]++;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
  endtask

  initial begin
    int total;
    for (int i = 0; i < N; i++) begin
      s_v[i] = 0; s_d[i] = 0; s_l[i] = 0; in_pkt[i] = 0; served[i] = 0; sent_to[i] = 0;
      for (int j = 0; j < N; j++) next_pkt[i][j] = 0;
    end
    repeat (3) @(posedge clk); rst_n = 1;
    fork
      source(0, 30, -1); source(1, 30, -1); source(2, 30, -1); source(3, 30, -1);
    join
    repeat (100) @(posedge clk);
    check("packets delivered", rx_pkts, 120);
    for (int o = 0; o < N; o++) check($sformatf("pkt_count[%0d]", o), int'(pkt_count[o]), sent_to[o]);
    // full contention on output 2
    for (int i = 0; i < N; i++) begin served[i] = 0; next_pkt[i][2] = 0; end
    fork
      source(0, 10, 2); source(1, 10, 2); source(2, 10, 2); source(3, 10, 2);
    join
    repeat (100) @(posedge clk);
    for (int i = 0; i < N; i++) check($sformatf("input %0d served under contention", i), served[i], 10);
    check("routing/integrity errors", errs, 0);
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
