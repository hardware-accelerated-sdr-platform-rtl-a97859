// tb_chdr_noc_shell: self-checking test of the RFNoC interface wrapper.
// Egress: unit packets of random length (some longer than SPP) must come out
// as CHDR packets of at most SPP payload words, each led by the two header
// words with the right SIDs, byte length, sequence number and end-of-burst
// flag (set only on the packet that carries the unit's TLAST).
// Ingress: CHDR packets are stripped to their payload, TLAST appears only
// at the end of an end-of-burst packet, and a skipped sequence number is
// counted. Both sides run under random back-pressure.
module tb_chdr_noc_shell;
  import sdr_pkg::*;
  localparam int SPP = 8;
  localparam logic [15:0] MY_SID = 16'h0005;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] dst = 16'h0002; logic [31:0] seq_errors;
  logic [31:0] po_d, no_d, ni_d, pi_d;
  logic po_v = 0, po_r, po_l = 0, no_v, no_r, no_l, ni_v = 0, ni_r, ni_l = 0, pi_v, pi_r, pi_l;

  chdr_noc_shell #(.SPP(SPP), .SID(MY_SID)) dut (.clk, .rst_n, .cfg_dst_sid(dst), .seq_errors,
    .pu_out_tdata(po_d), .pu_out_tvalid(po_v), .pu_out_tready(po_r), .pu_out_tlast(po_l),
    .noc_out_tdata(no_d), .noc_out_tvalid(no_v), .noc_out_tready(no_r), .noc_out_tlast(no_l),
    .noc_in_tdata(ni_d), .noc_in_tvalid(ni_v), .noc_in_tready(ni_r), .noc_in_tlast(ni_l),
    .pu_in_tdata(pi_d), .pu_in_tvalid(pi_v), .pu_in_tready(pi_r), .pu_in_tlast(pi_l));

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  always @(posedge clk) begin no_r <= ($urandom_range(0, 3) != 0); pi_r <= ($urandom_range(0, 3) != 0); end
  logic [31:0] nq [$]; bit nl [$];
  logic [31:0] pq [$]; bit pl [$];
  always @(negedge clk) begin
    if (no_v && no_r) begin nq.push_back(no_d); nl.push_back(no_l); end
    if (pi_v && pi_r) begin pq.push_back(pi_d); pl.push_back(pi_l); end
  end

  initial begin
    logic [31:0] sent [$]; int lens [$]; int seq, errs, total;
    po_d = 0; ni_d = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // ------------------------------------------------ egress
    lens = '{5, 8, 20, 1, 17, 9};
    foreach (lens[p]) for (int k = 0; k < lens[p]; k++) begin
      logic [31:0] d; d = $urandom; sent.push_back(d);
      @(negedge clk); po_d = d; po_l = (k == lens[p] - 1); po_v = 1;
      while (!po_r) @(negedge clk);
      @(posedge clk); #1 po_v = 0;
    end
    repeat (40) @(posedge clk);
    seq = 0; errs = 0; total = 0;
    begin
      int idx; idx = 0;
      foreach (lens[p]) begin
        int left; left = lens[p];
        while (left > 0) begin
          int n; chdr_hdr_t h;
          n = (left > SPP) ? SPP : left;
          if (nq.size() < n + 2) begin errs++; break; end
          h[31:0] = nq.pop_front(); void'(nl.pop_front());
          h[63:32] = nq.pop_front(); void'(nl.pop_front());
          if (h.dst_sid != dst || h.src_sid != MY_SID) errs++;
          if (int'(h.length) != 8 + 4 * n) errs++;
          if (int'(h.seqnum) != seq) errs++;
          if (h.eob != (left == n)) errs++;
          for (int k = 0; k < n; k++) begin
            if (nq.pop_front() != sent[idx]) errs++;
            if (nl.pop_front() != (k == n - 1)) errs++;
            idx++;
          end
          left -= n; seq++; total++;
        end
      end
    end
    check("egress header/payload errors", errs, 0);
    check("egress packets", total, 1 + 1 + 3 + 1 + 3 + 2);
    check("egress leftovers", nq.size(), 0);
    // ------------------------------------------------ ingress
    begin
      int seqs [4] = '{0, 1, 3, 4};      // one gap
      bit  eobs [4] = '{0, 1, 1, 0};
      int  plen [4] = '{3, 4, 1, 6};
      logic [31:0] exp_d [$]; bit exp_l [$];
      for (int p = 0; p < 4; p++) begin
        chdr_hdr_t h; logic [31:0] beats [$];
        beats.delete();
        h = '0; h.seqnum = 12'(seqs[p]); h.eob = eobs[p]; h.length = 16'(8 + 4 * plen[p]);
        h.src_sid = 16'h0001; h.dst_sid = MY_SID;
        beats.push_back(h[31:0]); beats.push_back(h[63:32]);
        for (int k = 0; k < plen[p]; k++) begin
          logic [31:0] d; d = $urandom; beats.push_back(d); exp_d.push_back(d);
          exp_l.push_back(eobs[p] && k == plen[p] - 1);
        end
        foreach (beats[k]) begin
          @(negedge clk); ni_d = beats[k]; ni_l = (k == beats.size() - 1); ni_v = 1;
          while (!ni_r) @(negedge clk);
          @(posedge clk); #1 ni_v = 0;
        end
      end
      repeat (20) @(posedge clk);
      check("ingress payload count", pq.size(), exp_d.size());
      errs = 0;
      foreach (exp_d[k]) if (k < pq.size() && (pq[k] != exp_d[k] || pl[k] != exp_l[k])) errs++;
      check("ingress payload/TLAST errors", errs, 0);
      check("sequence errors", int'(seq_errors), 1);
    end
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
