// tb_axil_regs: self-checking test of the AXI4-Lite register bank.
// Writes and reads back registers (full words and single byte lanes), reads
// the read-only inputs, checks the one-cycle write pulse, the reset values
// and the SLVERR answer outside the map, under a randomly stalling master.
module tb_axil_regs;
  localparam int NRW = 8, NRO = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [5:0] awaddr, araddr; logic awvalid, awready, wvalid, wready, bvalid, bready;
  logic [31:0] wdata, rdata; logic [3:0] wstrb; logic [1:0] bresp, rresp;
  logic arvalid, arready, rvalid, rready;
  logic [31:0] regs [NRW]; logic [NRW-1:0] wr_pulse; logic [31:0] ro [NRO];
  int checks = 0, failures = 0;

  axil_regs #(.NUM_RW(NRW), .NUM_RO(NRO), .ADDR_W(6),
              .RESET_VALUES({32'h0, 32'h0, 32'h0, 32'h0, 32'h0, 32'h0, 32'h0, 32'hCAFE_0001})) dut (
    .clk, .rst_n, .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready),
    .s_wdata(wdata), .s_wstrb(wstrb), .s_wvalid(wvalid), .s_wready(wready),
    .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready),
    .s_rdata(rdata), .s_rresp(rresp), .s_rvalid(rvalid), .s_rready(rready),
    .regs_o(regs), .wr_pulse_o(wr_pulse), .ro_i(ro));

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  int pulses [NRW];
  always @(posedge clk) for (int k = 0; k < NRW; k++) if (wr_pulse[k]) pulses[k]++;

  task automatic wr(input int idx, input logic [31:0] d, input logic [3:0] s, output logic [1:0] resp);
    awaddr <= 6'(idx * 4); wdata <= d; wstrb <= s; awvalid <= 1; wvalid <= 1;
    do @(posedge clk); while (!(awready && wready));
    awvalid <= 0; wvalid <= 0;
    repeat ($urandom_range(0, 2)) @(posedge clk);
    bready <= 1;
    do @(posedge clk); while (!bvalid);
    resp = bresp; bready <= 0;
  endtask

  task automatic rd(input int idx, output logic [31:0] d, output logic [1:0] resp);
    araddr <= 6'(idx * 4); arvalid <= 1;
    do @(posedge clk); while (!arready);
    arvalid <= 0;
    repeat ($urandom_range(0, 2)) @(posedge clk);
    rready <= 1;
    do @(posedge clk); while (!rvalid);
    d = rdata; resp = rresp; rready <= 0;
  endtask

  logic [31:0] model [NRW];
  initial begin
    logic [31:0] d; logic [1:0] r;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0; awaddr = 0; araddr = 0;
    wdata = 0; wstrb = 0; ro[0] = 32'h1234_5678; ro[1] = 32'h9ABC_DEF0;
    for (int k = 0; k < NRW; k++) pulses[k] = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    check("reset value reg0", regs[0], 32'hCAFE_0001);
    check("reset value reg3", regs[3], 32'h0);
    for (int k = 0; k < NRW; k++) model[k] = regs[k];
    for (int n = 0; n < 60; n++) begin
      int idx; logic [31:0] v; logic [3:0] s;
      idx = $urandom_range(0, NRW - 1); v = $urandom; s = (n % 3 == 0) ? 4'(1 << (n % 4)) : 4'hF;
      wr(idx, v, s, r);
      check("write resp", 32'(r), 0);
      for (int b = 0; b < 4; b++) if (s[b]) model[idx][b*8 +: 8] = v[b*8 +: 8];
      rd($urandom_range(0, NRW - 1), d, r);
    end
    for (int k = 0; k < NRW; k++) begin
      rd(k, d, r);
      check($sformatf("readback reg%0d", k), d, model[k]);
      check("regs_o", regs[k], model[k]);
    end
    rd(NRW, d, r);     check("ro0", d, 32'h1234_5678); check("ro0 resp", 32'(r), 0);
    rd(NRW + 1, d, r); check("ro1", d, 32'h9ABC_DEF0);
    rd(NRW + 3, d, r); check("unmapped resp", 32'(r), 2);
    wr(NRW, 32'hFFFF_FFFF, 4'hF, r); check("write ro resp", 32'(r), 2);
    // write pulse: exactly one per write
    for (int k = 0; k < NRW; k++) pulses[k] = 0;
    wr(5, 32'h1, 4'hF, r); wr(5, 32'h2, 4'hF, r); wr(2, 32'h3, 4'hF, r);
    @(posedge clk);
    check("pulses reg5", 32'(pulses[5]), 2);
    check("pulses reg2", 32'(pulses[2]), 1);
    check("pulses reg0", 32'(pulses[0]), 0);
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
