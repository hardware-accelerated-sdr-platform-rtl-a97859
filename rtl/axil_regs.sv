// axil_regs: AXI4-Lite register bank for the parametric control of the
// processing units (PUs), the DMA and the RF plane.
//
// The control plane (software on the processor) changes PU behaviour at run
// time through these registers, without loading a new bitstream: FFT length,
// coder rate, modulation, filter taps, stream routes, RF settings. The paper
// states that parametrized PUs expose control registers through AXI
// memory-mapped interfaces; the single shared bank, its size and its map
// (sdr_pkg::REG_*) are this design's own choices.
//
// Interface: AXI4-Lite slave, 32-bit data, byte addresses, word aligned.
// Words 0..NUM_RW-1 are read/write (byte strobes honoured) and come out on
// regs_o; words NUM_RW..NUM_RW+NUM_RO-1 read the ro_i inputs; anything above
// reads 0 and answers SLVERR. wr_pulse_o[k] is high for one cycle after
// word k was written, so a write can start an action (e.g. a DMA transfer).
// Timing: a write is accepted when AW and W are both valid and no response
// is pending; B follows one cycle later. A read answers one cycle after AR.
module axil_regs #(
  parameter int unsigned NUM_RW = 32,
  parameter int unsigned NUM_RO = 4,
  parameter int unsigned ADDR_W = 8,
  parameter logic [NUM_RW*32-1:0] RESET_VALUES = '0
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0] s_awaddr,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  input  logic              s_wvalid,
  output logic              s_wready,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  input  logic [ADDR_W-1:0] s_araddr,
  input  logic              s_arvalid,
  output logic              s_arready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rvalid,
  input  logic              s_rready,
  // register side
  output logic [31:0]       regs_o     [NUM_RW],
  output logic [NUM_RW-1:0] wr_pulse_o,
  input  logic [31:0]       ro_i       [NUM_RO]
);

  localparam int unsigned NUM_ALL = NUM_RW + NUM_RO;

  logic              wr_fire;
  logic [ADDR_W-3:0] wr_idx;
  logic [ADDR_W-3:0] rd_idx;

  assign wr_fire   = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_fire;
  assign s_wready  = wr_fire;
  assign s_arready = !s_rvalid;
  assign wr_idx    = s_awaddr[ADDR_W-1:2];
  assign rd_idx    = s_araddr[ADDR_W-1:2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NUM_RW; k++) regs_o[k] <= RESET_VALUES[k*32 +: 32];
      wr_pulse_o <= '0;
      s_bvalid   <= 1'b0;
      s_bresp    <= 2'b00;
    end else begin
      wr_pulse_o <= '0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        s_bresp  <= (32'(wr_idx) < NUM_RW) ? 2'b00 : 2'b10;
        for (int k = 0; k < NUM_RW; k++) begin
          if (32'(wr_idx) == k) begin
            for (int b = 0; b < 4; b++)
              if (s_wstrb[b]) regs_o[k][b*8 +: 8] <= s_wdata[b*8 +: 8];
            wr_pulse_o[k] <= 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
      s_rresp  <= 2'b00;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        s_rdata  <= '0;
        s_rresp  <= 2'b10;
        for (int k = 0; k < NUM_RW; k++)
          if (32'(rd_idx) == k) begin s_rdata <= regs_o[k]; s_rresp <= 2'b00; end
        for (int k = 0; k < NUM_RO; k++)
          if (32'(rd_idx) == NUM_RW + k) begin s_rdata <= ro_i[k]; s_rresp <= 2'b00; end
      end
    end
  end

  // A response, once offered, stays until it is taken.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_bvalid && !s_bready |=> s_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

  initial if (NUM_ALL > (1 << (ADDR_W - 2))) $error("axil_regs: address space too small");

endmodule
