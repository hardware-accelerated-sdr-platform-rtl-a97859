// sdr_top: programmable-logic side of the hardware accelerated SDR platform.
//
// A transmit processing chain built from processing units (PUs) -- coder,
// mapper, OFDM modem, pulse shaping -- sits between the processor's memory
// and the RF board. Software on the processor (the medium access plane)
// hands packets to the chain through the DMA (send_packet / sent_IRQ) and
// collects received packets (receive_packet / received_IRQ). Every PU is
// parametrized through one AXI4-Lite register bank (the paper's parametric
// reconfiguration). Units that are not shared are wired directly
// (DMA -> coder -> mapper, pulse shaping -> RF interface); the OFDM modem is
// shared, so it hangs on the RFNoC crossbar behind a CHDR wrapper, as do the
// chain's front and back ends, the receive path and an external port:
//
//   memory -AXI HP-> DMA -> coder -> mapper -> [shell 0] --+
//                                                         |     [shell 1] <-> OFDM
//   memory <-AXI HP- DMA <----------------- [shell 0] <---+-- xbar
//   DAC <- RF if <- pulse shaping <-------- [shell 2] <---+     port 3 <-> ext_*
//   ADC -> RF if -------------------------> [shell 2] ----+
//
// The destination of each wrapper's output is a register (REG_ROUTE_*), so
// software composes the chain: by default mapper -> OFDM (IFFT) -> pulse
// shaping -> DAC, and ADC -> memory. Pointing the ADC route at the OFDM unit
// and the OFDM route at the host port time-shares the same modem for
// receive (FFT). The processor, its memory, the configuration port and the
// RF board are outside this module; their buses are ports.
// Clocks: clk for the whole processing plane; dac_clk and adc_clk are the
// converter clocks of the RF board (crossings inside rf_interface).
module sdr_top
  import sdr_pkg::*;
#(
  parameter int unsigned MAX_LOG2N = 6,    // largest FFT: 64 points
  parameter int unsigned NUM_TAPS  = 16,
  parameter int unsigned SPP       = 64,
  parameter int unsigned MAX_BURST = 16,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave (processor general-purpose master port)
  input  logic [7:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [7:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // AXI4 master (processor high-performance slave port)
  output logic [31:0] m_axi_araddr,
  output logic [7:0]  m_axi_arlen,
  output logic [2:0]  m_axi_arsize,
  output logic [1:0]  m_axi_arburst,
  output logic        m_axi_arvalid,
  input  logic        m_axi_arready,
  input  logic [31:0] m_axi_rdata,
  input  logic [1:0]  m_axi_rresp,
  input  logic        m_axi_rlast,
  input  logic        m_axi_rvalid,
  output logic        m_axi_rready,
  output logic [31:0] m_axi_awaddr,
  output logic [7:0]  m_axi_awlen,
  output logic [2:0]  m_axi_awsize,
  output logic [1:0]  m_axi_awburst,
  output logic        m_axi_awvalid,
  input  logic        m_axi_awready,
  output logic [31:0] m_axi_wdata,
  output logic [3:0]  m_axi_wstrb,
  output logic        m_axi_wlast,
  output logic        m_axi_wvalid,
  input  logic        m_axi_wready,
  input  logic [1:0]  m_axi_bresp,
  input  logic        m_axi_bvalid,
  output logic        m_axi_bready,
  // interrupts to the processor
  output logic        sent_irq,
  output logic        received_irq,
  // external network-on-chip port (CHDR packets, 32-bit beats)
  input  logic [31:0] ext_in_tdata,
  input  logic        ext_in_tvalid,
  output logic        ext_in_tready,
  input  logic        ext_in_tlast,
  output logic [31:0] ext_out_tdata,
  output logic        ext_out_tvalid,
  input  logic        ext_out_tready,
  output logic        ext_out_tlast,
  // RF board
  input  logic        dac_clk,
  input  logic        dac_rst_n,
  output iq_t         dac_data,
  output logic        dac_valid,
  input  logic        adc_clk,
  input  logic        adc_rst_n,
  input  iq_t         adc_data,
  output logic [31:0] rf_lo_freq,
  output logic [15:0] rf_gain
);

  localparam int unsigned NUM_RO = 8;
  localparam int unsigned NPORT  = 4;

  function automatic logic [NUM_RW_REGS*32-1:0] reset_values();
    logic [NUM_RW_REGS*32-1:0] v;
    v = '0;
    v[REG_MAPPER*32     +: 32] = 32'(MOD_QPSK);
    v[REG_OFDM*32       +: 32] = 32'(MAX_LOG2N);
    v[REG_OFDM_CP*32    +: 32] = 32'((1 << MAX_LOG2N) / 4);
    v[REG_ROUTE_TX*32   +: 32] = 32'(SID_OFDM);
    v[REG_ROUTE_OFDM*32 +: 32] = 32'(SID_RF);
    v[REG_ROUTE_RX*32   +: 32] = 32'(SID_HOST);
    v[REG_RF_RXLEN*32   +: 32] = 32'(SPP);
    v[REG_FIR0*32       +: 32] = 32'(16384);       // pass-through filter
    return v;
  endfunction

  // ------------------------------------------------------- register bank
  logic [31:0]            regs   [NUM_RW_REGS];
  logic [NUM_RW_REGS-1:0] wr_pulse;
  logic [31:0]            status [NUM_RO];

  axil_regs #(.NUM_RW(NUM_RW_REGS), .NUM_RO(NUM_RO), .ADDR_W(8),
              .RESET_VALUES(reset_values())) u_regs (
    .clk, .rst_n,
    .s_awaddr(s_axil_awaddr), .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata(s_axil_wdata), .s_wstrb(s_axil_wstrb), .s_wvalid(s_axil_wvalid),
    .s_wready(s_axil_wready), .s_bresp(s_axil_bresp), .s_bvalid(s_axil_bvalid),
    .s_bready(s_axil_bready), .s_araddr(s_axil_araddr), .s_arvalid(s_axil_arvalid),
    .s_arready(s_axil_arready), .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp),
    .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready),
    .regs_o(regs), .wr_pulse_o(wr_pulse), .ro_i(status));

  // ------------------------------------------------------------------ DMA
  logic [31:0] mm2s_tdata;  logic [3:0] mm2s_tkeep;
  logic mm2s_tvalid, mm2s_tready, mm2s_tlast;
  logic [31:0] s2mm_tdata;
  logic s2mm_tvalid, s2mm_tready, s2mm_tlast;
  logic mm2s_busy, s2mm_busy, s2mm_trunc;
  logic [31:0] s2mm_bytes;

  axis_dma #(.MAX_BURST(MAX_BURST)) u_dma (
    .clk, .rst_n,
    .mm2s_start(wr_pulse[REG_MM2S_LEN]), .mm2s_addr(regs[REG_MM2S_ADDR]), .mm2s_len(regs[REG_MM2S_LEN]),
    .s2mm_start(wr_pulse[REG_S2MM_LEN]), .s2mm_addr(regs[REG_S2MM_ADDR]), .s2mm_len(regs[REG_S2MM_LEN]),
    .sent_irq, .received_irq, .mm2s_busy, .s2mm_busy, .s2mm_bytes, .s2mm_trunc,
    .m_axis_tdata(mm2s_tdata), .m_axis_tkeep(mm2s_tkeep), .m_axis_tvalid(mm2s_tvalid),
    .m_axis_tready(mm2s_tready), .m_axis_tlast(mm2s_tlast),
    .s_axis_tdata(s2mm_tdata), .s_axis_tkeep(4'hF), .s_axis_tvalid(s2mm_tvalid),
    .s_axis_tready(s2mm_tready), .s_axis_tlast(s2mm_tlast),
    .m_araddr(m_axi_araddr), .m_arlen(m_axi_arlen), .m_arsize(m_axi_arsize),
    .m_arburst(m_axi_arburst), .m_arvalid(m_axi_arvalid), .m_arready(m_axi_arready),
    .m_rdata(m_axi_rdata), .m_rresp(m_axi_rresp), .m_rlast(m_axi_rlast),
    .m_rvalid(m_axi_rvalid), .m_rready(m_axi_rready),
    .m_awaddr(m_axi_awaddr), .m_awlen(m_axi_awlen), .m_awsize(m_axi_awsize),
    .m_awburst(m_axi_awburst), .m_awvalid(m_axi_awvalid), .m_awready(m_axi_awready),
    .m_wdata(m_axi_wdata), .m_wstrb(m_axi_wstrb), .m_wlast(m_axi_wlast),
    .m_wvalid(m_axi_wvalid), .m_wready(m_axi_wready),
    .m_bresp(m_axi_bresp), .m_bvalid(m_axi_bvalid), .m_bready(m_axi_bready));

  // ------------------------------------------------- coder and mapper (direct)
  logic cod_tdata, cod_tvalid, cod_tready, cod_tlast;
  iq_t  map_tdata;
  logic map_tvalid, map_tready, map_tlast;

  pu_coder u_coder (
    .clk, .rst_n, .cfg_rate(rate_e'(regs[REG_CODER][1:0])),
    .s_axis_tdata(mm2s_tdata), .s_axis_tkeep(mm2s_tkeep), .s_axis_tvalid(mm2s_tvalid),
    .s_axis_tready(mm2s_tready), .s_axis_tlast(mm2s_tlast),
    .m_axis_tdata(cod_tdata), .m_axis_tvalid(cod_tvalid),
    .m_axis_tready(cod_tready), .m_axis_tlast(cod_tlast));

  pu_mapper u_mapper (
    .clk, .rst_n, .cfg_mod(mod_e'(regs[REG_MAPPER][1:0])),
    .s_axis_tdata(cod_tdata), .s_axis_tvalid(cod_tvalid),
    .s_axis_tready(cod_tready), .s_axis_tlast(cod_tlast),
    .m_axis_tdata(map_tdata), .m_axis_tvalid(map_tvalid),
    .m_axis_tready(map_tready), .m_axis_tlast(map_tlast));

  // ------------------------------------------------------------ crossbar
  logic [31:0] xs_tdata [NPORT];  logic xs_tvalid [NPORT], xs_tready [NPORT], xs_tlast [NPORT];
  logic [31:0] xm_tdata [NPORT];  logic xm_tvalid [NPORT], xm_tready [NPORT], xm_tlast [NPORT];
  logic [31:0] pkt_count [NPORT];
  logic [31:0] seq_err [3];

  rfnoc_xbar #(.NUM_PORTS(NPORT), .DATA_W(32)) u_xbar (
    .clk, .rst_n,
    .s_axis_tdata(xs_tdata), .s_axis_tvalid(xs_tvalid), .s_axis_tready(xs_tready), .s_axis_tlast(xs_tlast),
    .m_axis_tdata(xm_tdata), .m_axis_tvalid(xm_tvalid), .m_axis_tready(xm_tready), .m_axis_tlast(xm_tlast),
    .pkt_count);

  // port 0: host (mapper out, DMA in)
  chdr_noc_shell #(.SPP(SPP), .SID(SID_HOST)) u_shell_host (
    .clk, .rst_n, .cfg_dst_sid(regs[REG_ROUTE_TX][15:0]), .seq_errors(seq_err[0]),
    .pu_out_tdata(map_tdata), .pu_out_tvalid(map_tvalid), .pu_out_tready(map_tready), .pu_out_tlast(map_tlast),
    .noc_out_tdata(xs_tdata[0]), .noc_out_tvalid(xs_tvalid[0]), .noc_out_tready(xs_tready[0]), .noc_out_tlast(xs_tlast[0]),
    .noc_in_tdata(xm_tdata[0]), .noc_in_tvalid(xm_tvalid[0]), .noc_in_tready(xm_tready[0]), .noc_in_tlast(xm_tlast[0]),
    .pu_in_tdata(s2mm_tdata), .pu_in_tvalid(s2mm_tvalid), .pu_in_tready(s2mm_tready), .pu_in_tlast(s2mm_tlast));

  // port 1: shared OFDM modem
  iq_t  ofdm_in_tdata, ofdm_out_tdata;
  logic ofdm_in_tvalid, ofdm_in_tready, ofdm_in_tlast;
  logic ofdm_out_tvalid, ofdm_out_tready, ofdm_out_tlast, ofdm_busy;

  chdr_noc_shell #(.SPP(SPP), .SID(SID_OFDM)) u_shell_ofdm (
    .clk, .rst_n, .cfg_dst_sid(regs[REG_ROUTE_OFDM][15:0]), .seq_errors(seq_err[1]),
    .pu_out_tdata(ofdm_out_tdata), .pu_out_tvalid(ofdm_out_tvalid), .pu_out_tready(ofdm_out_tready), .pu_out_tlast(ofdm_out_tlast),
    .noc_out_tdata(xs_tdata[1]), .noc_out_tvalid(xs_tvalid[1]), .noc_out_tready(xs_tready[1]), .noc_out_tlast(xs_tlast[1]),
    .noc_in_tdata(xm_tdata[1]), .noc_in_tvalid(xm_tvalid[1]), .noc_in_tready(xm_tready[1]), .noc_in_tlast(xm_tlast[1]),
    .pu_in_tdata(ofdm_in_tdata), .pu_in_tvalid(ofdm_in_tvalid), .pu_in_tready(ofdm_in_tready), .pu_in_tlast(ofdm_in_tlast));

  pu_ofdm #(.MAX_LOG2N(MAX_LOG2N)) u_ofdm (
    .clk, .rst_n,
    .cfg_log2n(regs[REG_OFDM][2:0]), .cfg_fwd(regs[REG_OFDM][4]), .cfg_cp(regs[REG_OFDM_CP][15:0]),
    .s_axis_tdata(ofdm_in_tdata), .s_axis_tvalid(ofdm_in_tvalid),
    .s_axis_tready(ofdm_in_tready), .s_axis_tlast(ofdm_in_tlast),
    .m_axis_tdata(ofdm_out_tdata), .m_axis_tvalid(ofdm_out_tvalid),
    .m_axis_tready(ofdm_out_tready), .m_axis_tlast(ofdm_out_tlast), .busy(ofdm_busy));

  // port 2: RF (pulse shaping -> DAC, ADC -> switch)
  iq_t  ps_in_tdata, ps_out_tdata, rx_tdata;
  logic ps_in_tvalid, ps_in_tready, ps_in_tlast;
  logic ps_out_tvalid, ps_out_tready, ps_out_tlast;
  logic rx_tvalid, rx_tready, rx_tlast;
  logic signed [15:0] coef [NUM_TAPS];
  logic [31:0] tx_underflows, rx_overflows;

  always_comb
    for (int k = 0; k < NUM_TAPS; k++) coef[k] = regs[(REG_FIR0 + k) % NUM_RW_REGS][15:0];

  chdr_noc_shell #(.SPP(SPP), .SID(SID_RF)) u_shell_rf (
    .clk, .rst_n, .cfg_dst_sid(regs[REG_ROUTE_RX][15:0]), .seq_errors(seq_err[2]),
    .pu_out_tdata(rx_tdata), .pu_out_tvalid(rx_tvalid), .pu_out_tready(rx_tready), .pu_out_tlast(rx_tlast),
    .noc_out_tdata(xs_tdata[2]), .noc_out_tvalid(xs_tvalid[2]), .noc_out_tready(xs_tready[2]), .noc_out_tlast(xs_tlast[2]),
    .noc_in_tdata(xm_tdata[2]), .noc_in_tvalid(xm_tvalid[2]), .noc_in_tready(xm_tready[2]), .noc_in_tlast(xm_tlast[2]),
    .pu_in_tdata(ps_in_tdata), .pu_in_tvalid(ps_in_tvalid), .pu_in_tready(ps_in_tready), .pu_in_tlast(ps_in_tlast));

  pu_pulse_shaping #(.NUM_TAPS(NUM_TAPS)) u_pulse (
    .clk, .rst_n, .cfg_coef(coef),
    .s_axis_tdata(ps_in_tdata), .s_axis_tvalid(ps_in_tvalid),
    .s_axis_tready(ps_in_tready), .s_axis_tlast(ps_in_tlast),
    .m_axis_tdata(ps_out_tdata), .m_axis_tvalid(ps_out_tvalid),
    .m_axis_tready(ps_out_tready), .m_axis_tlast(ps_out_tlast));

  rf_interface #(.FIFO_DEPTH(FIFO_DEPTH)) u_rf (
    .clk, .rst_n,
    .cfg_tx_en(regs[REG_RF_CTRL][0]), .cfg_rx_en(regs[REG_RF_CTRL][1]),
    .cfg_rx_len(regs[REG_RF_RXLEN][15:0]), .cfg_lo_freq(regs[REG_RF_LO]),
    .cfg_gain(regs[REG_RF_GAIN][15:0]), .rf_lo_freq, .rf_gain, .tx_underflows, .rx_overflows,
    .s_axis_tdata(ps_out_tdata), .s_axis_tvalid(ps_out_tvalid),
    .s_axis_tready(ps_out_tready), .s_axis_tlast(ps_out_tlast),
    .m_axis_tdata(rx_tdata), .m_axis_tvalid(rx_tvalid),
    .m_axis_tready(rx_tready), .m_axis_tlast(rx_tlast),
    .dac_clk, .dac_rst_n, .dac_data, .dac_valid,
    .adc_clk, .adc_rst_n, .adc_data);

  // port 3: external
  assign xs_tdata[3]    = ext_in_tdata;
  assign xs_tvalid[3]   = ext_in_tvalid;
  assign xs_tlast[3]    = ext_in_tlast;
  assign ext_in_tready  = xs_tready[3];
  assign ext_out_tdata  = xm_tdata[3];
  assign ext_out_tvalid = xm_tvalid[3];
  assign ext_out_tlast  = xm_tlast[3];
  assign xm_tready[3]   = ext_out_tready;

  // ----------------------------------------------------------- status words
  assign status[0] = {28'd0, ofdm_busy, s2mm_trunc, s2mm_busy, mm2s_busy};
  assign status[1] = s2mm_bytes;
  assign status[2] = tx_underflows;
  assign status[3] = rx_overflows;
  assign status[4] = seq_err[0] + seq_err[1] + seq_err[2];
  assign status[5] = pkt_count[0];
  assign status[6] = pkt_count[1];
  assign status[7] = pkt_count[2];

endmodule
