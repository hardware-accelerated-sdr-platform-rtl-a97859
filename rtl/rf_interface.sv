// rf_interface: boundary between the radio processing plane and the RF
// plane (a DAC/ADC board on an FMC connector).
//
// Transmit: complex samples from the end of the processing chain (clk
// domain) cross into the DAC clock domain through an asynchronous FIFO. While
// TX is enabled the DAC gets one sample per dac_clk; dac_valid marks real
// samples. If the FIFO runs dry inside a packet (after its first sample and
// before its TLAST) the DAC gets zeros and the underflow counter counts the
// missing samples.
// Receive: while RX is enabled every adc_clk cycle's sample is cut into
// packets of cfg_rx_len samples (TLAST on the last), crossed into the clk
// domain and offered to the receive side (the DMA). A sample that finds the
// FIFO full is dropped and counted as overflow.
// Control: cfg_lo_freq and cfg_gain are registered and driven to the board
// (how the board takes them, e.g. over SPI, is outside this block).
// The paper says only that the RF boards connect through FMC and that the
// radio control plane sets RF parameters such as LO frequency and LNA gain;
// all behaviour above is this design's own choice. Enables and cfg_rx_len
// are synchronised bit by bit and are meant to be changed only while the
// corresponding direction is disabled. Counters reach the clk domain as
// Gray code.
module rf_interface
  import sdr_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_tx_en,
  input  logic        cfg_rx_en,
  input  logic [15:0] cfg_rx_len,
  input  logic [31:0] cfg_lo_freq,
  input  logic [15:0] cfg_gain,
  output logic [31:0] rf_lo_freq,
  output logic [15:0] rf_gain,
  output logic [31:0] tx_underflows,
  output logic [31:0] rx_overflows,
  // transmit samples (clk)
  input  iq_t         s_axis_tdata,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  input  logic        s_axis_tlast,
  // received samples (clk)
  output iq_t         m_axis_tdata,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic        m_axis_tlast,
  // DAC side
  input  logic        dac_clk,
  input  logic        dac_rst_n,
  output iq_t         dac_data,
  output logic        dac_valid,
  // ADC side
  input  logic        adc_clk,
  input  logic        adc_rst_n,
  input  iq_t         adc_data
);

  // ------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rf_lo_freq <= '0;
      rf_gain    <= '0;
    end else begin
      rf_lo_freq <= cfg_lo_freq;
      rf_gain    <= cfg_gain;
    end
  end

  // ------------------------------------------------------------- transmit
  iq_t  txf_data;
  logic txf_valid, txf_ready, txf_last;
  logic [1:0] tx_en_sync;
  logic in_burst;
  logic [31:0] unf_bin, unf_gray;

  axis_async_fifo #(.WIDTH($bits(iq_t)), .DEPTH(FIFO_DEPTH)) u_tx_fifo (
    .s_clk(clk), .s_rst_n(rst_n),
    .s_axis_tdata(s_axis_tdata), .s_axis_tvalid(s_axis_tvalid),
    .s_axis_tready(s_axis_tready), .s_axis_tlast(s_axis_tlast),
    .m_clk(dac_clk), .m_rst_n(dac_rst_n),
    .m_axis_tdata(txf_data), .m_axis_tvalid(txf_valid),
    .m_axis_tready(txf_ready), .m_axis_tlast(txf_last));

  assign txf_ready = tx_en_sync[1];

  always_ff @(posedge dac_clk or negedge dac_rst_n) begin
    if (!dac_rst_n) begin
      tx_en_sync <= '0;
      dac_data   <= '0;
      dac_valid  <= 1'b0;
      in_burst   <= 1'b0;
      unf_bin    <= '0;
      unf_gray   <= '0;
    end else begin
      tx_en_sync <= {tx_en_sync[0], cfg_tx_en};
      dac_valid  <= txf_valid && txf_ready;
      dac_data   <= (txf_valid && txf_ready) ? txf_data : '0;
      if (txf_valid && txf_ready) begin
        in_burst <= !txf_last;
      end else if (tx_en_sync[1] && in_burst) begin
        unf_bin  <= unf_bin + 1;
        unf_gray <= (unf_bin + 1) ^ ((unf_bin + 1) >> 1);
      end
      if (!tx_en_sync[1]) in_burst <= 1'b0;
    end
  end

  // ------------------------------------------------------------- receive
  logic [1:0]  rx_en_sync;
  logic [15:0] rx_len_q1, rx_len_q2, rx_cnt;
  logic        rxf_ready;
  logic [31:0] ovf_bin, ovf_gray;
  logic        rx_last;

  assign rx_last = (rx_cnt + 16'd1 >= rx_len_q2);

  axis_async_fifo #(.WIDTH($bits(iq_t)), .DEPTH(FIFO_DEPTH)) u_rx_fifo (
    .s_clk(adc_clk), .s_rst_n(adc_rst_n),
    .s_axis_tdata(adc_data), .s_axis_tvalid(rx_en_sync[1]),
    .s_axis_tready(rxf_ready), .s_axis_tlast(rx_last),
    .m_clk(clk), .m_rst_n(rst_n),
    .m_axis_tdata(m_axis_tdata), .m_axis_tvalid(m_axis_tvalid),
    .m_axis_tready(m_axis_tready), .m_axis_tlast(m_axis_tlast));

  always_ff @(posedge adc_clk or negedge adc_rst_n) begin
    if (!adc_rst_n) begin
      rx_en_sync <= '0;
      rx_len_q1  <= '0;
      rx_len_q2  <= '0;
      rx_cnt     <= '0;
      ovf_bin    <= '0;
      ovf_gray   <= '0;
    end else begin
      rx_en_sync <= {rx_en_sync[0], cfg_rx_en};
      rx_len_q1  <= cfg_rx_len;
      rx_len_q2  <= rx_len_q1;
      if (!rx_en_sync[1]) begin
        rx_cnt <= '0;
      end else if (rxf_ready) begin
        rx_cnt <= rx_last ? '0 : rx_cnt + 16'd1;
      end else begin
        ovf_bin  <= ovf_bin + 1;
        ovf_gray <= (ovf_bin + 1) ^ ((ovf_bin + 1) >> 1);
      end
    end
  end

  // ------------------------------------------------ counters to clk domain
  logic [31:0] unf_s1, unf_s2, ovf_s1, ovf_s2;

  function automatic logic [31:0] gray2bin(input logic [31:0] g);
    logic [31:0] b;
    b[31] = g[31];
    for (int k = 30; k >= 0; k--) b[k] = b[k+1] ^ g[k];
    return b;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      unf_s1 <= '0; unf_s2 <= '0; ovf_s1 <= '0; ovf_s2 <= '0;
    end else begin
      unf_s1 <= unf_gray; unf_s2 <= unf_s1;
      ovf_s1 <= ovf_gray; ovf_s2 <= ovf_s1;
    end
  end

  assign tx_underflows = gray2bin(unf_s2);
  assign rx_overflows  = gray2bin(ovf_s2);

endmodule
