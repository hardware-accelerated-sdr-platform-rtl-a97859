// sdr_pkg: types and constants shared by the blocks of the hardware
// accelerated SDR data plane.
//
// * iq_t           one complex baseband sample, 16-bit signed I and Q.
// * chdr_hdr_t     the 64-bit compressed header (CHDR) that the RFNoC switch
//                  routes on. The field layout follows the RFNoC convention
//                  (type, has_time, end-of-burst, 12-bit sequence number,
//                  16-bit byte length, 16-bit source and destination stream
//                  IDs); the paper names the format but does not print it.
// * mod_e, rate_e  run-time settings of the mapper and coder.
// * REG_*          word index of each control register in the AXI4-Lite
//                  register bank (register map is this design's own choice).
package sdr_pkg;

  typedef struct packed {
    logic signed [15:0] i;
    logic signed [15:0] q;
  } iq_t;

  typedef struct packed {
    logic [1:0]  pkt_type;
    logic        has_time;
    logic        eob;
    logic [11:0] seqnum;
    logic [15:0] length;   // bytes, header included
    logic [15:0] src_sid;
    logic [15:0] dst_sid;
  } chdr_hdr_t;

  typedef enum logic [1:0] {
    MOD_BPSK  = 2'd0,
    MOD_QPSK  = 2'd1,
    MOD_QAM16 = 2'd2,
    MOD_QAM64 = 2'd3
  } mod_e;

  typedef enum logic [1:0] {
    RATE_1_2 = 2'd0,
    RATE_2_3 = 2'd1,
    RATE_3_4 = 2'd2
  } rate_e;

  // Q2.13 amplitude of one constellation step: round(2^13 * K_MOD) with
  // K_MOD = 1, 1/sqrt(2), 1/sqrt(10), 1/sqrt(42) (unit average power).
  localparam logic signed [15:0] KMOD_BPSK  = 16'sd8192;
  localparam logic signed [15:0] KMOD_QPSK  = 16'sd5793;
  localparam logic signed [15:0] KMOD_QAM16 = 16'sd2591;
  localparam logic signed [15:0] KMOD_QAM64 = 16'sd1264;

  // Register map (32-bit word index).
  localparam int unsigned REG_MM2S_ADDR  = 0;   // send_packet: addr_read
  localparam int unsigned REG_MM2S_LEN   = 1;   // send_packet: packet_size, write starts
  localparam int unsigned REG_S2MM_ADDR  = 2;   // receive_packet: addr_write
  localparam int unsigned REG_S2MM_LEN   = 3;   // receive_packet: packet_size, write starts
  localparam int unsigned REG_CODER      = 4;   // [1:0] rate_e
  localparam int unsigned REG_MAPPER     = 5;   // [1:0] mod_e
  localparam int unsigned REG_OFDM       = 6;   // [2:0] log2 FFT length, [4] forward FFT
  localparam int unsigned REG_OFDM_CP    = 7;   // cyclic prefix length in samples
  localparam int unsigned REG_ROUTE_TX   = 8;   // [15:0] dst SID of the chain front-end
  localparam int unsigned REG_ROUTE_OFDM = 9;   // [15:0] dst SID of the shared OFDM unit
  localparam int unsigned REG_RF_CTRL    = 10;  // [0] tx enable, [1] rx enable
  localparam int unsigned REG_RF_LO      = 11;  // local-oscillator frequency word
  localparam int unsigned REG_RF_GAIN    = 12;  // [7:0] TX gain, [15:8] LNA gain
  localparam int unsigned REG_RF_RXLEN   = 13;  // samples per received packet
  localparam int unsigned REG_ROUTE_RX   = 14;  // [15:0] dst SID of the received samples
  localparam int unsigned REG_FIR0       = 16;  // 16 FIR coefficients, Q1.14
  localparam int unsigned NUM_RW_REGS    = 32;
  localparam int unsigned REG_STATUS     = 32;  // read-only status words follow

  // Stream IDs (endpoint numbers) of the crossbar ports in sdr_top.
  //   0: host port   - egress: mapper output, ingress: DMA to memory
  //   1: OFDM modem  - the shared unit
  //   2: RF port     - egress: ADC samples, ingress: pulse shaping to DAC
  //   3: external    - brought out of the chip (inter-chip link)
  localparam logic [15:0] SID_HOST     = 16'h0000;
  localparam logic [15:0] SID_OFDM     = 16'h0001;
  localparam logic [15:0] SID_RF       = 16'h0002;
  localparam logic [15:0] SID_EXTERNAL = 16'h0003;

endpackage
