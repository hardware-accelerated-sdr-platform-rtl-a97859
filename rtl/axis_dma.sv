// axis_dma: DMA engine between processor memory and the radio processing
// plane.
//
// The medium access plane runs as software on the processor and exchanges
// packets with the processing chains through the high-performance (HP) AXI
// port. The paper defines the software view: send_packet(addr_read,
// packet_size) moves a packet of packet_size bytes from memory to the
// transmit chain and raises sent_IRQ when done; receive_packet(addr_write,
// packet_size) stores the next packet coming out of the receive chain and
// raises received_IRQ. Packets travel on AXI4-Stream with TLAST closing a
// packet. How the engine is built is this design's own choice:
//
//  * MM2S (memory to stream): INCR read bursts of up to MAX_BURST words,
//    never crossing a 4 KiB boundary, one burst in flight. Read data beats go
//    straight to the stream (RREADY = TREADY). TKEEP of the last beat marks
//    the valid bytes of a packet whose size is not a multiple of 4.
//  * S2MM (stream to memory): beats are collected in a MAX_BURST-word
//    buffer, then written as one INCR burst; the packet ends at TLAST or when
//    packet_size bytes have been stored. Beats of a longer packet are
//    dropped up to its TLAST and s2mm_trunc is set. s2mm_bytes reports the
//    stored byte count.
//  * sent_irq / received_irq are one-cycle pulses (edge interrupts).
//
// Addresses must be word aligned; TKEEP is assumed contiguous from byte 0.
// Timing: the first AR is issued the cycle after mm2s_start; sent_irq pulses
// the cycle after the last stream beat. received_irq pulses the cycle after
// the last write response.
module axis_dma #(
  parameter int unsigned MAX_BURST = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // commands
  input  logic        mm2s_start,
  input  logic [31:0] mm2s_addr,
  input  logic [31:0] mm2s_len,
  input  logic        s2mm_start,
  input  logic [31:0] s2mm_addr,
  input  logic [31:0] s2mm_len,
  output logic        sent_irq,
  output logic        received_irq,
  output logic        mm2s_busy,
  output logic        s2mm_busy,
  output logic [31:0] s2mm_bytes,
  output logic        s2mm_trunc,
  // MM2S stream out
  output logic [31:0] m_axis_tdata,
  output logic [3:0]  m_axis_tkeep,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic        m_axis_tlast,
  // S2MM stream in
  input  logic [31:0] s_axis_tdata,
  input  logic [3:0]  s_axis_tkeep,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  input  logic        s_axis_tlast,
  // AXI4 master (HP port)
  output logic [31:0] m_araddr,
  output logic [7:0]  m_arlen,
  output logic [2:0]  m_arsize,
  output logic [1:0]  m_arburst,
  output logic        m_arvalid,
  input  logic        m_arready,
  input  logic [31:0] m_rdata,
  input  logic [1:0]  m_rresp,
  input  logic        m_rlast,
  input  logic        m_rvalid,
  output logic        m_rready,
  output logic [31:0] m_awaddr,
  output logic [7:0]  m_awlen,
  output logic [2:0]  m_awsize,
  output logic [1:0]  m_awburst,
  output logic        m_awvalid,
  input  logic        m_awready,
  output logic [31:0] m_wdata,
  output logic [3:0]  m_wstrb,
  output logic        m_wlast,
  output logic        m_wvalid,
  input  logic        m_wready,
  input  logic [1:0]  m_bresp,
  input  logic        m_bvalid,
  output logic        m_bready
);

  localparam int unsigned CW = $clog2(MAX_BURST + 1);

  // words that fit before the next 4 KiB boundary, limited to MAX_BURST and
  // to what is left
  function automatic logic [CW-1:0] burst_words(input logic [31:0] addr,
                                                input logic [31:0] left);
    logic [31:0] to4k;
    logic [31:0] n;
    to4k = 32'(11'h400 - 11'(addr[11:2]));
    n = (left < MAX_BURST) ? left : MAX_BURST;
    if (to4k < n) n = to4k;
    return CW'(n);
  endfunction

  // ------------------------------------------------------------------ MM2S
  typedef enum logic [1:0] {RD_IDLE, RD_ADDR, RD_DATA} rd_state_e;
  rd_state_e   rd_state;
  logic [31:0] rd_addr, rd_words_left;
  logic [3:0]  rd_last_keep;
  logic        rd_beat;

  assign m_arsize  = 3'd2;
  assign m_arburst = 2'b01;
  assign m_arvalid = (rd_state == RD_ADDR);
  assign m_araddr  = rd_addr;
  assign m_arlen   = 8'(burst_words(rd_addr, rd_words_left) - 1'b1);

  assign m_axis_tvalid = (rd_state == RD_DATA) && m_rvalid;
  assign m_axis_tdata  = m_rdata;
  assign m_axis_tlast  = (rd_words_left == 32'd1);
  assign m_axis_tkeep  = m_axis_tlast ? rd_last_keep : 4'hF;
  assign m_rready      = (rd_state == RD_DATA) && m_axis_tready;
  assign rd_beat       = m_axis_tvalid && m_axis_tready;
  assign mm2s_busy     = (rd_state != RD_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_state      <= RD_IDLE;
      rd_addr       <= '0;
      rd_words_left <= '0;
      rd_last_keep  <= 4'hF;
      sent_irq      <= 1'b0;
    end else begin
      sent_irq <= 1'b0;
      unique case (rd_state)
        RD_IDLE: if (mm2s_start) begin
          rd_addr       <= {mm2s_addr[31:2], 2'b00};
          rd_words_left <= (mm2s_len + 32'd3) >> 2;
          unique case (mm2s_len[1:0])
            2'd0: rd_last_keep <= 4'hF;
            2'd1: rd_last_keep <= 4'h1;
            2'd2: rd_last_keep <= 4'h3;
            2'd3: rd_last_keep <= 4'h7;
          endcase
          if (mm2s_len == 0) sent_irq <= 1'b1;
          else               rd_state <= RD_ADDR;
        end
        RD_ADDR: if (m_arready) begin
          rd_state <= RD_DATA;
          rd_addr  <= rd_addr + (32'(burst_words(rd_addr, rd_words_left)) << 2);
        end
        RD_DATA: if (rd_beat) begin
          rd_words_left <= rd_words_left - 1;
          if (rd_words_left == 32'd1) begin
            rd_state <= RD_IDLE;
            sent_irq <= 1'b1;
          end else if (m_rlast) begin
            rd_state <= RD_ADDR;
          end
        end
        default: rd_state <= RD_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------------ S2MM
  typedef enum logic [2:0] {WR_IDLE, WR_FILL, WR_ADDR, WR_DATA, WR_RESP, WR_DRAIN} wr_state_e;
  wr_state_e   wr_state;
  logic [31:0] wr_addr, wr_words_left, wr_bytes_left;
  logic [31:0] buf_data [MAX_BURST];
  logic [3:0]  buf_keep [MAX_BURST];
  logic [CW-1:0] buf_cnt, buf_lim, wr_ptr;
  logic        pkt_done;      // TLAST or size limit reached while filling
  logic        limit_hit;     // size limit reached before TLAST
  logic        in_beat;
  logic [2:0]  beat_bytes;

  assign buf_lim       = burst_words(wr_addr, wr_words_left);
  assign s_axis_tready = (wr_state == WR_FILL) || (wr_state == WR_DRAIN);
  assign in_beat       = s_axis_tvalid && s_axis_tready;
  assign beat_bytes    = 3'(s_axis_tkeep[0]) + 3'(s_axis_tkeep[1]) +
                         3'(s_axis_tkeep[2]) + 3'(s_axis_tkeep[3]);

  assign m_awsize  = 3'd2;
  assign m_awburst = 2'b01;
  assign m_awvalid = (wr_state == WR_ADDR);
  assign m_awaddr  = wr_addr;
  assign m_awlen   = 8'(buf_cnt - 1'b1);
  assign m_wvalid  = (wr_state == WR_DATA);
  assign m_wdata   = buf_data[wr_ptr];
  assign m_wstrb   = buf_keep[wr_ptr];
  assign m_wlast   = (wr_ptr == buf_cnt - 1'b1);
  assign m_bready  = (wr_state == WR_RESP);
  assign s2mm_busy = (wr_state != WR_IDLE);

  always_ff @(posedge clk) begin
    if (wr_state == WR_FILL && in_beat) begin
      buf_data[buf_cnt] <= s_axis_tdata;
      buf_keep[buf_cnt] <= s_axis_tkeep;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_state      <= WR_IDLE;
      wr_addr       <= '0;
      wr_words_left <= '0;
      wr_bytes_left <= '0;
      buf_cnt       <= '0;
      wr_ptr        <= '0;
      pkt_done      <= 1'b0;
      limit_hit     <= 1'b0;
      received_irq  <= 1'b0;
      s2mm_bytes    <= '0;
      s2mm_trunc    <= 1'b0;
    end else begin
      received_irq <= 1'b0;
      unique case (wr_state)
        WR_IDLE: if (s2mm_start) begin
          wr_addr       <= {s2mm_addr[31:2], 2'b00};
          wr_words_left <= (s2mm_len + 32'd3) >> 2;
          wr_bytes_left <= s2mm_len;
          buf_cnt       <= '0;
          pkt_done      <= 1'b0;
          limit_hit     <= 1'b0;
          s2mm_bytes    <= '0;
          s2mm_trunc    <= 1'b0;
          if (s2mm_len == 0) received_irq <= 1'b1;
          else               wr_state <= WR_FILL;
        end
        WR_FILL: if (in_beat) begin
          buf_cnt       <= buf_cnt + 1'b1;
          wr_words_left <= wr_words_left - 1;
          wr_bytes_left <= (32'(beat_bytes) >= wr_bytes_left) ? '0 : wr_bytes_left - 32'(beat_bytes);
          s2mm_bytes    <= s2mm_bytes + 32'(beat_bytes);
          if (s_axis_tlast || wr_words_left == 32'd1) pkt_done <= 1'b1;
          if (!s_axis_tlast && wr_words_left == 32'd1) limit_hit <= 1'b1;
          if (s_axis_tlast || wr_words_left == 32'd1 || buf_cnt + 1'b1 == buf_lim)
            wr_state <= WR_ADDR;
        end
        WR_ADDR: if (m_awready) begin
          wr_state <= WR_DATA;
          wr_ptr   <= '0;
        end
        WR_DATA: if (m_wready) begin
          wr_ptr <= wr_ptr + 1'b1;
          if (m_wlast) wr_state <= WR_RESP;
        end
        WR_RESP: if (m_bvalid) begin
          wr_addr <= wr_addr + (32'(buf_cnt) << 2);
          buf_cnt <= '0;
          if (!pkt_done) begin
            wr_state <= WR_FILL;
          end else if (limit_hit) begin
            wr_state   <= WR_DRAIN;
            s2mm_trunc <= 1'b1;
          end else begin
            wr_state     <= WR_IDLE;
            received_irq <= 1'b1;
          end
        end
        WR_DRAIN: if (in_beat && s_axis_tlast) begin
          wr_state     <= WR_IDLE;
          received_irq <= 1'b1;
        end
        default: wr_state <= WR_IDLE;
      endcase
    end
  end

  // AXI rule: a master keeps VALID and the payload until READY.
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_arvalid && !m_arready |=> m_arvalid && $stable(m_araddr) && $stable(m_arlen));
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_awvalid && !m_awready |=> m_awvalid && $stable(m_awaddr) && $stable(m_awlen));
  a_w_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_wvalid && !m_wready |=> m_wvalid && $stable(m_wdata));

endmodule
