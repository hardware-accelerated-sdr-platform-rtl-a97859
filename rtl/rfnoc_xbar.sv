// rfnoc_xbar: packet crossbar switch of the RF network-on-chip.
//
// Processing units that are shared between processing chains are not wired
// to one neighbour but attached to this switch, which routes CHDR packets
// from any port to any port. Which unit follows which is then set by the
// destination stream ID (SID) written into each packet, so chains can be
// re-arranged and a unit can be time-shared without touching the fabric.
// The paper states that the RFNoC architecture is built on a crossbar
// switch routing CHDR-framed streams; arbitration and framing details here
// are this design's own choices.
//
// Framing: 32-bit beats. The first beat of every packet is the low word of
// the CHDR header (sdr_pkg::chdr_hdr_t bits 31:0, i.e. {src_sid, dst_sid});
// the output port is dst_sid modulo NUM_PORTS. TLAST ends the packet.
// Arbitration: each output has a round-robin arbiter over the inputs that
// want it; a grant is held for the whole packet, so packets never
// interleave. Different outputs switch in parallel.
// Timing: one cycle from a packet's first beat being offered to the grant,
// then one beat per clock per output, combinational from input to output
// once granted.
module rfnoc_xbar #(
  parameter int unsigned NUM_PORTS = 4,
  parameter int unsigned DATA_W    = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DATA_W-1:0] s_axis_tdata  [NUM_PORTS],
  input  logic              s_axis_tvalid [NUM_PORTS],
  output logic              s_axis_tready [NUM_PORTS],
  input  logic              s_axis_tlast  [NUM_PORTS],
  output logic [DATA_W-1:0] m_axis_tdata  [NUM_PORTS],
  output logic              m_axis_tvalid [NUM_PORTS],
  input  logic              m_axis_tready [NUM_PORTS],
  output logic              m_axis_tlast  [NUM_PORTS],
  output logic [31:0]       pkt_count     [NUM_PORTS]   // packets delivered per output
);

  localparam int unsigned PB = (NUM_PORTS > 1) ? $clog2(NUM_PORTS) : 1;

  logic [PB-1:0] dst    [NUM_PORTS];     // requested output of each input
  logic [PB-1:0] grant  [NUM_PORTS];     // input granted to each output
  logic          locked [NUM_PORTS];
  logic [PB-1:0] rr     [NUM_PORTS];     // last granted input, per output
  logic          in_busy[NUM_PORTS];     // input has a granted packet in flight

  always_comb begin
    for (int i = 0; i < NUM_PORTS; i++)
      dst[i] = PB'(32'(s_axis_tdata[i][15:0]) % NUM_PORTS);
  end

  // output data path
  always_comb begin
    for (int o = 0; o < NUM_PORTS; o++) begin
      m_axis_tdata[o]  = s_axis_tdata[grant[o]];
      m_axis_tlast[o]  = s_axis_tlast[grant[o]];
      m_axis_tvalid[o] = locked[o] && s_axis_tvalid[grant[o]];
    end
    for (int i = 0; i < NUM_PORTS; i++) begin
      s_axis_tready[i] = 1'b0;
      for (int o = 0; o < NUM_PORTS; o++)
        if (locked[o] && 32'(grant[o]) == i) s_axis_tready[i] = m_axis_tready[o];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NUM_PORTS; o++) begin
        grant[o] <= '0; locked[o] <= 1'b0; rr[o] <= PB'(NUM_PORTS - 1); pkt_count[o] <= '0;
      end
      for (int i = 0; i < NUM_PORTS; i++) in_busy[i] <= 1'b0;
    end else begin
      for (int o = 0; o < NUM_PORTS; o++) begin
        if (locked[o]) begin
          if (m_axis_tvalid[o] && m_axis_tready[o] && m_axis_tlast[o]) begin
            locked[o]           <= 1'b0;
            in_busy[grant[o]]   <= 1'b0;
            pkt_count[o]        <= pkt_count[o] + 1;
          end
        end else begin
          // round robin: first requesting input after the last winner
          logic found;
          found = 1'b0;
          for (int k = 1; k <= NUM_PORTS; k++) begin
            int unsigned i;
            i = (32'(rr[o]) + k) % NUM_PORTS;
            if (!found && s_axis_tvalid[i] && !in_busy[i] && dst[i] == PB'(o)) begin
              found       = 1'b1;
              grant[o]   <= PB'(i);
              rr[o]      <= PB'(i);
              locked[o]  <= 1'b1;
              in_busy[i] <= 1'b1;
            end
          end
        end
      end
    end
  end

  // AXI4-Stream rule on every output: once valid, hold until ready.
  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_chk
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      m_axis_tvalid[o] && !m_axis_tready[o] |=> m_axis_tvalid[o] && $stable(m_axis_tdata[o]));
  end

endmodule
