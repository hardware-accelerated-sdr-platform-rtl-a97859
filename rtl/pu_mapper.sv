// pu_mapper: "Mapp." processing unit, a QAM mapper.
//
// Groups the coded bit stream into symbols of 1, 2, 4 or 6 bits and maps each
// group to a Gray-coded BPSK, QPSK, 16-QAM or 64-QAM constellation point
// scaled to unit average power (the constellations of IEEE 802.11a/g). The
// paper names QAM mapping as a processing unit shared by OFDM standards and
// changing the modulation as an example of run-time control; the
// constellations, bit order and fixed-point scaling are this design's own
// choices.
//
// Input: one bit per beat (tdata[0]); the first bit of a group is b0.
// b0 (b0 b1, b0 b1 b2) select I, the following bits select Q.
// Output: sdr_pkg::iq_t in Q2.13 (8192 = 1.0). TLAST on the input closes the
// symbol early (missing bits are 0) and is passed on with it.
// The modulation is sampled at the start of every packet.
// Timing: a symbol leaves one cycle after its last bit arrives; one bit per
// clock is accepted while the output is free.
module pu_mapper
  import sdr_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  mod_e cfg_mod,
  input  logic s_axis_tdata,
  input  logic s_axis_tvalid,
  output logic s_axis_tready,
  input  logic s_axis_tlast,
  output iq_t  m_axis_tdata,
  output logic m_axis_tvalid,
  input  logic m_axis_tready,
  output logic m_axis_tlast
);

  mod_e        mod;
  logic        in_packet;
  logic [5:0]  bits;
  logic [2:0]  cnt;
  logic [2:0]  nbits;
  logic        in_fire, sym_done;
  logic [5:0]  grp;

  always_comb begin
    unique case (in_packet ? mod : cfg_mod)
      MOD_BPSK:  nbits = 3'd1;
      MOD_QPSK:  nbits = 3'd2;
      MOD_QAM16: nbits = 3'd4;
      default:   nbits = 3'd6;
    endcase
  end

  assign s_axis_tready = !m_axis_tvalid || m_axis_tready;
  assign in_fire       = s_axis_tvalid && s_axis_tready;
  assign sym_done      = in_fire && (cnt + 3'd1 == nbits || s_axis_tlast);

  // Gray-coded amplitude levels (odd integers)
  function automatic logic signed [3:0] lvl2(input logic b0, input logic b1);
    unique case ({b0, b1})
      2'b00: return -4'sd3;
      2'b01: return -4'sd1;
      2'b11: return  4'sd1;
      default: return 4'sd3;
    endcase
  endfunction

  function automatic logic signed [3:0] lvl3(input logic b0, input logic b1, input logic b2);
    unique case ({b0, b1, b2})
      3'b000: return -4'sd7;
      3'b001: return -4'sd5;
      3'b011: return -4'sd3;
      3'b010: return -4'sd1;
      3'b110: return  4'sd1;
      3'b111: return  4'sd3;
      3'b101: return  4'sd5;
      default: return 4'sd7;
    endcase
  endfunction

  function automatic iq_t map_sym(input mod_e m, input logic [5:0] g);
    iq_t s;
    unique case (m)
      MOD_BPSK: begin
        s.i = g[0] ? KMOD_BPSK : -KMOD_BPSK;
        s.q = '0;
      end
      MOD_QPSK: begin
        s.i = g[0] ? KMOD_QPSK : -KMOD_QPSK;
        s.q = g[1] ? KMOD_QPSK : -KMOD_QPSK;
      end
      MOD_QAM16: begin
        s.i = 16'(lvl2(g[0], g[1]) * KMOD_QAM16);
        s.q = 16'(lvl2(g[2], g[3]) * KMOD_QAM16);
      end
      default: begin
        s.i = 16'(lvl3(g[0], g[1], g[2]) * KMOD_QAM64);
        s.q = 16'(lvl3(g[3], g[4], g[5]) * KMOD_QAM64);
      end
    endcase
    return s;
  endfunction

  // the group with the arriving bit placed at position cnt
  always_comb begin
    grp = bits;
    grp[cnt] = s_axis_tdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mod <= MOD_BPSK; in_packet <= 1'b0; bits <= '0; cnt <= '0;
      m_axis_tdata <= '0; m_axis_tvalid <= 1'b0; m_axis_tlast <= 1'b0;
    end else begin
      if (m_axis_tvalid && m_axis_tready) m_axis_tvalid <= 1'b0;
      if (in_fire) begin
        if (!in_packet) begin
          in_packet <= 1'b1;
          mod       <= cfg_mod;
        end
        if (sym_done) begin
          m_axis_tdata  <= map_sym(in_packet ? mod : cfg_mod, grp);
          m_axis_tvalid <= 1'b1;
          m_axis_tlast  <= s_axis_tlast;
          bits <= '0;
          cnt  <= '0;
          if (s_axis_tlast) in_packet <= 1'b0;
        end else begin
          bits <= grp;
          cnt  <= cnt + 3'd1;
        end
      end
    end
  end

endmodule
