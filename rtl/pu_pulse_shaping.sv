// pu_pulse_shaping: "Pulse Shaping" processing unit, the last unit of the
// transmit chain before the RF interface.
//
// A direct-form FIR filter with NUM_TAPS real coefficients applied to the I
// and Q rails of a complex sample stream:
//   y[n] = sat16( (sum_k c[k] * x[n-k]) >>> 14 ),   c[k] in Q1.14.
// The coefficients come from control registers, so the pulse shape (e.g.
// raised cosine or Gaussian) can be changed at run time. The paper only
// names the unit; the filter structure, tap count, coefficient format and
// the absence of interpolation are this design's own choices.
// The delay line holds zeros after reset and after every packet (TLAST), so
// packets are filtered independently and each output packet has exactly as
// many samples as its input packet (the filter tail is cut).
// Timing: one sample per clock, output registered one cycle after input;
// a full AXI4-Stream register slice, so back-pressure passes straight through.
module pu_pulse_shaping
  import sdr_pkg::*;
#(
  parameter int unsigned NUM_TAPS = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic signed [15:0] cfg_coef [NUM_TAPS],
  input  iq_t         s_axis_tdata,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  input  logic        s_axis_tlast,
  output iq_t         m_axis_tdata,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic        m_axis_tlast
);

  localparam int unsigned ACC_W = 32 + $clog2(NUM_TAPS + 1);

  iq_t dline [NUM_TAPS-1];   // x[n-1] .. x[n-NUM_TAPS+1]
  logic signed [ACC_W-1:0] acc_i, acc_q;
  logic in_fire;

  function automatic logic signed [15:0] sat16(input logic signed [ACC_W-1:0] v);
    logic signed [ACC_W-1:0] s;
    s = v >>> 14;
    if (s > 32767)       return 16'sh7fff;
    else if (s < -32768) return 16'sh8000;
    else                 return 16'(s);
  endfunction

  always_comb begin
    acc_i = ACC_W'(s_axis_tdata.i) * ACC_W'(cfg_coef[0]);
    acc_q = ACC_W'(s_axis_tdata.q) * ACC_W'(cfg_coef[0]);
    for (int k = 1; k < NUM_TAPS; k++) begin
      acc_i += ACC_W'(dline[k-1].i) * ACC_W'(cfg_coef[k]);
      acc_q += ACC_W'(dline[k-1].q) * ACC_W'(cfg_coef[k]);
    end
  end

  assign s_axis_tready = !m_axis_tvalid || m_axis_tready;
  assign in_fire       = s_axis_tvalid && s_axis_tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NUM_TAPS - 1; k++) dline[k] <= '0;
      m_axis_tdata  <= '0;
      m_axis_tvalid <= 1'b0;
      m_axis_tlast  <= 1'b0;
    end else begin
      if (m_axis_tvalid && m_axis_tready) m_axis_tvalid <= 1'b0;
      if (in_fire) begin
        m_axis_tdata.i <= sat16(acc_i);
        m_axis_tdata.q <= sat16(acc_q);
        m_axis_tvalid  <= 1'b1;
        m_axis_tlast   <= s_axis_tlast;
        if (s_axis_tlast) begin
          for (int k = 0; k < NUM_TAPS - 1; k++) dline[k] <= '0;
        end else begin
          dline[0] <= s_axis_tdata;
          for (int k = 1; k < NUM_TAPS - 1; k++) dline[k] <= dline[k-1];
        end
      end
    end
  end

endmodule
