// pu_coder: "Coder" processing unit of the transmit chain.
//
// A rate-1/2 convolutional encoder (constraint length 7, generators 133 and
// 171 octal, the code of IEEE 802.11a/g) followed by puncturing to rate 2/3
// or 3/4. The paper names the coder as the first unit of its example chain
// and gives "changing the rate of the coder" as an example of parametric
// control; the code itself, the puncturing patterns (those of 802.11) and
// the framing below are this design's own choices.
//
// Input: AXI4-Stream of 32-bit words with TKEEP (as the DMA delivers a
// packet); bytes are taken in order, each byte LSB first. Output: one coded
// bit per beat (tdata[0]) with TLAST on the last coded bit of the packet.
// The encoder starts each packet in the all-zero state and, after the last
// data bit, appends TAIL_BITS zero bits that return it to that state.
// The rate is sampled at the start of every packet.
// Puncturing (A = output of g0, B = output of g1, per input bit):
//   1/2: A0 B0;  2/3: A0 B0 A1;  3/4: A0 B0 A1 B2.
// Throughput: one coded bit per clock.
module pu_coder
  import sdr_pkg::*;
#(
  parameter int unsigned TAIL_BITS = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  rate_e       cfg_rate,
  input  logic [31:0] s_axis_tdata,
  input  logic [3:0]  s_axis_tkeep,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  input  logic        s_axis_tlast,
  output logic        m_axis_tdata,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic        m_axis_tlast
);

  // input word being serialised
  logic [31:0] word;
  logic [3:0]  keep;
  logic        word_last, word_valid;
  logic [4:0]  bit_idx;
  logic        in_packet;       // a packet has started (state must be cleared at its start)
  logic [2:0]  tail_cnt;
  logic        in_tail;
  rate_e       rate;

  logic [5:0]  sr;              // previous six input bits, sr[0] newest
  logic [1:0]  pend;            // coded bits of the current input bit
  logic [1:0]  pend_keep;
  logic        pend_last;       // pending bits end the packet
  logic [1:0]  punct_pos;       // position in the puncturing period

  logic        cur_bit, have_bit, take_bit, a_bit, b_bit, is_last_bit;
  logic [1:0]  keep_mask;
  logic        out_fire;
  logic        last_byte_bit, no_more_bytes;

  assign s_axis_tready = !word_valid && !in_tail;

  // current data bit: either from the word or a tail zero
  assign cur_bit  = in_tail ? 1'b0 : word[bit_idx];
  assign have_bit = in_tail || word_valid;
  assign a_bit    = cur_bit ^ sr[1] ^ sr[2] ^ sr[4] ^ sr[5];  // 133o: 1011011
  assign b_bit    = cur_bit ^ sr[0] ^ sr[1] ^ sr[2] ^ sr[5];  // 171o: 1111001

  always_comb begin
    unique case (rate)
      RATE_2_3: keep_mask = (punct_pos == 2'd1) ? 2'b01 : 2'b11;
      RATE_3_4: keep_mask = (punct_pos == 2'd1) ? 2'b01 :
                            (punct_pos == 2'd2) ? 2'b10 : 2'b11;
      default:  keep_mask = 2'b11;
    endcase
  end

  // last data bit of the word: no valid byte above the current one
  assign last_byte_bit = (bit_idx[2:0] == 3'd7);
  always_comb begin
    no_more_bytes = 1'b1;
    for (int b = 0; b < 4; b++)
      if (32'(b) > 32'(bit_idx[4:3]) && keep[b]) no_more_bytes = 1'b0;
  end
  assign is_last_bit = in_tail ? (tail_cnt == 3'(TAIL_BITS - 1))
                               : (TAIL_BITS == 0 && word_last && last_byte_bit && no_more_bytes);

  assign out_fire      = m_axis_tvalid && m_axis_tready;
  assign m_axis_tvalid = |pend_keep;
  assign m_axis_tdata  = pend_keep[0] ? pend[0] : pend[1];
  assign m_axis_tlast  = pend_last && (pend_keep != 2'b11);
  // take a new input bit when the pending bits are gone or the last one leaves
  assign take_bit = have_bit && (pend_keep == 2'b00 ||
                                 (out_fire && (pend_keep == 2'b01 || pend_keep == 2'b10)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word <= '0; keep <= '0; word_last <= 1'b0; word_valid <= 1'b0;
      bit_idx <= '0; in_packet <= 1'b0; tail_cnt <= '0; in_tail <= 1'b0;
      rate <= RATE_1_2; sr <= '0; pend <= '0; pend_keep <= '0; pend_last <= 1'b0;
      punct_pos <= '0;
    end else begin
      // accept a new word
      if (s_axis_tvalid && s_axis_tready) begin
        word       <= s_axis_tdata;
        keep       <= s_axis_tkeep;
        word_last  <= s_axis_tlast;
        word_valid <= 1'b1;
        bit_idx    <= '0;
        if (!in_packet) begin
          in_packet <= 1'b1;
          rate      <= cfg_rate;
          sr        <= '0;
          punct_pos <= '0;
        end
      end
      // drop the first of two pending bits when it is sent
      if (out_fire && pend_keep == 2'b11) pend_keep <= 2'b10;
      else if (out_fire) pend_keep <= 2'b00;

      if (take_bit) begin
        pend      <= {b_bit, a_bit};
        pend_keep <= keep_mask;
        pend_last <= is_last_bit;
        sr        <= {sr[4:0], cur_bit};
        unique case (rate)
          RATE_2_3: punct_pos <= (punct_pos == 2'd1) ? 2'd0 : punct_pos + 2'd1;
          RATE_3_4: punct_pos <= (punct_pos == 2'd2) ? 2'd0 : punct_pos + 2'd1;
          default:  punct_pos <= 2'd0;
        endcase
        if (in_tail) begin
          tail_cnt <= tail_cnt + 3'd1;
          if (is_last_bit) begin in_tail <= 1'b0; in_packet <= 1'b0; end
        end else begin
          bit_idx <= bit_idx + 5'd1;
          if (last_byte_bit && no_more_bytes) begin
            word_valid <= 1'b0;
            if (word_last) begin
              if (TAIL_BITS == 0) in_packet <= 1'b0;
              else begin in_tail <= 1'b1; tail_cnt <= '0; end
            end
          end
        end
      end
    end
  end

endmodule
