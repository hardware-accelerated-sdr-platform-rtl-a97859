// chdr_noc_shell: RFNoC interface wrapper of a processing unit.
//
// Only units that are shared between chains are attached to the RFNoC
// switch; the paper puts an RFNoC interface wrapper around exactly those and
// wires the other units to each other directly. This wrapper converts
// between the plain AXI4-Stream of a unit and CHDR packets on the switch:
//
//  * egress (unit -> switch): the unit's samples are cut into packets of at
//    most SPP samples (a unit TLAST also ends a packet, and sets the header's
//    end-of-burst flag). Each packet is buffered, then sent as the CHDR
//    header (low word {src_sid = SID, dst_sid = cfg_dst_sid}, then high word
//    {type 0, has_time 0, eob, seqnum, length in bytes}) followed by the
//    payload. The sequence number counts packets.
//  * ingress (switch -> unit): the two header words are removed; the payload
//    goes to the unit, with TLAST on the last payload beat of a packet whose
//    end-of-burst flag is set. A packet whose sequence number does not follow
//    the previous packet's counts in seq_errors (meaningful when one source
//    feeds the unit).
//
// Header layout and the SPP limit follow RFNoC conventions, not numbers
// printed in the paper. cfg_dst_sid is a control register: rewriting it
// re-routes the unit's output to another unit, i.e. re-composes the chain.
// Timing: egress holds one packet at a time (fill, then SPP+2 beats out);
// ingress adds no register stage.
module chdr_noc_shell
  import sdr_pkg::*;
#(
  parameter int unsigned SPP = 64,
  parameter logic [15:0] SID = 16'h0000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] cfg_dst_sid,
  output logic [31:0] seq_errors,
  // unit output -> switch
  input  logic [31:0] pu_out_tdata,
  input  logic        pu_out_tvalid,
  output logic        pu_out_tready,
  input  logic        pu_out_tlast,
  output logic [31:0] noc_out_tdata,
  output logic        noc_out_tvalid,
  input  logic        noc_out_tready,
  output logic        noc_out_tlast,
  // switch -> unit input
  input  logic [31:0] noc_in_tdata,
  input  logic        noc_in_tvalid,
  output logic        noc_in_tready,
  input  logic        noc_in_tlast,
  output logic [31:0] pu_in_tdata,
  output logic        pu_in_tvalid,
  input  logic        pu_in_tready,
  output logic        pu_in_tlast
);

  localparam int unsigned CW = $clog2(SPP + 1);

  // ---------------------------------------------------------------- egress
  typedef enum logic [1:0] {E_FILL, E_HDR0, E_HDR1, E_DATA} e_state_e;
  e_state_e    e_state;
  logic [31:0] ebuf [SPP];
  logic [CW-1:0] e_cnt, e_ptr;
  logic        e_eob;
  logic [11:0] e_seq;
  chdr_hdr_t   e_hdr;
  logic        e_in_fire, e_out_fire;

  assign pu_out_tready = (e_state == E_FILL);
  assign e_in_fire     = pu_out_tvalid && pu_out_tready;
  assign e_out_fire    = noc_out_tvalid && noc_out_tready;

  always_comb begin
    e_hdr          = '0;
    e_hdr.pkt_type = 2'd0;
    e_hdr.eob      = e_eob;
    e_hdr.seqnum   = e_seq;
    e_hdr.length   = 16'(8 + 4 * 32'(e_cnt));
    e_hdr.src_sid  = SID;
    e_hdr.dst_sid  = cfg_dst_sid;
  end

  always_comb begin
    noc_out_tvalid = (e_state != E_FILL);
    noc_out_tlast  = (e_state == E_DATA) && (e_ptr == e_cnt - 1'b1);
    unique case (e_state)
      E_HDR0:  noc_out_tdata = e_hdr[31:0];
      E_HDR1:  noc_out_tdata = e_hdr[63:32];
      default: noc_out_tdata = ebuf[e_ptr];
    endcase
  end

  always_ff @(posedge clk) begin
    if (e_in_fire) ebuf[e_cnt] <= pu_out_tdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_state <= E_FILL; e_cnt <= '0; e_ptr <= '0; e_eob <= 1'b0; e_seq <= '0;
    end else begin
      unique case (e_state)
        E_FILL: if (e_in_fire) begin
          e_cnt <= e_cnt + 1'b1;
          e_eob <= pu_out_tlast;
          if (pu_out_tlast || e_cnt + 1'b1 == CW'(SPP)) e_state <= E_HDR0;
        end
        E_HDR0: if (e_out_fire) e_state <= E_HDR1;
        E_HDR1: if (e_out_fire) begin e_state <= E_DATA; e_ptr <= '0; end
        E_DATA: if (e_out_fire) begin
          e_ptr <= e_ptr + 1'b1;
          if (noc_out_tlast) begin
            e_state <= E_FILL;
            e_cnt   <= '0;
            e_seq   <= e_seq + 12'd1;
          end
        end
        default: e_state <= E_FILL;
      endcase
    end
  end

  // --------------------------------------------------------------- ingress
  typedef enum logic [1:0] {I_HDR0, I_HDR1, I_DATA} i_state_e;
  i_state_e    i_state;
  logic        i_eob;
  logic [11:0] i_seq_exp;
  logic        i_seq_valid;
  logic        i_fire;
  chdr_hdr_t   i_hdr_view;

  assign i_hdr_view   = {noc_in_tdata, 32'h0};
  assign noc_in_tready = (i_state == I_DATA) ? pu_in_tready : 1'b1;
  assign i_fire        = noc_in_tvalid && noc_in_tready;
  assign pu_in_tvalid  = (i_state == I_DATA) && noc_in_tvalid;
  assign pu_in_tdata   = noc_in_tdata;
  assign pu_in_tlast   = noc_in_tlast && i_eob;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_state <= I_HDR0; i_eob <= 1'b0; i_seq_exp <= '0; i_seq_valid <= 1'b0;
      seq_errors <= '0;
    end else if (i_fire) begin
      unique case (i_state)
        I_HDR0: i_state <= I_HDR1;
        I_HDR1: begin
          i_state     <= I_DATA;
          i_eob       <= i_hdr_view.eob;
          i_seq_exp   <= i_hdr_view.seqnum + 12'd1;
          i_seq_valid <= 1'b1;
          if (i_seq_valid && i_hdr_view.seqnum != i_seq_exp) seq_errors <= seq_errors + 1;
          if (noc_in_tlast) i_state <= I_HDR0;   // packet without payload
        end
        I_DATA: if (noc_in_tlast) i_state <= I_HDR0;
        default: i_state <= I_HDR0;
      endcase
    end
  end

endmodule
