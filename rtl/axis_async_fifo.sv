// axis_async_fifo: dual-clock FIFO for an AXI4-Stream (data + TLAST).
//
// The paper requires that every processing unit, or part of a chain, can
// live in its own clock domain while still exchanging samples with the
// others. This FIFO is the crossing: a DEPTH-entry memory written in the
// s_clk domain and read in the m_clk domain, with Gray-coded pointers passed
// through two-flop synchronisers (the usual construction; the paper does not
// say how crossings are built).
// Interface: AXI4-Stream slave (s_clk) and master (m_clk); TLAST travels
// with the data. DEPTH must be a power of two.
// Timing: a word becomes visible on the read side 2-3 m_clk cycles after it
// is written; s_axis_tready falls when DEPTH words are stored.
// Each side has its own active-low reset; both must be asserted together.
module axis_async_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic             s_clk,
  input  logic             s_rst_n,
  input  logic [WIDTH-1:0] s_axis_tdata,
  input  logic             s_axis_tvalid,
  output logic             s_axis_tready,
  input  logic             s_axis_tlast,
  input  logic             m_clk,
  input  logic             m_rst_n,
  output logic [WIDTH-1:0] m_axis_tdata,
  output logic             m_axis_tvalid,
  input  logic             m_axis_tready,
  output logic             m_axis_tlast
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH:0] mem [DEPTH];
  logic [AW:0] wptr_bin, wptr_gray, rptr_bin, rptr_gray;
  logic [AW:0] wq1_rptr, wq2_rptr, rq1_wptr, rq2_wptr;
  logic [AW:0] wptr_bin_nx, rptr_bin_nx;
  logic        wr_en, rd_en;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  assign s_axis_tready = (wptr_gray != {~wq2_rptr[AW:AW-1], wq2_rptr[AW-2:0]});
  assign wr_en         = s_axis_tvalid && s_axis_tready;
  assign wptr_bin_nx   = wptr_bin + (AW+1)'(wr_en);

  always_ff @(posedge s_clk) begin
    if (wr_en) mem[wptr_bin[AW-1:0]] <= {s_axis_tlast, s_axis_tdata};
  end

  always_ff @(posedge s_clk or negedge s_rst_n) begin
    if (!s_rst_n) begin
      wptr_bin <= '0; wptr_gray <= '0; wq1_rptr <= '0; wq2_rptr <= '0;
    end else begin
      wptr_bin  <= wptr_bin_nx;
      wptr_gray <= bin2gray(wptr_bin_nx);
      wq1_rptr  <= rptr_gray;
      wq2_rptr  <= wq1_rptr;
    end
  end

  // read side
  assign m_axis_tvalid = (rptr_gray != rq2_wptr);
  assign rd_en         = m_axis_tvalid && m_axis_tready;
  assign rptr_bin_nx   = rptr_bin + (AW+1)'(rd_en);
  assign {m_axis_tlast, m_axis_tdata} = mem[rptr_bin[AW-1:0]];

  always_ff @(posedge m_clk or negedge m_rst_n) begin
    if (!m_rst_n) begin
      rptr_bin <= '0; rptr_gray <= '0; rq1_wptr <= '0; rq2_wptr <= '0;
    end else begin
      rptr_bin  <= rptr_bin_nx;
      rptr_gray <= bin2gray(rptr_bin_nx);
      rq1_wptr  <= wptr_gray;
      rq2_wptr  <= rq1_wptr;
    end
  end

  initial if (DEPTH < 4 || (1 << AW) != DEPTH) $error("axis_async_fifo: DEPTH must be a power of two >= 4");

endmodule
