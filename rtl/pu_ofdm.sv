// pu_ofdm: "OFDM modem" processing unit.
//
// Collects one OFDM symbol of N frequency-domain samples, transforms it with
// an in-place radix-2 decimation-in-time FFT and sends the N time-domain
// samples preceded by a cyclic prefix of CP samples (the last CP samples of
// the symbol). N = 2^cfg_log2n is chosen at run time, from 8 up to 2^MAX_LOG2N;
// the paper gives "control of the FFT-length on a FFT processing unit" as its
// example of parametric reconfiguration. cfg_fwd selects the forward FFT
// (receive direction) instead of the inverse (transmit direction), so the
// same unit serves both halves of a modem. Algorithm, fixed-point format and
// buffering are this design's own choices.
//
// Arithmetic: samples are sdr_pkg::iq_t; twiddles are Q1.14 constants
// computed at elaboration; every butterfly stage divides by 2, so the output
// is (1/N)*IDFT (cfg_fwd = 0) or (1/N)*DFT (cfg_fwd = 1).
// Framing: an input TLAST ends the symbol early (the rest is zero) and is
// passed on with the last output sample of that symbol. Configuration is
// taken when the first sample of a symbol arrives.
// Timing: one buffer, three phases per symbol: N load cycles, (N/2)*log2(N)
// butterfly cycles (one butterfly per clock), CP+N output cycles. For N = 64
// and CP = 16 that is 336 cycles for 80 output samples.
module pu_ofdm
  import sdr_pkg::*;
#(
  parameter int unsigned MAX_LOG2N = 6
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [2:0] cfg_log2n,   // 3..MAX_LOG2N, larger values are clamped
  input  logic       cfg_fwd,
  input  logic [15:0] cfg_cp,     // clamped to N
  input  iq_t        s_axis_tdata,
  input  logic       s_axis_tvalid,
  output logic       s_axis_tready,
  input  logic       s_axis_tlast,
  output iq_t        m_axis_tdata,
  output logic       m_axis_tvalid,
  input  logic       m_axis_tready,
  output logic       m_axis_tlast,
  output logic       busy
);

  localparam int unsigned MAXN = 1 << MAX_LOG2N;
  localparam int unsigned AW   = MAX_LOG2N;

  typedef logic signed [15:0] tw_tab_t [MAXN/2];

  function automatic tw_tab_t gen_tw(input bit want_sin);
    tw_tab_t t;
    for (int k = 0; k < MAXN / 2; k++) begin
      real ang, v;
      ang = 6.283185307179586 * real'(k) / real'(MAXN);
      v   = want_sin ? $sin(ang) : $cos(ang);
      t[k] = 16'(longint'($floor(v * 16384.0 + 0.5)));
    end
    return t;
  endfunction

  localparam tw_tab_t COS_T = gen_tw(1'b0);
  localparam tw_tab_t SIN_T = gen_tw(1'b1);

  typedef enum logic [1:0] {S_LOAD, S_FILL, S_CALC, S_OUT} state_e;
  state_e state;

  iq_t mem [MAXN];

  logic [2:0]    log2n;
  logic          fwd, sym_last;
  logic [AW:0]   n;          // N
  logic [AW:0]   cp;
  logic [AW:0]   cnt;        // load / output counter
  logic [AW-1:0] out_idx;
  logic [2:0]    stage;      // 1..log2n
  logic [AW-1:0] bc;         // butterfly counter 0..N/2-1

  logic [2:0]    cfg_l2;
  logic [AW:0]   cfg_n, cfg_cpc;

  always_comb begin
    cfg_l2 = cfg_log2n;
    if (cfg_l2 < 3'd3) cfg_l2 = 3'd3;
    if (32'(cfg_l2) > MAX_LOG2N) cfg_l2 = 3'(MAX_LOG2N);
    cfg_n   = (AW+1)'(1) << cfg_l2;
    cfg_cpc = (32'(cfg_cp) > 32'(cfg_n)) ? cfg_n : (AW+1)'(cfg_cp);
  end

  // bit reversal of a load index over log2n bits
  function automatic logic [AW-1:0] bitrev(input logic [AW-1:0] x, input logic [2:0] l2);
    logic [AW-1:0] r;
    for (int b = 0; b < AW; b++) r[b] = x[AW-1-b];
    return r >> (3'(AW) - l2);
  endfunction

  // ------------------------------------------------------------ butterfly
  logic [AW-1:0] half, j, a_idx, b_idx, tw_idx;
  iq_t           a_s, b_s, a_n, b_n;
  logic signed [15:0] wr, wi;
  logic signed [31:0] pr, pi;
  logic signed [16:0] tr, ti;
  logic signed [17:0] sr0, si0, sr1, si1;

  always_comb begin
    half   = AW'(1) << (stage - 3'd1);
    j      = bc & (half - 1'b1);
    a_idx  = ((bc >> (stage - 3'd1)) << stage) | j;
    b_idx  = a_idx | half;
    tw_idx = j << (3'(AW) - stage);
    a_s    = mem[a_idx];
    b_s    = mem[b_idx];
    wr     = COS_T[tw_idx];
    wi     = fwd ? -SIN_T[tw_idx] : SIN_T[tw_idx];
    pr     = 32'(b_s.i) * 32'(wr) - 32'(b_s.q) * 32'(wi);
    pi     = 32'(b_s.i) * 32'(wi) + 32'(b_s.q) * 32'(wr);
    tr     = 17'(pr >>> 14);
    ti     = 17'(pi >>> 14);
    sr0    = 18'(a_s.i) + 18'(tr);
    si0    = 18'(a_s.q) + 18'(ti);
    sr1    = 18'(a_s.i) - 18'(tr);
    si1    = 18'(a_s.q) - 18'(ti);
    a_n.i  = 16'(sr0 >>> 1);
    a_n.q  = 16'(si0 >>> 1);
    b_n.i  = 16'(sr1 >>> 1);
    b_n.q  = 16'(si1 >>> 1);
  end

  assign s_axis_tready = (state == S_LOAD);
  assign m_axis_tvalid = (state == S_OUT);
  assign m_axis_tdata  = mem[out_idx];
  assign m_axis_tlast  = (state == S_OUT) && sym_last && (cnt == n + cp - 1'b1);
  assign busy          = (state != S_LOAD) || (cnt != 0);

  always_ff @(posedge clk) begin
    unique case (state)
      S_LOAD: if (s_axis_tvalid)
        mem[bitrev(cnt == 0 ? '0 : AW'(cnt), cnt == 0 ? cfg_l2 : log2n)] <= s_axis_tdata;
      S_FILL: mem[bitrev(AW'(cnt), log2n)] <= '0;
      S_CALC: begin
        mem[a_idx] <= a_n;
        mem[b_idx] <= b_n;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD; log2n <= 3'd3; fwd <= 1'b0; sym_last <= 1'b0;
      n <= '0; cp <= '0; cnt <= '0; out_idx <= '0; stage <= 3'd1; bc <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (s_axis_tvalid) begin
          logic [AW:0] nn;
          nn = n;
          if (cnt == 0) begin
            log2n <= cfg_l2;
            fwd   <= cfg_fwd;
            n     <= cfg_n;
            cp    <= cfg_cpc;
            nn    = cfg_n;
          end
          sym_last <= s_axis_tlast;
          cnt      <= cnt + 1'b1;
          if (cnt + 1'b1 == nn) begin
            state <= S_CALC; stage <= 3'd1; bc <= '0;
          end else if (s_axis_tlast) begin
            state <= S_FILL;
          end
        end
        S_FILL: begin
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 == n) begin
            state <= S_CALC; stage <= 3'd1; bc <= '0;
          end
        end
        S_CALC: begin
          bc <= bc + 1'b1;
          if ((AW+1)'(bc) + 1'b1 == (n >> 1)) begin
            bc <= '0;
            stage <= stage + 3'd1;
            if (stage == log2n) begin
              state   <= S_OUT;
              cnt     <= '0;
              out_idx <= AW'((n - cp) & (n - 1'b1));
            end
          end
        end
        S_OUT: if (m_axis_tready) begin
          out_idx <= AW'((AW+1)'(out_idx) + 1'b1 == n ? '0 : (AW+1)'(out_idx) + 1'b1);
          cnt     <= cnt + 1'b1;
          if (cnt + 1'b1 == n + cp) begin
            state <= S_LOAD;
            cnt   <= '0;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

endmodule
