// psr_gen: point spread response (PSR) generator for CLEAN.
//
// From the detection of the latest target (complex peak Tx_amp, range index
// Tx_Ridx, angle index Tx_Aidx) it rebuilds that target's time-domain echo
//     S[p,l] = a * g0[p - Tx_Ridx] * conj(W[Tx_Aidx, l])
// and writes it into the packet memory (BRAM A), so that the normal FFT and
// DBF path turns it into the PSR in the beamformed domain.
//
// Steps, as in the design's PSR datapath:
//   clear : BRAM H (1 x P) is set to zero                        (P cycles)
//   C1-C2 : g0 (P/2 chips, BRAM G) is read, scaled by a and written into H
//           at offset Tx_Ridx (the range delay)                  (P/2 cycles)
//   C3-C5 : every H sample is multiplied by the conjugate weight of each
//           antenna (weights read from BRAM B, which lives outside this
//           block) and written to A[p,l]                          (P*L cycles)
// Choices of this implementation: chips are +-1 and stored one bit each
// (1 -> +1); a = 2 * peak, the inverse of the matched-filter gain of 1/2
// under the scaling convention of rsp_pkg; the complex peak is used as the
// amplitude so the rebuilt echo has the right phase; samples delayed past
// P-1 are dropped (linear, not circular, delay).
//
// Timing: `start` pulse begins the sequence and latches Tx_amp, Tx_Ridx and
// Tx_Aidx, `done` pulses once the last A
// write has been issued. B read has one clock latency (b_raddr_* in cycle t,
// b_rdata valid in cycle t+1).
module psr_gen
  import rsp_pkg::*;
#(
  parameter int unsigned P = P_DEF,
  parameter int unsigned L = L_DEF,
  parameter int unsigned I = I_DEF
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // Golay table load (BRAM G)
  input  logic                   g_we,
  input  logic [$clog2(P/2)-1:0] g_addr,
  input  logic                   g_data,
  // control
  input  logic                   start,
  input  c_ifft_t                tx_amp,
  input  logic [$clog2(P)-1:0]   tx_ridx,
  input  logic [$clog2(I)-1:0]   tx_aidx,
  output logic                   busy,
  output logic                   done,
  // beamforming weight read (BRAM B)
  output logic [$clog2(I)-1:0]   b_raddr_i,
  output logic [$clog2(L)-1:0]   b_raddr_l,
  input  c_dbf_t                 b_rdata,
  // packet memory write (BRAM A)
  output logic                   a_we,
  output logic [$clog2(P)-1:0]   a_waddr_p,
  output logic [$clog2(L)-1:0]   a_waddr_l,
  output c_fft_t                 a_wdata
);
  localparam int unsigned PW = $clog2(P);
  localparam int unsigned LW = (L > 1) ? $clog2(L) : 1;
  localparam int unsigned GW = $clog2(P/2);

  typedef enum logic [1:0] { S_IDLE, S_CLEAR, S_GOLAY, S_SPREAD } state_e;
  state_e st;

  logic   g_mem [P/2];
  c_fft_t h_mem [P];

  logic [PW-1:0] p_cnt;
  logic [LW-1:0] l_cnt;
  c_fft_t        amp_s;     // a = 2*peak in FFT format
  logic [PW-1:0] ridx_q;    // Tx_Ridx and Tx_Aidx, held for the whole sequence
  logic [$clog2(I)-1:0] aidx_q;
  // pipeline (one clock of read latency)
  logic          g_v, s_v, s_last;
  logic [PW:0]   g_dst;
  logic          g_q;
  c_fft_t        h_q;
  logic [PW-1:0] s_p;
  logic [LW-1:0] s_l;

  always_ff @(posedge clk) begin
    if (g_we) g_mem[g_addr] <= g_data;
    g_q <= g_mem[GW'(p_cnt)];
    h_q <= h_mem[p_cnt];
    if (st == S_CLEAR) h_mem[p_cnt] <= '0;
    else if (g_v && g_dst < (PW+1)'(P)) h_mem[PW'(g_dst)] <= g_q ? amp_s : c_fft_t'{re: -amp_s.re, im: -amp_s.im};
  end

  assign b_raddr_i = aidx_q;
  assign b_raddr_l = $clog2(L)'(l_cnt);
  assign busy      = (st != S_IDLE) | s_v | g_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; p_cnt <= '0; l_cnt <= '0; amp_s <= '0; ridx_q <= '0; aidx_q <= '0;
      g_v <= 1'b0; g_dst <= '0; s_v <= 1'b0; s_last <= 1'b0; s_p <= '0; s_l <= '0;
      done <= 1'b0; a_we <= 1'b0; a_waddr_p <= '0; a_waddr_l <= '0; a_wdata <= '0;
    end else begin
      done   <= 1'b0;
      a_we   <= 1'b0;
      g_v    <= 1'b0;
      s_v    <= 1'b0;
      s_last <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          st    <= S_CLEAR;
          p_cnt <= '0;
          ridx_q <= tx_ridx;
          aidx_q <= tx_aidx;
          amp_s.re <= FFT_W'(shr_sat(64'(tx_amp.re), IFFT_F - FFT_F - 1, FFT_W));
          amp_s.im <= FFT_W'(shr_sat(64'(tx_amp.im), IFFT_F - FFT_F - 1, FFT_W));
        end
        S_CLEAR: begin
          p_cnt <= p_cnt + 1'b1;
          if (p_cnt == PW'(P - 1)) begin st <= S_GOLAY; p_cnt <= '0; end
        end
        S_GOLAY: begin   // C1: read G, C2: write H at the range offset
          g_v   <= 1'b1;
          g_dst <= (PW+1)'(p_cnt) + (PW+1)'(ridx_q);
          p_cnt <= p_cnt + 1'b1;
          if (p_cnt == PW'(P/2 - 1)) begin st <= S_SPREAD; p_cnt <= '0; l_cnt <= '0; end
        end
        S_SPREAD: begin  // C3: read H, C4: read B, C5: write A
          s_v <= 1'b1;
          s_p <= p_cnt;
          s_l <= l_cnt;
          if (l_cnt == LW'(L - 1)) begin
            l_cnt <= '0;
            p_cnt <= p_cnt + 1'b1;
            if (p_cnt == PW'(P - 1)) begin st <= S_IDLE; s_last <= 1'b1; end
          end else begin
            l_cnt <= l_cnt + 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
      if (s_v) begin
        // h * conj(w)
        a_we      <= 1'b1;
        a_waddr_p <= s_p;
        a_waddr_l <= $clog2(L)'(s_l);
        a_wdata.re <= FFT_W'(shr_sat(64'(h_q.re) * 64'(b_rdata.re) + 64'(h_q.im) * 64'(b_rdata.im), DBF_F, FFT_W));
        a_wdata.im <= FFT_W'(shr_sat(64'(h_q.im) * 64'(b_rdata.re) - 64'(h_q.re) * 64'(b_rdata.im), DBF_F, FFT_W));
        if (s_last) done <= 1'b1;
      end
    end
  end

endmodule
