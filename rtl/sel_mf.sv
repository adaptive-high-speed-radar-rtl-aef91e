// sel_mf: selective matched filter (range-index-specific IFFT) and the
// slow-time memory (BRAM I) of the multi-packet processing.
//
// For packets m > 0 only the sample at a target's known range index r is
// needed, so instead of a P-point IFFT the matched-filter output Z[k]
// (CM format <26,6>) is multiplied by the Fourier sample e^{+j2*pi*r*k/P}
// and accumulated over k; the sum divided by P equals the IFFT output at r:
//     zeta[t][m] = (1/P) * sum_{k=0}^{P-1} Z[k] * e^{+j2*pi*r*k/P}
// The phase index (r*k mod P) drives a CORDIC phasor (cordic_phasor), so no
// P x P Fourier matrix is stored. The result, in IFFT format <32,1>, is
// written to BRAM I at (target t, packet m). BRAM I holds NT x M slow-time
// samples; a direct write port stores zeta[t][0] (the first packet's peak)
// and a read port hands the vectors to the Doppler (MUSIC) stage.
//
// Timing: `start` latches r, t and m and clears the accumulator; samples
// stream one per cycle with index in_k; the sample flagged in_last closes
// the sum; `result` is valid one clock later, when BRAM I is written,
// and `done` pulses the clock after that.
// Read port: rd_data is valid one clock after rd_addr.
module sel_mf
  import rsp_pkg::*;
#(
  parameter int unsigned P  = P_DEF,
  parameter int unsigned M  = M_DEF,
  parameter int unsigned NT = NT_DEF
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [$clog2(P)-1:0]      ridx,
  input  logic [$clog2(NT)-1:0]     tgt,
  input  logic [$clog2(M)-1:0]      pkt,
  input  logic                      in_valid,
  input  logic [$clog2(P)-1:0]      in_k,
  input  logic                      in_last,
  input  c_cm_t                     in_z,
  output logic                      done,
  output c_ifft_t                   result,
  // direct write of a slow-time sample
  input  logic                      wr_en,
  input  logic [$clog2(NT*M)-1:0]   wr_addr,   // t*M + m
  input  c_ifft_t                   wr_data,
  // read port
  input  logic [$clog2(NT*M)-1:0]   rd_addr,   // t*M + m
  output c_ifft_t                   rd_data
);
  localparam int unsigned PW = $clog2(P);
  // product: CM_F + 22 fractional bits; /P; result needs IFFT_F
  localparam int unsigned SH = CM_F + 22 + PW - IFFT_F;

  c_ifft_t i_mem [NT*M];

  logic [PW-1:0]          r_q;
  logic [$clog2(NT)-1:0]  t_q;
  logic [$clog2(M)-1:0]   m_q;
  logic signed [63:0]     acc_re, acc_im, nxt_re, nxt_im;
  logic [PW-1:0]          ph;
  logic signed [23:0]     e_cos, e_sin;
  logic                   wr_res;

  // theta = C * r * k with C = 2*pi/P: phase index r*k mod P
  always_comb ph = PW'(r_q * in_k);

  cordic_phasor #(.PW(PW)) u_phasor (.k(ph), .cos_o(e_cos), .sin_o(e_sin));

  always_comb begin
    nxt_re = acc_re + 64'(in_z.re) * 64'(e_cos) - 64'(in_z.im) * 64'(e_sin);
    nxt_im = acc_im + 64'(in_z.re) * 64'(e_sin) + 64'(in_z.im) * 64'(e_cos);
  end

  always_ff @(posedge clk) begin
    if (wr_res)     i_mem[int'(t_q) * int'(M) + int'(m_q)] <= result;
    else if (wr_en) i_mem[wr_addr] <= wr_data;
    rd_data <= i_mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_q <= '0; t_q <= '0; m_q <= '0; acc_re <= '0; acc_im <= '0;
      result <= '0; wr_res <= 1'b0; done <= 1'b0;
    end else begin
      wr_res <= 1'b0;
      done   <= wr_res;
      if (start) begin
        r_q <= ridx; t_q <= tgt; m_q <= pkt;
        acc_re <= '0; acc_im <= '0;
      end else if (in_valid) begin
        acc_re <= nxt_re;
        acc_im <= nxt_im;
        if (in_last) begin
          // normalise by P (1/P block) into the IFFT format
          result.re <= IFFT_W'(shr_sat(nxt_re, SH, IFFT_W));
          result.im <= IFFT_W'(shr_sat(nxt_im, SH, IFFT_W));
          wr_res    <= 1'b1;
        end
      end
    end
  end

endmodule
