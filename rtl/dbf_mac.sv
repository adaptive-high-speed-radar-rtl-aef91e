// dbf_mac: L-input complex multiply-accumulate unit for digital beamforming.
//
// One beamformed sample is formed from one fast-time row of the packet
// (L antenna samples, FFT format <24,1>) and one row of beamforming weights
// (L weights for one search angle, DBF format <22,2>):
//     y = (1/L) * sum_{l=0}^{L-1} x[l] * w[l]
// The L complex multipliers (CM) work in parallel and a complex adder tree
// (CA) sums their products, as in the design's L-input MAC; the result is
// rounded and saturated to the DBF format <22,2>. The 1/L scaling (a shift,
// L a power of two) is this implementation's choice to keep the sum in range.
//
// Interface: in_valid/x/w/in_tag in, out_valid/y/out_tag out. A tag of
// TAG_W bits travels with the sample so the caller can carry the fast-time
// and angle indices. Timing: fully pipelined, one sample per cycle, latency
// one clock (the output register is the write stage of the MAC).
module dbf_mac
  import rsp_pkg::*;
#(
  parameter int unsigned L     = L_DEF,
  parameter int unsigned TAG_W = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  c_fft_t [L-1:0]       x,
  input  c_dbf_t [L-1:0]       w,
  input  logic [TAG_W-1:0]     in_tag,
  output logic                 out_valid,
  output c_dbf_t               y,
  output logic [TAG_W-1:0]     out_tag
);
  localparam int unsigned LOG2L = (L > 1) ? $clog2(L) : 0;
  // product has FFT_F + DBF_F fractional bits; result needs DBF_F
  localparam int unsigned SH = FFT_F + LOG2L;

  logic signed [63:0] acc_re, acc_im;

  always_comb begin
    acc_re = '0;
    acc_im = '0;
    for (int l = 0; l < int'(L); l++) begin
      acc_re += 64'(x[l].re) * 64'(w[l].re) - 64'(x[l].im) * 64'(w[l].im);
      acc_im += 64'(x[l].re) * 64'(w[l].im) + 64'(x[l].im) * 64'(w[l].re);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        y.re    <= DBF_W'(shr_sat(acc_re, SH, DBF_W));
        y.im    <= DBF_W'(shr_sat(acc_im, SH, DBF_W));
        out_tag <= in_tag;
      end
    end
  end

endmodule
