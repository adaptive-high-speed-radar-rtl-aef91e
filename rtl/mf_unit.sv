// mf_unit: frequency-domain matched-filter multiplier with its spectrum
// memory (BRAM E).
//
// BRAM E holds, for each slow-time packet m, the P-point spectrum Gt[m,k] of
// the transmitted Golay sequence (unscaled FFT, CM format <26,6>). A streamed
// beamformed sample Y[k] (DBF format <22,2>) with its fast-time index k is
// multiplied by conj(Gt[pkt,k]) and the product is rounded and saturated to
// the complex-multiplier format <26,6>; this is the input of the IFFT (full
// MF) or of the selective MF. Keeping one row per packet follows the
// selective-RA processing memory "E: M x P"; how the table is loaded is not
// specified, so a plain write port (e_we/e_addr/e_data) is provided.
//
// Timing: one sample per cycle. Cycle 0 presents in_valid/k and reads E
// (synchronous read); the sample is held in a register; cycle 1 multiplies;
// the result is registered, so out_valid follows in_valid by two clocks.
module mf_unit
  import rsp_pkg::*;
#(
  parameter int unsigned P     = P_DEF,
  parameter int unsigned M     = M_DEF,
  parameter int unsigned TAG_W = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // table load
  input  logic                         e_we,
  input  logic [$clog2(M*P)-1:0]       e_addr,     // m*P + k
  input  c_cm_t                        e_data,
  // stream
  input  logic                         in_valid,
  input  logic [$clog2(M)-1:0]         pkt,
  input  logic [$clog2(P)-1:0]         k,
  input  c_dbf_t                       y,
  input  logic [TAG_W-1:0]             in_tag,
  output logic                         out_valid,
  output c_cm_t                        z,
  output logic [TAG_W-1:0]             out_tag
);
  c_cm_t e_mem [M*P];

  c_cm_t            g_q;
  c_dbf_t           y_q;
  logic             v_q;
  logic [TAG_W-1:0] tag_q;

  always_ff @(posedge clk) begin
    if (e_we) e_mem[e_addr] <= e_data;
    g_q <= e_mem[int'(pkt) * int'(P) + int'(k)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; y_q <= '0; tag_q <= '0;
      out_valid <= 1'b0; z <= '0; out_tag <= '0;
    end else begin
      v_q   <= in_valid;
      y_q   <= y;
      tag_q <= in_tag;
      out_valid <= v_q;
      if (v_q) begin
        // y * conj(g): (a+jb)(c-jd) = (ac+bd) + j(bc-ad)
        z.re    <= CM_W'(shr_sat(64'(y_q.re) * 64'(g_q.re) + 64'(y_q.im) * 64'(g_q.im), DBF_F, CM_W));
        z.im    <= CM_W'(shr_sat(64'(y_q.im) * 64'(g_q.re) - 64'(y_q.re) * 64'(g_q.im), DBF_F, CM_W));
        out_tag <= tag_q;
      end
    end
  end

endmodule
