// clean_unit: CLEAN complex subtraction, beamformed-image memory (BRAM F),
// and the SARP non-coherent fast-time integration with azimuth peak search.
//
// Beamformed samples Y[i,p] (DBF format <22,2>) stream in one per cycle with
// their angle index i and fast-time index p. With the CLEAN flag CL = 0 (the
// first target) each sample is stored in BRAM F unchanged. With CL = 1 the
// streamed sample is the point spread response (PSR) of the previous target
// and is subtracted from the image held in F: F[i,p] <= F[i,p] - PSR[i,p].
// Either way the stored value (the residue) is also sent out, which is the
// path to the matched filter in MJARP mode.
//
// In SARP mode (RSP = 0) the residue magnitudes of the first IF fast-time
// samples of each angle are accumulated (register "acc", R17); when the last
// fast-time sample of an angle arrives, acc is compared with the best value
// so far and the best value and its angle index are kept (R2/R1 style
// Tx_amp/Tx_Aidx). az_valid pulses after the last sample of the pass.
// The design's own choices: |x| is approximated by max+min/2 of |re|,|im|;
// the sum is compared rather than the average (same argmax for a fixed IF);
// the first IF samples of each angle are the ones integrated.
//
// A second access path (rd_en, rd_i, rd_p) reads F for the SARP step that
// sends the selected angle's row to the matched filter; it must not be used
// while a stream is in flight.
//
// Timing: cycle 0 registers the sample (in_cval) and reads F; cycle 1
// subtracts and writes F back; out_valid follows in_valid by two clocks.
// rd_valid follows rd_en by one clock.
module clean_unit
  import rsp_pkg::*;
#(
  parameter int unsigned P = P_DEF,
  parameter int unsigned I = I_DEF
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,      // clears the SARP search for a new pass
  input  logic                   cl,         // CLEAN flag: 1 = subtract
  input  rsp_mode_e              rsp,        // SARP or MJARP
  input  logic [$clog2(P):0]     if_len,     // integration factor IF (1..P)
  // stream in
  input  logic                   in_valid,
  input  logic [$clog2(I)-1:0]   in_i,
  input  logic [$clog2(P)-1:0]   in_p,
  input  logic                   in_last,    // last sample of the pass
  input  c_dbf_t                 in_y,
  // residue stream out
  output logic                   out_valid,
  output logic [$clog2(I)-1:0]   out_i,
  output logic [$clog2(P)-1:0]   out_p,
  output logic                   out_last,
  output c_dbf_t                 out_y,
  // SARP azimuth result
  output logic                   az_valid,
  output logic [$clog2(I)-1:0]   az_idx,
  output logic [63:0]            az_acc,
  // row read-back
  input  logic                   rd_en,
  input  logic [$clog2(I)-1:0]   rd_i,
  input  logic [$clog2(P)-1:0]   rd_p,
  output logic                   rd_valid,
  output c_dbf_t                 rd_data
);
  localparam int unsigned PW = $clog2(P);
  localparam int unsigned IW = $clog2(I);

  c_dbf_t f_mem [I*P];

  // stage 0 registers
  logic          v0, last0;
  logic [IW-1:0] i0;
  logic [PW-1:0] p0;
  c_dbf_t        in_cval, f_q;

  logic [63:0]   acc, best;
  logic          best_set;

  c_dbf_t        res;
  logic [63:0]   acc_next;

  // address mux: the stream has priority, the read-back path is used alone
  logic [$clog2(I*P)-1:0] raddr;
  always_comb raddr = in_valid ? $clog2(I*P)'(int'(in_i) * int'(P) + int'(in_p))
                               : $clog2(I*P)'(int'(rd_i) * int'(P) + int'(rd_p));

  always_ff @(posedge clk) begin
    f_q <= f_mem[raddr];
    if (v0) f_mem[int'(i0) * int'(P) + int'(p0)] <= res;
  end

  // CS block: complex subtraction when CL = 1
  always_comb begin
    if (cl) begin
      res.re = DBF_W'(shr_sat(64'(f_q.re) - 64'(in_cval.re), 0, DBF_W));
      res.im = DBF_W'(shr_sat(64'(f_q.im) - 64'(in_cval.im), 0, DBF_W));
    end else begin
      res = in_cval;
    end
    acc_next = acc;
    if ({1'b0, p0} < if_len) acc_next = acc + mag_approx(64'(res.re), 64'(res.im));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0 <= 1'b0; last0 <= 1'b0; i0 <= '0; p0 <= '0; in_cval <= '0;
      out_valid <= 1'b0; out_i <= '0; out_p <= '0; out_last <= 1'b0; out_y <= '0;
      acc <= '0; best <= '0; best_set <= 1'b0;
      az_valid <= 1'b0; az_idx <= '0;
      rd_valid <= 1'b0;
    end else begin
      v0      <= in_valid;
      last0   <= in_valid & in_last;
      if (in_valid) begin
        i0      <= in_i;
        p0      <= in_p;
        in_cval <= in_y;
      end
      rd_valid  <= rd_en & ~in_valid;
      out_valid <= v0;
      out_last  <= last0;
      az_valid  <= 1'b0;
      if (v0) begin
        out_i <= i0;
        out_p <= p0;
        out_y <= res;
      end
      if (start) begin
        acc <= '0; best <= '0; best_set <= 1'b0; az_idx <= '0;
      end else if (v0 && rsp == RSP_SARP) begin
        if (p0 == PW'(P - 1)) begin
          // C4: peak search across angles for SARP
          acc <= '0;
          if (!best_set || acc_next > best) begin
            best     <= acc_next;
            az_idx   <= i0;
            best_set <= 1'b1;
          end
        end else begin
          acc <= acc_next;
        end
        if (last0) az_valid <= 1'b1;
      end
    end
  end

  always_comb rd_data = f_q;
  always_comb az_acc  = best;

endmodule
