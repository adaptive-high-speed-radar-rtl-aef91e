// peak_search: target peak search after the matched filter.
//
// Two units in series. PS-P searches the P fast-time (range) samples of one
// IFFT output column for the largest magnitude and keeps its complex value
// and range index (max_Rval, max_Ridx: R15, R16). In SARP mode there is only
// one column (the selected angle) and its result is the target. In MJARP mode
// PS-I compares, at the end of every column, max_Rval with the best value
// across angles so far (Tx_amp) and keeps amplitude, range index and angle
// index (Tx_amp, Tx_Ridx, Tx_Aidx).
//
// Magnitudes are ranked by |x|^2 (same order as |x|; the design's choice, no
// square root needed). The complex peak value is kept, not only its
// magnitude, because the PSR generator and the slow-time vector need it.
//
// Interface: `start` clears the search; samples (IFFT format <32,1>) stream
// in with range index in_p, angle index in_i, in_last_p on the last sample
// of a column and in_last on the last sample of the pass. Timing: one
// sample per cycle; `done` pulses one clock after the in_last sample, with
// the result on res_* (held until the next start).
module peak_search
  import rsp_pkg::*;
#(
  parameter int unsigned P = P_DEF,
  parameter int unsigned I = I_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  rsp_mode_e            rsp,
  input  logic                 in_valid,
  input  logic [$clog2(P)-1:0] in_p,
  input  logic [$clog2(I)-1:0] in_i,
  input  logic                 in_last_p,
  input  logic                 in_last,
  input  c_ifft_t              in_val,
  output logic                 done,
  output c_ifft_t              res_amp,
  output logic [63:0]          res_mag2,
  output logic [$clog2(P)-1:0] res_ridx,
  output logic [$clog2(I)-1:0] res_aidx
);
  // PS-P registers
  c_ifft_t              max_rval;
  logic [63:0]          max_m2;
  logic [$clog2(P)-1:0] max_ridx;
  logic                 col_open;   // a column search is under way
  // PS-I registers
  logic                 best_set;

  logic [63:0]          m2;
  c_ifft_t              col_val;
  logic [63:0]          col_m2;
  logic [$clog2(P)-1:0] col_ridx;

  always_comb begin
    m2 = mag2(in_val.re, in_val.im);
    // column maximum including the current sample
    if (!col_open || m2 > max_m2) begin
      col_val = in_val; col_m2 = m2; col_ridx = in_p;
    end else begin
      col_val = max_rval; col_m2 = max_m2; col_ridx = max_ridx;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_rval <= '0; max_m2 <= '0; max_ridx <= '0; col_open <= 1'b0;
      best_set <= 1'b0; done <= 1'b0;
      res_amp <= '0; res_mag2 <= '0; res_ridx <= '0; res_aidx <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        col_open <= 1'b0;
        best_set <= 1'b0;
        res_amp  <= '0; res_mag2 <= '0; res_ridx <= '0; res_aidx <= '0;
      end else if (in_valid) begin
        // C1: peak search across P
        max_rval <= col_val;
        max_m2   <= col_m2;
        max_ridx <= col_ridx;
        col_open <= ~in_last_p;
        if (in_last_p) begin
          if (rsp == RSP_SARP) begin
            res_amp <= col_val; res_mag2 <= col_m2; res_ridx <= col_ridx; res_aidx <= in_i;
          end else if (!best_set || col_m2 > res_mag2) begin
            // C2: peak search across I (MJARP)
            res_amp <= col_val; res_mag2 <= col_m2; res_ridx <= col_ridx; res_aidx <= in_i;
            best_set <= 1'b1;
          end
        end
        if (in_last) done <= 1'b1;
      end
    end
  end

endmodule
