// tb_peak_search: self-checking test of the peak search unit (peak_search)
// with P = 16 range bins and I = 8 angles.
//  SARP: single columns of random IFFT-format samples with one planted
//        peak; the result (complex value, |.|^2, range index, angle index)
//        must be that sample's, with `done` one clock after the last input.
//  MJARP: I columns streamed back to back with random gaps; the result must
//        be the global maximum over range and angle (PS-P then PS-I), with a
//        single `done` after the last column. Repeated with random scenes.
module tb_peak_search;
  import rsp_pkg::*;
  localparam int unsigned P = 16, I = 8;
  localparam int unsigned PW = $clog2(P), IW = $clog2(I);

  logic           clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  rsp_mode_e      rsp = RSP_SARP;
  logic           in_valid = 1'b0, in_last_p = 1'b0, in_last = 1'b0;
  logic [PW-1:0]  in_p = '0;
  logic [IW-1:0]  in_i = '0;
  c_ifft_t        in_val = '0;
  logic           done;
  c_ifft_t        res_amp;
  logic [63:0]    res_mag2;
  logic [PW-1:0]  res_ridx;
  logic [IW-1:0]  res_aidx;
  int checks = 0, failures = 0, n_done = 0;

  always #5 clk = ~clk;

  peak_search #(.P(P), .I(I)) dut (.*);

  always @(posedge clk) if (done) n_done++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  // one search over ncol columns starting at angle a0; peak planted at (pi, pp)
  task automatic search(input rsp_mode_e mode, input int ncol, input int a0,
                        input int pi, input int pp);
    c_ifft_t v, pk;
    pk.re = 32'(int'($urandom_range(200_000_000)) + 900_000_000);
    pk.im = -32'(int'($urandom_range(400_000_000)));
    if ($urandom_range(1)) pk.re = -pk.re;
    rsp = mode;
    start = 1'b1; @(negedge clk); start = 1'b0;
    n_done = 0;
    for (int c = 0; c < ncol; c++)
      for (int p = 0; p < int'(P); p++) begin
        v.re = 32'(int'($urandom_range(1_200_000_000)) - 600_000_000);
        v.im = 32'(int'($urandom_range(1_200_000_000)) - 600_000_000);
        if (c == pi && p == pp) v = pk;
        in_valid = 1'b1; in_val = v; in_p = PW'(p); in_i = IW'(a0 + c);
        in_last_p = (p == int'(P) - 1);
        in_last   = in_last_p && (c == ncol - 1);
        @(negedge clk);
        in_valid = 1'b0; in_last = 1'b0; in_last_p = 1'b0;
        check(n_done == 0, "done before the last input");
        if ($urandom_range(5) == 0) @(negedge clk);
      end
    @(negedge clk);
    check(n_done == 1 && res_amp == pk && int'(res_ridx) == pp && int'(res_aidx) == a0 + pi
          && res_mag2 == 64'(longint'(pk.re) * longint'(pk.re) + longint'(pk.im) * longint'(pk.im)),
          $sformatf("%s: got r=%0d a=%0d v=%0d,%0d done x%0d, expected r=%0d a=%0d v=%0d,%0d",
                    mode.name(), res_ridx, res_aidx, res_amp.re, res_amp.im, n_done,
                    pp, a0 + pi, pk.re, pk.im));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int n = 0; n < 20; n++)
      search(RSP_SARP, 1, int'($urandom_range(I - 1)), 0, int'($urandom_range(P - 1)));
    for (int n = 0; n < 20; n++)
      search(RSP_MJARP, int'(I), 0, int'($urandom_range(I - 1)), int'($urandom_range(P - 1)));
    search(RSP_MJARP, int'(I), 0, 0, 0);
    search(RSP_MJARP, int'(I), 0, int'(I) - 1, int'(P) - 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100_000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
