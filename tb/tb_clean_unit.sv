// tb_clean_unit: self-checking test of the CLEAN unit (clean_unit) with
// P = 16 fast-time samples and I = 8 angles.
//  pass 1: SARP, CL = 0, IF = 8. A random image is streamed (angle 5 made
//          strongest over the first 8 samples, angle 2 over the whole row).
//          Every output must equal its input two clocks later with the same
//          indices; az_idx must be the angle with the largest sum of
//          max+min/2 magnitudes over the first IF samples (reference computed
//          here), and az_acc that sum.
//  read-back: the whole of F is read through rd_* and must equal the image.
//  pass 2: MJARP, CL = 1. A second random stream (the PSR) is subtracted:
//          outputs and F must equal image - PSR; no az_valid in MJARP.
//  pass 3: SARP, CL = 1, IF = 16 on a new PSR: checks the subtraction again
//          and the azimuth decision with a different integration factor.
module tb_clean_unit;
  import rsp_pkg::*;
  localparam int unsigned P = 16, I = 8;
  localparam int unsigned PW = $clog2(P), IW = $clog2(I);

  logic            clk = 1'b0, rst_n = 1'b0, start = 1'b0, cl = 1'b0;
  rsp_mode_e       rsp = RSP_SARP;
  logic [PW:0]     if_len = '0;
  logic            in_valid = 1'b0, in_last = 1'b0;
  logic [IW-1:0]   in_i = '0;
  logic [PW-1:0]   in_p = '0;
  c_dbf_t          in_y = '0;
  logic            out_valid, out_last, az_valid, rd_valid;
  logic [IW-1:0]   out_i, az_idx;
  logic [PW-1:0]   out_p;
  c_dbf_t          out_y, rd_data;
  logic [63:0]     az_acc;
  logic            rd_en = 1'b0;
  logic [IW-1:0]   rd_i = '0;
  logic [PW-1:0]   rd_p = '0;

  int checks = 0, failures = 0, n_az = 0;
  c_dbf_t img [I][P];            // expected content of F
  c_dbf_t exp_q [$];
  int     idx_q [$];

  always #5 clk = ~clk;

  clean_unit #(.P(P), .I(I)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  function automatic longint mag(input c_dbf_t v);
    longint a, b;
    a = (v.re < 0) ? -longint'(v.re) : longint'(v.re);
    b = (v.im < 0) ? -longint'(v.im) : longint'(v.im);
    return (a > b) ? a + (b >>> 1) : b + (a >>> 1);
  endfunction

  // output scoreboard
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      c_dbf_t e;
      int id;
      if (exp_q.size() == 0) check(1'b0, "unexpected output");
      else begin
        e = exp_q.pop_front(); id = idx_q.pop_front();
        check(out_y == e && int'(out_i) == id / int'(P) && int'(out_p) == id % int'(P)
              && out_last == (id == int'(I * P) - 1),
              $sformatf("out i=%0d p=%0d y=%0d,%0d expected i=%0d p=%0d y=%0d,%0d", out_i, out_p,
                        out_y.re, out_y.im, id / P, id % P, e.re, e.im));
      end
    end
    if (az_valid) n_az++;
  end

  // stream a pass; psr = 1: stream values are subtracted from img
  task automatic pass(input bit sub, input rsp_mode_e mode, input int ifl, input int hot);
    c_dbf_t v;
    longint sum [I];
    longint best;
    int     bi;
    cl = sub; rsp = mode; if_len = (PW+1)'(ifl);
    start = 1'b1; @(negedge clk); start = 1'b0;
    for (int i = 0; i < int'(I); i++) begin
      sum[i] = 0;
      for (int p = 0; p < int'(P); p++) begin
        v.re = DBF_W'($urandom_range(4000)) - DBF_W'(2000);
        v.im = DBF_W'($urandom_range(4000)) - DBF_W'(2000);
        if (!sub && i == hot && p < 8) begin v.re = v.re * 3; v.im = v.im * 3; end
        if (!sub && i == 2) v.re = v.re + DBF_W'(2500);
        if (sub) begin
          img[i][p].re = img[i][p].re - v.re;
          img[i][p].im = img[i][p].im - v.im;
        end else img[i][p] = v;
        if (p < ifl) sum[i] += mag(img[i][p]);
        exp_q.push_back(img[i][p]); idx_q.push_back(i * int'(P) + p);
        in_valid = 1'b1; in_i = IW'(i); in_p = PW'(p); in_y = v;
        in_last = (i == int'(I) - 1) && (p == int'(P) - 1);
        @(negedge clk);
      end
    end
    in_valid = 1'b0; in_last = 1'b0;
    repeat (4) @(negedge clk);
    best = sum[0]; bi = 0;
    for (int i = 1; i < int'(I); i++) if (sum[i] > best) begin best = sum[i]; bi = i; end
    if (mode == RSP_SARP)
      check(n_az == 1 && int'(az_idx) == bi && az_acc == 64'(best),
            $sformatf("SARP: az_valid x%0d, az_idx %0d (expected %0d), acc %0d (expected %0d)",
                      n_az, az_idx, bi, az_acc, best));
    else
      check(n_az == 0, "az_valid in MJARP mode");
    check(exp_q.size() == 0, "missing outputs");
    n_az = 0;
  endtask

  task automatic read_back();
    for (int i = 0; i < int'(I); i++)
      for (int p = 0; p < int'(P); p++) begin
        rd_en = 1'b1; rd_i = IW'(i); rd_p = PW'(p);
        @(negedge clk);
        rd_en = 1'b0;
        check(rd_valid && rd_data == img[i][p],
              $sformatf("F[%0d][%0d] = %0d,%0d expected %0d,%0d", i, p, rd_data.re, rd_data.im,
                        img[i][p].re, img[i][p].im));
      end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    pass(1'b0, RSP_SARP, 8, 5);
    read_back();
    pass(1'b1, RSP_MJARP, 8, 0);
    read_back();
    pass(1'b1, RSP_SARP, 16, 0);
    read_back();
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
