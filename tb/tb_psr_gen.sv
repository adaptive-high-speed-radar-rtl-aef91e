// tb_psr_gen: self-checking test of the point-spread-response generator
// (psr_gen) with P = 16, L = 4, I = 8.
// BRAM G is loaded with a random +-1 code of P/2 chips; the testbench plays
// BRAM B (steering weights, one-clock read latency) and BRAM A (captures
// every write). For several targets (complex peak, range index including
// ones near the end of the packet where the code is cut off, angle index)
// the generator must write all P x L samples of A exactly once with
//   A[p][l] = 2 * peak * g[p - r] * conj(b[i][l])   (0 <= p - r < P/2, else 0)
// within two LSBs of the FFT format, and pulse `done` once at the end.
module tb_psr_gen;
  import rsp_pkg::*;
  localparam int unsigned P = 16, L = 4, I = 8;
  localparam int unsigned PW = $clog2(P), LW = $clog2(L), IW = $clog2(I);

  logic               clk = 1'b0, rst_n = 1'b0, g_we = 1'b0, g_data = 1'b0, start = 1'b0;
  logic [$clog2(P/2)-1:0] g_addr = '0;
  c_ifft_t            tx_amp = '0;
  logic [PW-1:0]      tx_ridx = '0;
  logic [IW-1:0]      tx_aidx = '0;
  logic               busy, done, a_we;
  logic [IW-1:0]      b_raddr_i;
  logic [LW-1:0]      b_raddr_l, a_waddr_l;
  logic [PW-1:0]      a_waddr_p;
  c_dbf_t             b_rdata;
  c_fft_t             a_wdata;

  c_dbf_t b_tab [I][L];
  c_fft_t a_got [P][L];
  int     a_cnt [P][L];
  int     code  [P/2];
  int checks = 0, failures = 0, n_done = 0;

  always #5 clk = ~clk;

  psr_gen #(.P(P), .L(L), .I(I)) dut (.*);

  always_ff @(posedge clk) b_rdata <= b_tab[b_raddr_i][b_raddr_l];
  always @(posedge clk) begin
    if (a_we) begin a_got[a_waddr_p][a_waddr_l] <= a_wdata; a_cnt[a_waddr_p][a_waddr_l]++; end
    if (done) n_done++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  task automatic one(input real ar, input real ai, input int r, input int i);
    real hr, hi, br, bi, er, ei, gr, gi;
    for (int p = 0; p < int'(P); p++) for (int l = 0; l < int'(L); l++) a_cnt[p][l] = 0;
    n_done = 0;
    tx_amp.re = 32'($rtoi(ar * (2.0 ** IFFT_F)));
    tx_amp.im = 32'($rtoi(ai * (2.0 ** IFFT_F)));
    tx_ridx = PW'(r); tx_aidx = IW'(i);
    start = 1'b1; @(negedge clk); start = 1'b0;
    @(negedge clk);
    while (busy) @(negedge clk);
    @(negedge clk);
    check(n_done == 1, $sformatf("done pulsed %0d times", n_done));
    for (int p = 0; p < int'(P); p++)
      for (int l = 0; l < int'(L); l++) begin
        hr = 0.0; hi = 0.0;
        if (p - r >= 0 && p - r < int'(P / 2)) begin
          hr = 2.0 * ar * code[p - r]; hi = 2.0 * ai * code[p - r];
        end
        br = real'(b_tab[i][l].re) / (2.0 ** DBF_F);
        bi = real'(b_tab[i][l].im) / (2.0 ** DBF_F);
        er = hr * br + hi * bi;           // h * conj(b)
        ei = hi * br - hr * bi;
        gr = real'(a_got[p][l].re) / (2.0 ** FFT_F);
        gi = real'(a_got[p][l].im) / (2.0 ** FFT_F);
        check(a_cnt[p][l] == 1 && (gr - er) * (gr - er) + (gi - ei) * (gi - ei) < (2.0 / (2.0 ** FFT_F)) ** 2,
              $sformatf("r=%0d i=%0d A[%0d][%0d] = %f,%f (written %0d times), expected %f,%f",
                        r, i, p, l, gr, gi, a_cnt[p][l], er, ei));
      end
  endtask

  initial begin
    real ph;
    for (int i = 0; i < int'(I); i++)
      for (int l = 0; l < int'(L); l++) begin
        ph = 6.283185307179586 * $urandom_range(1000) / 1000.0;
        b_tab[i][l].re = DBF_W'($rtoi($cos(ph) * (2.0 ** DBF_F)));
        b_tab[i][l].im = DBF_W'($rtoi($sin(ph) * (2.0 ** DBF_F)));
      end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < int'(P / 2); p++) begin
      code[p] = $urandom_range(1) ? 1 : -1;
      g_we = 1'b1; g_addr = ($clog2(P/2))'(p); g_data = (code[p] > 0);
      @(negedge clk);
    end
    g_we = 1'b0;
    one(0.25, 0.1, 2, 3);
    one(-0.1, -0.3, 0, 0);
    one(0.2, -0.2, int'(P) - 3, int'(I) - 1);   // code cut off at the end of the packet
    for (int n = 0; n < 5; n++)
      one((real'($urandom_range(600)) - 300.0) / 1000.0, (real'($urandom_range(600)) - 300.0) / 1000.0,
          int'($urandom_range(P - 1)), int'($urandom_range(I - 1)));
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
