// tb_sel_mf: self-checking test of the selective matched filter and
// slow-time memory (sel_mf) with P = 64, M = 4 packets, NT = 3 targets.
// For random range indices r, targets t and packets m, a random spectrum
// Z[k] (CM format) is streamed (with random gaps); the result must equal
// (1/P) * sum_k Z[k] * exp(+j*2*pi*r*k/P), i.e. the IFFT output at bin r,
// computed here in double precision, within 2e-6 (about 4000 LSBs of the
// <32,1> format, a fraction of the CM input's own resolution over P bins
// and of the CORDIC's accuracy), `done` must pulse once, and the value
// must be readable at t*M + m. A pure tone Z[k] = exp(-j*2*pi*r0*k/P)*A
// must give A at r = r0 and ~0 elsewhere. The direct write port is checked
// too.
module tb_sel_mf;
  import rsp_pkg::*;
  localparam int unsigned P = 64, M = 4, NT = 3;
  localparam int unsigned PW = $clog2(P);
  localparam int unsigned AW = $clog2(NT*M);
  localparam real PI = 3.14159265358979323846;

  logic              clk = 1'b0, rst_n = 1'b0, start = 1'b0, in_valid = 1'b0, in_last = 1'b0;
  logic [PW-1:0]     ridx = '0, in_k = '0;
  logic [$clog2(NT)-1:0] tgt = '0;
  logic [$clog2(M)-1:0]  pkt = '0;
  c_cm_t             in_z = '0;
  logic              done, wr_en = 1'b0;
  c_ifft_t           result, wr_data = '0, rd_data;
  logic [AW-1:0]     wr_addr = '0, rd_addr = '0;
  int checks = 0, failures = 0, n_done = 0;
  real exp_r [NT*M];
  real exp_i [NT*M];

  always #5 clk = ~clk;

  sel_mf #(.P(P), .M(M), .NT(NT)) dut (.*);

  always @(posedge clk) if (done) n_done++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  // tone = 1: Z[k] = A * exp(-j*2*pi*r0*k/P), else random
  task automatic one(input int r, input int t, input int m, input bit tone, input int r0);
    real zr, zi, sr, si, ar, ai, gr, gi;
    ar = 0.6 * $cos(0.3 * r0); ai = 0.6 * $sin(0.3 * r0);
    ridx = PW'(r); tgt = ($clog2(NT))'(t); pkt = ($clog2(M))'(m);
    start = 1'b1; @(negedge clk); start = 1'b0;
    n_done = 0; sr = 0.0; si = 0.0;
    for (int k = 0; k < int'(P); k++) begin
      if (tone) begin
        zr = ar * $cos(2.0 * PI * r0 * k / P) + ai * $sin(2.0 * PI * r0 * k / P);
        zi = ai * $cos(2.0 * PI * r0 * k / P) - ar * $sin(2.0 * PI * r0 * k / P);
      end else begin
        zr = (real'($urandom_range(20000)) - 10000.0) / 10000.0;
        zi = (real'($urandom_range(20000)) - 10000.0) / 10000.0;
      end
      in_z.re = CM_W'($rtoi(zr * (2.0 ** CM_F)));
      in_z.im = CM_W'($rtoi(zi * (2.0 ** CM_F)));
      zr = real'(in_z.re) / (2.0 ** CM_F); zi = real'(in_z.im) / (2.0 ** CM_F);
      sr += zr * $cos(2.0 * PI * r * k / P) - zi * $sin(2.0 * PI * r * k / P);
      si += zr * $sin(2.0 * PI * r * k / P) + zi * $cos(2.0 * PI * r * k / P);
      in_valid = 1'b1; in_k = PW'(k); in_last = (k == int'(P) - 1);
      @(negedge clk);
      in_valid = 1'b0; in_last = 1'b0;
      if ($urandom_range(4) == 0) @(negedge clk);
    end
    repeat (3) @(negedge clk);
    sr = sr / P; si = si / P;
    exp_r[t * M + m] = sr; exp_i[t * M + m] = si;
    gr = real'(result.re) / (2.0 ** IFFT_F); gi = real'(result.im) / (2.0 ** IFFT_F);
    check(n_done == 1 && (gr - sr) * (gr - sr) + (gi - si) * (gi - si) < 4.0e-12,
          $sformatf("r=%0d t=%0d m=%0d: %f,%f (done x%0d), expected %f,%f", r, t, m, gr, gi,
                    n_done, sr, si));
    if (tone)
      check(r == r0 ? ((sr - ar) ** 2 + (si - ai) ** 2 < 1.0e-10)
                    : (sr * sr + si * si < 1.0e-10),
            $sformatf("tone r0=%0d at r=%0d: reference %f,%f", r0, r, sr, si));
  endtask

  initial begin
    int a;
    c_ifft_t v;
    real gr, gi;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // direct writes of packet 0 (first-packet peaks)
    for (int t = 0; t < int'(NT); t++) begin
      v.re = 32'(int'($urandom_range(100000)) - 50000); v.im = 32'(t);
      exp_r[t * M] = real'(v.re) / (2.0 ** IFFT_F); exp_i[t * M] = real'(v.im) / (2.0 ** IFFT_F);
      wr_en = 1'b1; wr_addr = AW'(t * int'(M)); wr_data = v;
      @(negedge clk);
    end
    wr_en = 1'b0;
    one(5, 0, 1, 1'b1, 5);
    one(6, 0, 2, 1'b1, 5);
    one(0, 0, 3, 1'b1, 0);
    for (int t = 1; t < int'(NT); t++)
      for (int m = 1; m < int'(M); m++)
        one(int'($urandom_range(P - 1)), t, m, 1'b0, 0);
    // read back all of BRAM I
    for (int t = 0; t < int'(NT); t++)
      for (int m = 0; m < int'(M); m++) begin
        a = t * int'(M) + m;
        rd_addr = AW'(a);
        @(negedge clk);
        gr = real'(rd_data.re) / (2.0 ** IFFT_F); gi = real'(rd_data.im) / (2.0 ** IFFT_F);
        check((gr - exp_r[a]) ** 2 + (gi - exp_i[a]) ** 2 < 4.0e-12,
              $sformatf("BRAM I[%0d][%0d] = %f,%f expected %f,%f", t, m, gr, gi, exp_r[a], exp_i[a]));
      end
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
