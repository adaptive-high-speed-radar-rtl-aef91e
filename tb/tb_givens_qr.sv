// tb_givens_qr: self-checking test of the Givens-rotation QR core
// (givens_qr) with K = 8.
// Several random real symmetric positive-definite matrices U (covariance
// like, entries below 4 in magnitude) are loaded, the core is started and
// J (= R) and K (= G) are read back. Checks, in double precision with a
// tolerance of 2e-3 (the <32,12> format has 2^-20 resolution and the
// K(K-1)/2 rotations accumulate rounding): R is upper triangular, G*U = R,
// G*G^T = I (the rotations are orthogonal), and `done` pulses once with
// `busy` low afterwards. The identity matrix must come back unchanged.
module tb_givens_qr;
  import rsp_pkg::*;
  localparam int unsigned K = 8;
  localparam int unsigned AW = $clog2(K*K);

  logic          clk = 1'b0, rst_n = 1'b0, u_we = 1'b0, start = 1'b0, rd_sel = 1'b0;
  logic [AW-1:0] u_addr = '0, rd_addr = '0;
  c_qr_t         u_data = '0, rd_data;
  logic          busy, done;
  int checks = 0, failures = 0, n_done = 0;

  always #5 clk = ~clk;

  givens_qr #(.K(K)) dut (.*);

  always @(posedge clk) if (done) n_done++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic one(input bit ident);
    real a [K][3];
    real u [K][K];
    real r [K][K];
    real g [K][K];
    real s, e_tri, e_gu, e_gg;
    for (int i = 0; i < int'(K); i++)
      for (int c = 0; c < 3; c++) a[i][c] = (real'($urandom_range(2000)) - 1000.0) / 1000.0;
    for (int i = 0; i < int'(K); i++)
      for (int j = 0; j < int'(K); j++) begin
        u[i][j] = 0.0;
        if (ident) u[i][j] = (i == j) ? 1.0 : 0.0;
        else begin
          for (int c = 0; c < 3; c++) u[i][j] += a[i][c] * a[j][c];
          if (i == j) u[i][j] += 0.2;
        end
      end
    for (int i = 0; i < int'(K); i++)
      for (int j = 0; j < int'(K); j++) begin
        u_we = 1'b1; u_addr = AW'(i * int'(K) + j);
        u_data.re = QR_W'($rtoi(u[i][j] * (2.0 ** QR_F))); u_data.im = '0;
        u[i][j] = real'(u_data.re) / (2.0 ** QR_F);
        @(negedge clk);
      end
    u_we = 1'b0;
    n_done = 0;
    start = 1'b1; @(negedge clk); start = 1'b0;
    while (busy) @(negedge clk);
    @(negedge clk);
    check(n_done == 1, $sformatf("done pulsed %0d times", n_done));
    for (int sel = 0; sel < 2; sel++)
      for (int n = 0; n < int'(K * K); n++) begin
        rd_sel = sel[0]; rd_addr = AW'(n);
        @(negedge clk);
        if (sel == 0) r[n / K][n % K] = real'(rd_data.re) / (2.0 ** QR_F);
        else          g[n / K][n % K] = real'(rd_data.re) / (2.0 ** QR_F);
      end
    e_tri = 0.0; e_gu = 0.0; e_gg = 0.0;
    for (int i = 0; i < int'(K); i++)
      for (int j = 0; j < int'(K); j++) begin
        if (i > j && fabs(r[i][j]) > e_tri) e_tri = fabs(r[i][j]);
        s = 0.0;
        for (int c = 0; c < int'(K); c++) s += g[i][c] * u[c][j];
        if (fabs(s - r[i][j]) > e_gu) e_gu = fabs(s - r[i][j]);
        s = 0.0;
        for (int c = 0; c < int'(K); c++) s += g[i][c] * g[j][c];
        if (fabs(s - ((i == j) ? 1.0 : 0.0)) > e_gg) e_gg = fabs(s - ((i == j) ? 1.0 : 0.0));
      end
    check(e_tri < 2.0e-3, $sformatf("R not upper triangular: %f", e_tri));
    check(e_gu  < 2.0e-3, $sformatf("G*U differs from R by %f", e_gu));
    check(e_gg  < 2.0e-3, $sformatf("G*G^T differs from I by %f", e_gg));
    if (ident) check(e_tri == 0.0 && fabs(r[0][0] - 1.0) < 1.0e-5 && fabs(g[K-1][K-1] - 1.0) < 1.0e-5,
                     "identity not preserved");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    one(1'b1);
    for (int n = 0; n < 6; n++) one(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
