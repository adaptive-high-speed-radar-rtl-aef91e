// rsp_driver: end-to-end stimulus and checker for rsp_top, shared by the
// reduced-size and the full-size testbenches.
//
// It builds a scene of point targets on the range/angle grid, loads the
// accelerator's tables (steering weights, Golay chips, per-packet code
// spectra), streams M packets per run, models the external FFT and IFFT
// cores (fft_model), and checks against values computed here in double
// precision, independently of the RTL:
//   * the detected targets (range index, angle index, complex peak ~ a/2),
//     in order of decreasing amplitude;
//   * every slow-time sample zeta[n][m], m >= 1, against the circular
//     cross-correlation of the beamformed packet with its code, at the
//     target's cell (the quantity the selective MF must equal);
//   * the QR core on a small matrix: R upper triangular, G*U = R.
// Runs: (1) SARP, MJARP, SARP for targets 1..3 (a mode switch between
// targets); (2) all MJARP, a scene with two targets, so the threshold stops
// CLEAN; (3) all SARP with IF = P/2, three packets, and the target count T
// set to 2 although the scene has three; (4, 5) the first packet alone in
// all-SARP and all-MJARP mode, whose clock counts are compared; (6) the
// first packet in SARP with IF = P/16.
// It counts each mechanism (SARP pass, MJARP pass, CLEAN subtraction pass,
// PSR generation, selective MF, mode switch, threshold stop, stop after T
// targets, QR run) and
// fails any that never happened. Targets sit at -30, 0 and +30 degrees,
// which are nulls of each other's beam for any even L with half-wavelength
// spacing, so the expected values are not disturbed by angular sidelobes.
module rsp_driver
  import rsp_pkg::*;
#(
  parameter int unsigned P  = P_DEF,
  parameter int unsigned L  = L_DEF,
  parameter int unsigned I  = I_DEF,
  parameter int unsigned M  = M_DEF,
  parameter int unsigned NT = NT_DEF,
  parameter int unsigned K  = K_DEF,
  parameter int unsigned WATCHDOG = 50_000_000
) (
  output logic                      clk,
  output logic                      rst_n,
  output logic                      cfg_start,
  output logic [NT-1:0]             cfg_rsp_mode,
  output logic [$clog2(M+1)-1:0]    cfg_num_packets,
  output logic [$clog2(NT+1)-1:0]   cfg_num_targets,
  output logic [$clog2(P):0]        cfg_if_len,
  output logic [$clog2(I)-1:0]      cfg_angle_step,
  output logic [63:0]               cfg_threshold,
  output logic                      w_we,
  output logic [$clog2(I)-1:0]      w_addr_i,
  output logic [$clog2(L)-1:0]      w_addr_l,
  output c_dbf_t                    w_data,
  output logic                      e_we,
  output logic [$clog2(M*P)-1:0]    e_addr,
  output c_cm_t                     e_data,
  output logic                      g_we,
  output logic [$clog2(P/2)-1:0]    g_addr,
  output logic                      g_data,
  output logic                      s_valid,
  input  logic                      s_ready,
  output c_fft_t                    s_data,
  input  logic                      fft_in_valid,
  input  c_fft_t                    fft_in_data,
  input  logic                      fft_in_last,
  output logic                      fft_out_valid,
  output c_fft_t                    fft_out_data,
  input  logic                      ifft_in_valid,
  input  c_cm_t                     ifft_in_data,
  input  logic                      ifft_in_last,
  output logic                      ifft_out_valid,
  output c_ifft_t                   ifft_out_data,
  input  logic                      busy,
  input  logic                      done,
  input  logic [$clog2(NT+1)-1:0]   num_targets,
  input  logic [$clog2(P)-1:0]      tgt_ridx [NT],
  input  logic [$clog2(I)-1:0]      tgt_aidx [NT],
  input  c_ifft_t                   tgt_amp  [NT],
  input  logic [NT-1:0]             tgt_mode,
  output logic [$clog2(NT*M)-1:0]   zeta_raddr,
  input  c_ifft_t                   zeta_rdata,
  output logic                      qr_u_we,
  output logic [$clog2(K*K)-1:0]    qr_u_addr,
  output c_qr_t                     qr_u_data,
  output logic                      qr_start,
  input  logic                      qr_busy,
  input  logic                      qr_done,
  output logic                      qr_rd_sel,
  output logic [$clog2(K*K)-1:0]    qr_rd_addr,
  input  c_qr_t                     qr_rd_data,
  // observation of the scheduler (state code, CLEAN flag, current RSP)
  input  logic [4:0]                dbg_state,
  input  logic                      dbg_cl
);
  localparam real PI = 3.14159265358979323846;
  // state codes of rsp_top's scheduler
  localparam logic [4:0] ST_S5 = 5'd6, ST_S6 = 5'd7, ST_S3 = 5'd4, ST_S14 = 5'd10,
                         ST_S9 = 5'd11, ST_S1W = 5'd3;

  int checks = 0, failures = 0;

  // ---------------- external cores ----------------
  fft_model #(.P(P), .INV(1'b0), .IN_W(FFT_W), .IN_F(FFT_F), .OUT_W(FFT_W), .OUT_F(FFT_F))
    u_fft (.clk, .rst_n, .in_valid(fft_in_valid), .in_re(fft_in_data.re), .in_im(fft_in_data.im),
           .in_last(fft_in_last), .out_valid(fft_out_valid),
           .out_re(fft_out_data.re), .out_im(fft_out_data.im));
  fft_model #(.P(P), .INV(1'b1), .IN_W(CM_W), .IN_F(CM_F), .OUT_W(IFFT_W), .OUT_F(IFFT_F))
    u_ifft (.clk, .rst_n, .in_valid(ifft_in_valid), .in_re(ifft_in_data.re), .in_im(ifft_in_data.im),
            .in_last(ifft_in_last), .out_valid(ifft_out_valid),
            .out_re(ifft_out_data.re), .out_im(ifft_out_data.im));

  initial clk = 1'b0;
  always #5 clk = ~clk;

  // ---------------- scene ----------------
  real wr [I][L];
  real wi [I][L];
  int  gol [2][P/2];             // complementary pair, +-1
  int  ntg;                      // targets in the scene
  real ta [3];                   // amplitude
  real tf [3];                   // Doppler, cycles per packet
  int  tr [3];                   // range index
  int  ti [3];                   // angle index
  real xr [P][L];
  real xi [P][L];

  function automatic int code(input int m, input int p);
    if (p < 0 || p >= int'(P / 2)) return 0;
    return gol[m % 2][p];
  endfunction

  function automatic longint qv(input real v, input int f, input int w);
    real s, hi, lo;
    s  = v * (2.0 ** f);
    hi = (2.0 ** (w - 1)) - 1.0;
    lo = -(2.0 ** (w - 1));
    if (s > hi) s = hi;
    if (s < lo) s = lo;
    return longint'(s);
  endfunction

  task automatic make_golay();
    int n;
    gol[0][0] = 1; gol[1][0] = 1;
    n = 1;
    while (n < int'(P / 2)) begin
      for (int k = 0; k < n; k++) begin
        gol[0][n + k] = gol[1][k];
        gol[1][n + k] = -gol[1][k];
        gol[1][k]     = gol[0][k];
      end
      n *= 2;
    end
  endtask

  // packet m of the scene, plus a small deterministic dither
  task automatic make_packet(input int m);
    real ph, sr, si, amp;
    int c;
    for (int p = 0; p < int'(P); p++)
      for (int l = 0; l < int'(L); l++) begin
        xr[p][l] = (real'($urandom_range(200)) - 100.0) * 1.0e-6;
        xi[p][l] = (real'($urandom_range(200)) - 100.0) * 1.0e-6;
      end
    for (int t = 0; t < ntg; t++) begin
      ph = 2.0 * PI * tf[t] * m;
      for (int p = 0; p < int'(P); p++) begin
        c = code(m, p - tr[t]);
        if (c != 0) begin
          amp = ta[t] * c;
          sr = amp * $cos(ph);
          si = amp * $sin(ph);
          for (int l = 0; l < int'(L); l++) begin
            // s * conj(w)
            xr[p][l] += sr * wr[ti[t]][l] + si * wi[ti[t]][l];
            xi[p][l] += si * wr[ti[t]][l] - sr * wi[ti[t]][l];
          end
        end
      end
    end
  endtask

  // reference: (1/P) sum_p y[(p+r) mod P] * g_m[p], y = (1/L) sum_l x w
  task automatic ref_cell(input int m, input int i, input int r, output real zr, output real zi);
    real yr, yi;
    int  c, q;
    zr = 0.0; zi = 0.0;
    for (int p = 0; p < int'(P); p++) begin
      c = code(m, p);
      if (c != 0) begin
        q = (p + r) % int'(P);
        yr = 0.0; yi = 0.0;
        for (int l = 0; l < int'(L); l++) begin
          yr += xr[q][l] * wr[i][l] - xi[q][l] * wi[i][l];
          yi += xr[q][l] * wi[i][l] + xi[q][l] * wr[i][l];
        end
        zr += yr / L * c;
        zi += yi / L * c;
      end
    end
    zr = zr / P; zi = zi / P;
  endtask

  // unscaled DFT of the code of packet m, for BRAM E
  task automatic code_spectrum(input int m, input int k, output real gr, output real gi);
    gr = 0.0; gi = 0.0;
    for (int p = 0; p < int'(P / 2); p++) begin
      gr += code(m, p) * $cos(-2.0 * PI * k * p / P);
      gi += code(m, p) * $sin(-2.0 * PI * k * p / P);
    end
  endtask

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic int angle_index(input real deg);
    return $rtoi((deg + 90.0) * (I - 1) / 180.0 + 0.5);
  endfunction

  // ---------------- mechanism counters ----------------
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int n_sarp = 0, n_mjarp_col = 0, n_clean_sub = 0, n_psr = 0, n_sel = 0;
  int n_switch = 0, n_thr_stop = 0, n_t_stop = 0, n_qr = 0;
  longint last_cyc = 0;              // clock cycles of the last run
  longint cyc_sarp, cyc_mjarp;
  logic [4:0] prev_state = '0;
  int last_pass_mode = -1;
  always @(posedge clk) if (rst_n) begin
    if (dbg_state != prev_state) begin
      if (dbg_state == ST_S5) n_sarp++;
      if (dbg_state == ST_S6) n_mjarp_col++;
      if (dbg_state == ST_S14) n_psr++;
      if (dbg_state == ST_S9) n_sel++;
      if ((dbg_state == ST_S3 || dbg_state == ST_S6) && prev_state == ST_S1W) begin
        if (dbg_cl) n_clean_sub++;
        if (last_pass_mode != -1 && last_pass_mode != int'(dbg_state == ST_S6)) n_switch++;
        last_pass_mode = int'(dbg_state == ST_S6);
      end
    end
    prev_state <= dbg_state;
    if (qr_done) n_qr++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- one operation ----------------
  task automatic run(input logic [NT-1:0] modes, input int npkt, input int ifl, input int ntarg,
                    input int expect_n);
    real zr, zi, er, ei, tol;
    int  order [3];
    int  got;
    longint c0;
    last_pass_mode = -1;
    c0 = cyc;
    @(negedge clk);
    cfg_rsp_mode    <= modes;
    cfg_num_packets <= ($clog2(M+1))'(npkt);
    cfg_num_targets <= ($clog2(NT+1))'(ntarg);
    cfg_if_len      <= ($clog2(P)+1)'(ifl);
    cfg_angle_step  <= 1;
    cfg_threshold   <= 64'(qv(0.02, IFFT_F, 40) * qv(0.02, IFFT_F, 40));
    cfg_start       <= 1'b1;
    @(negedge clk);
    cfg_start <= 1'b0;
    for (int m = 0; m < npkt; m++) begin
      make_packet(m);
      for (int p = 0; p < int'(P); p++)
        for (int l = 0; l < int'(L); l++) begin
          while (!s_ready) @(negedge clk);
          s_valid     <= 1'b1;
          s_data.re   <= FFT_W'(qv(xr[p][l], FFT_F, FFT_W));
          s_data.im   <= FFT_W'(qv(xi[p][l], FFT_F, FFT_W));
          @(negedge clk);
        end
      s_valid <= 1'b0;
      // wait until the accelerator asks for the next packet or finishes
      do @(negedge clk); while (!(s_ready || !busy));
      // zeta checks for this packet (selective MF result is in BRAM I now)
      if (m >= 1) begin
        for (int n = 0; n < int'(num_targets); n++) begin
          ref_cell(m, int'(tgt_aidx[n]), int'(tgt_ridx[n]), zr, zi);
          zeta_raddr <= ($clog2(NT*M))'(n * int'(M) + m);
          @(negedge clk); @(negedge clk);
          er = real'(zeta_rdata.re) / (2.0 ** IFFT_F) - zr;
          ei = real'(zeta_rdata.im) / (2.0 ** IFFT_F) - zi;
          tol = 1.0e-3 + 0.02 * $sqrt(zr * zr + zi * zi);
          check($sqrt(er * er + ei * ei) < tol,
                $sformatf("zeta[%0d][%0d] = %f,%fj, expected %f,%fj", n, m,
                          real'(zeta_rdata.re) / (2.0 ** IFFT_F),
                          real'(zeta_rdata.im) / (2.0 ** IFFT_F), zr, zi));
        end
      end
    end
    while (busy) @(negedge clk);
    $display("run: modes %b, %0d packets, IF %0d: %0d targets in %0d clock cycles",
             modes, npkt, ifl, num_targets, cyc - c0);
    last_cyc = cyc - c0;
    // targets, strongest first
    for (int t = 0; t < ntg; t++) order[t] = t;
    for (int a = 0; a < ntg; a++)
      for (int b = a + 1; b < ntg; b++)
        if (ta[order[b]] > ta[order[a]]) begin got = order[a]; order[a] = order[b]; order[b] = got; end
    check(int'(num_targets) == expect_n, $sformatf("num_targets %0d, expected %0d", num_targets, expect_n));
    if (int'(num_targets) < ntarg) n_thr_stop++;
    if (ntarg < int'(NT) && int'(num_targets) == ntarg) n_t_stop++;
    for (int n = 0; n < expect_n && n < int'(num_targets); n++) begin
      check(int'(tgt_ridx[n]) == tr[order[n]],
            $sformatf("target %0d range index %0d, expected %0d", n, tgt_ridx[n], tr[order[n]]));
      check(int'(tgt_aidx[n]) == ti[order[n]],
            $sformatf("target %0d angle index %0d, expected %0d", n, tgt_aidx[n], ti[order[n]]));
      er = real'(tgt_amp[n].re) / (2.0 ** IFFT_F) - ta[order[n]] / 2.0;
      ei = real'(tgt_amp[n].im) / (2.0 ** IFFT_F);
      check($sqrt(er * er + ei * ei) < 0.03 * ta[order[n]],
            $sformatf("target %0d peak %f,%fj, expected %f", n,
                      real'(tgt_amp[n].re) / (2.0 ** IFFT_F), real'(tgt_amp[n].im) / (2.0 ** IFFT_F),
                      ta[order[n]] / 2.0));
      check(tgt_mode[n] == modes[n], $sformatf("target %0d used the wrong RSP", n));
    end
  endtask

  // QR core: U = A*A^T + diag, real, K x K; check R upper triangular, G*U = R
  task automatic run_qr();
    real u [K][K];
    real r [K][K];
    real g [K][K];
    real s, e, maxl;
    for (int a = 0; a < int'(K); a++)
      for (int b = 0; b < int'(K); b++) u[a][b] = 0.0;
    for (int a = 0; a < int'(K); a++)
      for (int b = 0; b < int'(K); b++)
        for (int c = 0; c < 2; c++)
          u[a][b] += $cos(0.7 * a + 1.3 * c) * $cos(0.7 * b + 1.3 * c) * 0.5;
    for (int a = 0; a < int'(K); a++) u[a][a] += 0.3;
    for (int a = 0; a < int'(K); a++)
      for (int b = 0; b < int'(K); b++) begin
        qr_u_we   <= 1'b1;
        qr_u_addr <= ($clog2(K*K))'(a * int'(K) + b);
        qr_u_data.re <= QR_W'(qv(u[a][b], QR_F, QR_W));
        qr_u_data.im <= '0;
        @(negedge clk);
      end
    qr_u_we  <= 1'b0;
    qr_start <= 1'b1;
    @(negedge clk);
    qr_start <= 1'b0;
    @(negedge clk);
    while (qr_busy) @(negedge clk);
    for (int sel = 0; sel < 2; sel++)
      for (int a = 0; a < int'(K * K); a++) begin
        qr_rd_sel  <= sel[0];
        qr_rd_addr <= ($clog2(K*K))'(a);
        @(negedge clk); @(negedge clk);
        if (sel == 0) r[a / K][a % K] = real'(qr_rd_data.re) / (2.0 ** QR_F);
        else          g[a / K][a % K] = real'(qr_rd_data.re) / (2.0 ** QR_F);
      end
    maxl = 0.0;
    for (int a = 1; a < int'(K); a++)
      for (int b = 0; b < a; b++) if (fabs(r[a][b]) > maxl) maxl = fabs(r[a][b]);
    check(maxl < 1.0e-3, $sformatf("QR: largest below-diagonal |R| = %f", maxl));
    e = 0.0;
    for (int a = 0; a < int'(K); a++)
      for (int b = 0; b < int'(K); b++) begin
        s = 0.0;
        for (int c = 0; c < int'(K); c++) s += g[a][c] * u[c][b];
        if (fabs(s - r[a][b]) > e) e = fabs(s - r[a][b]);
      end
    check(e < 1.0e-3, $sformatf("QR: max |G*U - R| = %f", e));
  endtask

  // ---------------- main ----------------
  initial begin
    real gr, gi;
    rst_n = 1'b0;
    cfg_start = 1'b0; cfg_rsp_mode = '0; cfg_num_packets = '0; cfg_num_targets = '0; cfg_if_len = '0;
    cfg_angle_step = '0; cfg_threshold = '0;
    w_we = 1'b0; w_addr_i = '0; w_addr_l = '0; w_data = '0;
    e_we = 1'b0; e_addr = '0; e_data = '0;
    g_we = 1'b0; g_addr = '0; g_data = 1'b0;
    s_valid = 1'b0; s_data = '0; zeta_raddr = '0;
    qr_u_we = 1'b0; qr_u_addr = '0; qr_u_data = '0; qr_start = 1'b0;
    qr_rd_sel = 1'b0; qr_rd_addr = '0;
    make_golay();
    for (int i = 0; i < int'(I); i++)
      for (int l = 0; l < int'(L); l++) begin
        gr = -PI * l * $sin((-90.0 + 180.0 * i / (I - 1)) * PI / 180.0);
        wr[i][l] = $cos(gr);
        wi[i][l] = $sin(gr);
      end
    repeat (4) @(negedge clk);
    rst_n <= 1'b1;
    @(negedge clk);
    // tables
    for (int i = 0; i < int'(I); i++)
      for (int l = 0; l < int'(L); l++) begin
        w_we <= 1'b1; w_addr_i <= ($clog2(I))'(i); w_addr_l <= ($clog2(L))'(l);
        w_data.re <= DBF_W'(qv(wr[i][l], DBF_F, DBF_W));
        w_data.im <= DBF_W'(qv(wi[i][l], DBF_F, DBF_W));
        @(negedge clk);
      end
    w_we <= 1'b0;
    for (int p = 0; p < int'(P / 2); p++) begin
      g_we <= 1'b1; g_addr <= ($clog2(P/2))'(p); g_data <= (gol[0][p] > 0);
      @(negedge clk);
    end
    g_we <= 1'b0;
    // codes alternate a, b: two spectra, kept in columns 0 and 1 of xr/xi
    for (int c = 0; c < 2; c++)
      for (int k = 0; k < int'(P); k++) begin
        code_spectrum(c, k, gr, gi);
        xr[k][c] = gr; xi[k][c] = gi;
      end
    for (int m = 0; m < int'(M); m++)
      for (int k = 0; k < int'(P); k++) begin
        e_we <= 1'b1; e_addr <= ($clog2(M*P))'(m * int'(P) + k);
        e_data.re <= CM_W'(qv(xr[k][m % 2], CM_F, CM_W));
        e_data.im <= CM_W'(qv(xi[k][m % 2], CM_F, CM_W));
        @(negedge clk);
      end
    e_we <= 1'b0;

    // scene: three targets at -30, 0, +30 degrees
    ntg = 3;
    ta[0] = 0.30; tf[0] = 0.05;  tr[0] = int'(P / 8);     ti[0] = angle_index(0.0);
    ta[1] = 0.50; tf[1] = -0.10; tr[1] = int'(P / 4);     ti[1] = angle_index(-30.0);
    ta[2] = 0.15; tf[2] = 0.20;  tr[2] = int'(3 * P / 8); ti[2] = angle_index(30.0);

    // run 1: SARP / MJARP / SARP, full IF
    run(3'b010, int'(M), int'(P), 3, 3);
    // run 2: two targets, MJARP only, the threshold ends CLEAN
    ntg = 2;
    run(3'b111, 2, int'(P), 3, 2);
    // run 3: SARP with IF = P/2, three targets in the scene but T = 2
    ntg = 3;
    run(3'b000, (M > 3) ? 3 : int'(M), int'(P / 2), 2, 2);
    // runs 4, 5: first packet only, three targets, all SARP then all MJARP,
    // to compare the latency of the two modes
    run(3'b000, 1, int'(P), 3, 3);
    cyc_sarp = last_cyc;
    run(3'b111, 1, int'(P), 3, 3);
    cyc_mjarp = last_cyc;
    check(cyc_sarp < cyc_mjarp, "SARP not faster than MJARP");
    // run 6: first packet, all SARP with IF = P/16 (64 at the default size)
    run(3'b000, 1, int'(P / 16), 3, 3);
    $display("latency, first packet, three targets: SARP %0d, MJARP %0d clock cycles (ratio %f)",
             cyc_sarp, cyc_mjarp, real'(cyc_sarp) / real'(cyc_mjarp));
    run_qr();

    check(n_sarp > 0,      "mechanism never seen: SARP pass");
    check(n_mjarp_col > 0, "mechanism never seen: MJARP pass");
    check(n_clean_sub > 0, "mechanism never seen: CLEAN subtraction");
    check(n_psr > 0,       "mechanism never seen: PSR generation");
    check(n_sel > 0,       "mechanism never seen: selective MF");
    check(n_switch > 0,    "mechanism never seen: SARP/MJARP switch between targets");
    check(n_thr_stop > 0,  "mechanism never seen: threshold stop");
    check(n_t_stop > 0,    "mechanism never seen: stop after T targets");
    check(n_qr > 0,        "mechanism never seen: QR run");
    $display("mechanisms: sarp=%0d mjarp_columns=%0d clean_sub=%0d psr=%0d selective=%0d switch=%0d thr_stop=%0d t_stop=%0d qr=%0d",
             n_sarp, n_mjarp_col, n_clean_sub, n_psr, n_sel, n_switch, n_thr_stop, n_t_stop, n_qr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(negedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
