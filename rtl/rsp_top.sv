// rsp_top: reconfigurable SARP/MJARP radar signal processing accelerator
// for range, azimuth and slow-time (Doppler input) processing of up to NT
// targets.
//
// What it does. A packet X_m (P fast-time samples x L antennas) arrives on
// the input stream into BRAM A. Each antenna channel is sent through the
// external P-point FFT into BRAM D. For the first packet the targets are
// found one by one (CLEAN):
//   SARP  (RSP = 0): beamform every selected angle, store the image Y in
//         BRAM F and integrate |Y| over the first IF fast-time samples of
//         each angle; the best angle's row of F is matched-filtered
//         (multiply by conj of the code spectrum, external IFFT) and the
//         range peak is searched (PS-P).
//   MJARP (RSP = 1): for every angle, beamform, matched-filter and IFFT the
//         whole row and search the peak over range (PS-P) and angle (PS-I).
// If the peak exceeds the threshold it is stored (R0-R8) and, while fewer
// than NT targets are known, its point spread response is rebuilt in BRAM A
// (psr_gen), passed through FFT and DBF, and subtracted from BRAM F (CLEAN
// flag CL = 1) before the next target is searched on the residue, with SARP
// or MJARP as cfg_rsp_mode[n] selects for target n. Packets m = 1..M-1 are
// then processed selectively: one FFT pass, then for each target DBF at its
// angle only, matched filtering with packet m's code spectrum and a
// single-bin IFFT (sel_mf), giving slow-time sample zeta[n][m] in BRAM I.
// zeta[n][0] is the first packet's peak. The slow-time vectors are read out
// on zeta_* for Doppler estimation; the Givens-rotation QR core of that
// stage is included and driven through the qr_* ports.
//
// Control follows the design's state diagram S0..S14 (state names below
// carry those labels). FFT and IFFT are vendor cores in the design and are
// outside this module: fft_* and ifft_* are their streaming ports. Each core
// must take a frame of P samples (in_last on the last) and later return P
// samples in natural order on out_valid with no back-pressure; frames are
// sent one at a time, so any latency works. FFT scaling 1/P, IFFT scaling
// 1/P (see rsp_pkg).
//
// Interfaces. Configuration (registers R9-R14, R18 of the design: RSP
// flags, number of packets M, number of targets T, angular step, IF,
// threshold) is sampled on cfg_start; T = 0 or T > NT means NT. Tables: beamforming weights (BRAM B, I x L, DBF
// format) on w_*, code spectra (BRAM E, M x P) on e_*, Golay chips (BRAM G,
// P/2 bits) on g_*; load them before cfg_start. Packet input s_valid/
// s_ready/s_data, P*L samples per packet in order p-major (antenna index
// fastest). Outputs: tgt_* (range index, angle index, complex peak of each
// target), num_targets, done pulse at the end of the M packets.
//
// Lint notes: cln_olast, cln_oi and cln_azacc (CLEAN's end-of-pass flag,
// residue angle index and winning SARP sum) and sel_res (the selective MF
// result, which is already written into BRAM I inside sel_mf) are outputs of
// the sub-blocks that this scheduler does not need; they are left
// unconnected on purpose. rst_n is used asynchronously by the flip-flops and
// synchronously by the `disable iff` of the two protocol assertions at the
// end, which is harmless (SYNCASYNCNET).
//
// Choices of this implementation (not specified by the design): the
// threshold is compared with the squared peak magnitude; angles visited are
// 0, step, 2*step, ... < I; packets after the first are only processed if
// at least one target was found.
module rsp_top
  import rsp_pkg::*;
#(
  parameter int unsigned P  = P_DEF,
  parameter int unsigned L  = L_DEF,
  parameter int unsigned I  = I_DEF,
  parameter int unsigned M  = M_DEF,
  parameter int unsigned NT = NT_DEF,
  parameter int unsigned K  = K_DEF
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // configuration (PS -> PL)
  input  logic                      cfg_start,
  input  logic [NT-1:0]             cfg_rsp_mode,     // bit n: 1 = MJARP for target n
  input  logic [$clog2(M+1)-1:0]    cfg_num_packets,  // M used (1..M)
  input  logic [$clog2(NT+1)-1:0]   cfg_num_targets,  // T, targets to localise (1..NT)
  input  logic [$clog2(P):0]        cfg_if_len,       // IF, 1..P
  input  logic [$clog2(I)-1:0]      cfg_angle_step,   // angular precision, >= 1
  input  logic [63:0]               cfg_threshold,    // on |peak|^2, IFFT format squared
  // table loading
  input  logic                      w_we,
  input  logic [$clog2(I)-1:0]      w_addr_i,
  input  logic [$clog2(L)-1:0]      w_addr_l,
  input  c_dbf_t                    w_data,
  input  logic                      e_we,
  input  logic [$clog2(M*P)-1:0]    e_addr,
  input  c_cm_t                     e_data,
  input  logic                      g_we,
  input  logic [$clog2(P/2)-1:0]    g_addr,
  input  logic                      g_data,
  // packet stream (DMA)
  input  logic                      s_valid,
  output logic                      s_ready,
  input  c_fft_t                    s_data,
  // external FFT core
  output logic                      fft_in_valid,
  output c_fft_t                    fft_in_data,
  output logic                      fft_in_last,
  input  logic                      fft_out_valid,
  input  c_fft_t                    fft_out_data,
  // external IFFT core
  output logic                      ifft_in_valid,
  output c_cm_t                     ifft_in_data,
  output logic                      ifft_in_last,
  input  logic                      ifft_out_valid,
  input  c_ifft_t                   ifft_out_data,
  // status and results
  output logic                      busy,
  output logic                      done,
  output logic [$clog2(NT+1)-1:0]   num_targets,
  output logic [$clog2(P)-1:0]      tgt_ridx [NT],
  output logic [$clog2(I)-1:0]      tgt_aidx [NT],
  output c_ifft_t                   tgt_amp  [NT],
  output logic [NT-1:0]             tgt_mode,         // RSP used for each target
  // slow-time vectors (BRAM I) for Doppler processing
  input  logic [$clog2(NT*M)-1:0]   zeta_raddr,       // n*M + m
  output c_ifft_t                   zeta_rdata,
  // Givens-rotation QR core of the Doppler stage
  input  logic                      qr_u_we,
  input  logic [$clog2(K*K)-1:0]    qr_u_addr,
  input  c_qr_t                     qr_u_data,
  input  logic                      qr_start,
  output logic                      qr_busy,
  output logic                      qr_done,
  input  logic                      qr_rd_sel,
  input  logic [$clog2(K*K)-1:0]    qr_rd_addr,
  output c_qr_t                     qr_rd_data
);
  localparam int unsigned PW  = $clog2(P);
  localparam int unsigned LW  = $clog2(L);
  localparam int unsigned IW  = $clog2(I);
  localparam int unsigned MW  = $clog2(M);
  localparam int unsigned NW  = (NT > 1) ? $clog2(NT) : 1;
  localparam int unsigned TW  = 1 + IW + PW;      // DBF tag {last, i, p}

  // ---------------- state machine ----------------
  typedef enum logic [4:0] {
    S0A_IDLE,      // S0a: wait for configuration
    S0B_LOAD,      // S0b: new packet into BRAM A
    S1_FFT_SEND,   // S1 : one antenna column to the FFT
    S1_FFT_WAIT,   //      wait for its spectrum
    S3_DBF_ALL,    // S3/S4: DBF over all selected angles into CLEAN (SARP)
    S4_AZ_WAIT,    //      wait for the SARP azimuth peak
    S5_SARP_RD,    // S5 : selected row of F to MF / IFFT
    S6_DBF_ANG,    // S3/S4/S6/S7: one angle through DBF, CLEAN, MF, IFFT (MJARP)
    S11_COL_WAIT,  // S11-S13: wait for the IFFT column / peak search
    S12_DECIDE,    // threshold test, register update
    S14_PSR,       // S14: PSR into BRAM A
    S9_SEL_DBF,    // S2/S3/S9: selective DBF + MF + single-bin IFFT
    S9_SEL_WAIT,
    S_NEXT_PKT,
    S_DONE
  } state_e;
  state_e st;

  // configuration registers
  logic [NT-1:0]          rsp_r;         // R14 per target
  logic [$clog2(M+1)-1:0] npkt_r;        // R9
  logic [$clog2(NT+1)-1:0] ntgt_r;       // T
  logic [PW:0]            if_r;          // R18
  logic [IW-1:0]          step_r;        // R11
  logic [63:0]            th_r;
  // run registers
  logic [MW:0]            pkt_idx;       // R12
  logic [$clog2(NT+1)-1:0] tx;           // number of targets found
  logic                   cl_flag;       // CLEAN flag
  rsp_mode_e              cur_mode;
  logic [NW-1:0]          sel_t;         // target of the selective pass

  // counters C0-C2
  logic [PW-1:0] cnt_p;
  logic [LW-1:0] cnt_l;
  logic [IW-1:0] cnt_i;
  logic [PW-1:0] fft_out_cnt;
  logic [PW-1:0] ifft_out_cnt;
  logic          ifft_col_last;          // the IFFT column in flight is the last one
  logic [IW-1:0] col_angle;              // angle index of that column

  // ---------------- target registers R0-R8 ----------------
  logic [PW-1:0] tgt_ridx_r [NT];
  logic [IW-1:0] tgt_aidx_r [NT];
  c_ifft_t       tgt_amp_r  [NT];
  always_comb begin
    for (int n = 0; n < int'(NT); n++) begin
      tgt_ridx[n] = tgt_ridx_r[n];
      tgt_aidx[n] = tgt_aidx_r[n];
      tgt_amp[n]  = tgt_amp_r[n];
    end
  end

  // ---------------- memories A, B, D ----------------
  c_fft_t           a_mem [P*L];
  c_dbf_t [L-1:0]   b_mem [I];
  c_fft_t [L-1:0]   d_mem [P];

  // A read for the FFT (one clock)
  c_fft_t a_q;
  logic   a_rd_v, a_rd_last;
  // PSR writes
  logic          psr_a_we;
  logic [PW-1:0] psr_a_p;
  logic [LW-1:0] psr_a_l;
  c_fft_t        psr_a_d;
  logic [IW-1:0] psr_b_i;
  logic [LW-1:0] psr_b_l;
  c_dbf_t        psr_b_q;

  always_ff @(posedge clk) begin
    if (st == S0B_LOAD && s_valid)
      a_mem[int'(cnt_p) * int'(L) + int'(cnt_l)] <= s_data;
    else if (psr_a_we)
      a_mem[int'(psr_a_p) * int'(L) + int'(psr_a_l)] <= psr_a_d;
    a_q <= a_mem[int'(cnt_p) * int'(L) + int'(cnt_l)];
    if (w_we) b_mem[w_addr_i][w_addr_l] <= w_data;
    psr_b_q <= b_mem[psr_b_i][psr_b_l];
    if (fft_out_valid) d_mem[fft_out_cnt][cnt_l] <= fft_out_data;
  end

  // DBF read stage: D row p and B row i (one clock)
  logic             dr_issue, dr_last;
  logic [IW-1:0]    dr_i_n;
  logic [PW-1:0]    dr_p_n;
  c_fft_t [L-1:0]   dr_x;
  c_dbf_t [L-1:0]   dr_w;
  logic             dr_v;
  logic [TW-1:0]    dr_tag;
  always_ff @(posedge clk) begin
    dr_x <= d_mem[dr_p_n];
    dr_w <= b_mem[dr_i_n];
  end

  // ---------------- datapath blocks ----------------
  logic          dbf_v;
  c_dbf_t        dbf_y;
  logic [TW-1:0] dbf_tag;

  dbf_mac #(.L(L), .TAG_W(TW)) u_dbf (
    .clk, .rst_n, .in_valid(dr_v), .x(dr_x), .w(dr_w), .in_tag(dr_tag),
    .out_valid(dbf_v), .y(dbf_y), .out_tag(dbf_tag));

  logic          to_clean;   // DBF output feeds CLEAN (first packet) or MF (selective)
  logic          cln_start;
  logic          cln_ov, cln_olast, cln_azv, cln_rd_en, cln_rdv;
  logic [IW-1:0] cln_oi, cln_az;
  logic [PW-1:0] cln_op, cln_rd_p;
  c_dbf_t        cln_oy, cln_rd_data;
  logic [63:0]   cln_azacc;

  clean_unit #(.P(P), .I(I)) u_clean (
    .clk, .rst_n, .start(cln_start), .cl(cl_flag), .rsp(cur_mode), .if_len(if_r),
    .in_valid(dbf_v & to_clean), .in_i(dbf_tag[PW +: IW]), .in_p(dbf_tag[PW-1:0]),
    .in_last(dbf_tag[TW-1]), .in_y(dbf_y),
    .out_valid(cln_ov), .out_i(cln_oi), .out_p(cln_op), .out_last(cln_olast), .out_y(cln_oy),
    .az_valid(cln_azv), .az_idx(cln_az), .az_acc(cln_azacc),
    .rd_en(cln_rd_en), .rd_i(tgt_aidx_r[NW'(tx)]), .rd_p(cln_rd_p),
    .rd_valid(cln_rdv), .rd_data(cln_rd_data));

  // MF input mux: CLEAN residue (MJARP), F row read-back (SARP), DBF (selective)
  logic          mf_iv, mf_ov;
  c_dbf_t        mf_iy;
  logic [PW-1:0] mf_ik, mf_ok;
  c_cm_t         mf_oz;
  logic [PW-1:0] rdp_q;
  always_ff @(posedge clk) rdp_q <= cln_rd_p;
  always_comb begin
    if (!to_clean) begin
      mf_iv = dbf_v;             mf_iy = dbf_y;       mf_ik = dbf_tag[PW-1:0];
    end else if (cln_rdv) begin
      mf_iv = 1'b1;              mf_iy = cln_rd_data; mf_ik = rdp_q;
    end else begin
      mf_iv = cln_ov & (cur_mode == RSP_MJARP);
      mf_iy = cln_oy;            mf_ik = cln_op;
    end
  end

  mf_unit #(.P(P), .M(M), .TAG_W(PW)) u_mf (
    .clk, .rst_n, .e_we, .e_addr, .e_data,
    .in_valid(mf_iv), .pkt(MW'(pkt_idx)), .k(mf_ik), .y(mf_iy), .in_tag(mf_ik),
    .out_valid(mf_ov), .z(mf_oz), .out_tag(mf_ok));

  // IFFT feed (first packet)
  assign ifft_in_valid = mf_ov & to_clean;
  assign ifft_in_data  = mf_oz;
  assign ifft_in_last  = (mf_ok == PW'(P - 1));

  // peak search on the IFFT output
  logic          ps_start, ps_done;
  c_ifft_t       ps_amp;
  logic [63:0]   ps_m2;
  logic [PW-1:0] ps_ridx;
  logic [IW-1:0] ps_aidx;

  peak_search #(.P(P), .I(I)) u_ps (
    .clk, .rst_n, .start(ps_start), .rsp(cur_mode),
    .in_valid(ifft_out_valid), .in_p(ifft_out_cnt), .in_i(col_angle),
    .in_last_p(ifft_out_cnt == PW'(P - 1)),
    .in_last((ifft_out_cnt == PW'(P - 1)) & ifft_col_last),
    .in_val(ifft_out_data),
    .done(ps_done), .res_amp(ps_amp), .res_mag2(ps_m2), .res_ridx(ps_ridx), .res_aidx(ps_aidx));

  // PSR generator
  logic psr_start, psr_busy, psr_done;
  psr_gen #(.P(P), .L(L), .I(I)) u_psr (
    .clk, .rst_n, .g_we, .g_addr, .g_data,
    .start(psr_start), .tx_amp(tgt_amp_r[NW'(tx - 1'b1)]),
    .tx_ridx(tgt_ridx_r[NW'(tx - 1'b1)]), .tx_aidx(tgt_aidx_r[NW'(tx - 1'b1)]),
    .busy(psr_busy), .done(psr_done),
    .b_raddr_i(psr_b_i), .b_raddr_l(psr_b_l), .b_rdata(psr_b_q),
    .a_we(psr_a_we), .a_waddr_p(psr_a_p), .a_waddr_l(psr_a_l), .a_wdata(psr_a_d));

  // selective MF and BRAM I
  logic    sel_start, sel_done, z0_we;
  logic [$clog2(NT*M)-1:0] z0_addr;
  c_ifft_t sel_res;
  sel_mf #(.P(P), .M(M), .NT(NT)) u_sel (
    .clk, .rst_n, .start(sel_start), .ridx(tgt_ridx_r[sel_t]), .tgt($clog2(NT)'(sel_t)),
    .pkt(MW'(pkt_idx)),
    .in_valid(mf_ov & ~to_clean), .in_k(mf_ok), .in_last(mf_ok == PW'(P - 1)), .in_z(mf_oz),
    .done(sel_done), .result(sel_res),
    .wr_en(z0_we), .wr_addr(z0_addr), .wr_data(ps_amp),
    .rd_addr(zeta_raddr), .rd_data(zeta_rdata));

  // Givens-rotation QR (Doppler stage)
  givens_qr #(.K(K)) u_qr (
    .clk, .rst_n, .u_we(qr_u_we), .u_addr(qr_u_addr), .u_data(qr_u_data),
    .start(qr_start), .busy(qr_busy), .done(qr_done),
    .rd_sel(qr_rd_sel), .rd_addr(qr_rd_addr), .rd_data(qr_rd_data));

  // ---------------- control ----------------
  logic last_angle;
  always_comb last_angle = (int'(cnt_i) + int'(step_r) >= int'(I));

  assign s_ready = (st == S0B_LOAD);
  assign busy    = (st != S0A_IDLE);
  assign num_targets = tx;

  // DBF stream source: counters -> read addresses
  always_comb begin
    dr_issue = (st == S3_DBF_ALL) | (st == S6_DBF_ANG) | (st == S9_SEL_DBF);
    dr_p_n   = cnt_p;
    dr_i_n   = (st == S9_SEL_DBF) ? tgt_aidx_r[sel_t] : cnt_i;
    dr_last  = (cnt_p == PW'(P - 1)) & ((st != S3_DBF_ALL) | last_angle);
  end

  // FFT feed from A
  assign fft_in_valid = a_rd_v;
  assign fft_in_data  = a_q;
  assign fft_in_last  = a_rd_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S0A_IDLE;
      rsp_r <= '0; npkt_r <= '0; ntgt_r <= '0; if_r <= '0; step_r <= '0; th_r <= '0;
      pkt_idx <= '0; tx <= '0; cl_flag <= 1'b0; cur_mode <= RSP_SARP; sel_t <= '0;
      cnt_p <= '0; cnt_l <= '0; cnt_i <= '0; fft_out_cnt <= '0; ifft_out_cnt <= '0;
      ifft_col_last <= 1'b0; col_angle <= '0;
      a_rd_v <= 1'b0; a_rd_last <= 1'b0; dr_v <= 1'b0; dr_tag <= '0;
      cln_start <= 1'b0; cln_rd_en <= 1'b0; cln_rd_p <= '0; ps_start <= 1'b0;
      psr_start <= 1'b0; sel_start <= 1'b0; z0_we <= 1'b0; z0_addr <= '0; done <= 1'b0;
      tgt_mode <= '0;
      for (int n = 0; n < int'(NT); n++) begin
        tgt_ridx_r[n] <= '0; tgt_aidx_r[n] <= '0; tgt_amp_r[n] <= '0;
      end
    end else begin
      // defaults
      a_rd_v    <= 1'b0;
      a_rd_last <= 1'b0;
      dr_v      <= dr_issue;
      dr_tag    <= {dr_last, dr_i_n, dr_p_n};
      cln_start <= 1'b0;
      cln_rd_en <= 1'b0;
      ps_start  <= 1'b0;
      psr_start <= 1'b0;
      sel_start <= 1'b0;
      z0_we     <= 1'b0;
      done      <= 1'b0;
      if (fft_out_valid)  fft_out_cnt  <= fft_out_cnt + 1'b1;
      if (ifft_out_valid) ifft_out_cnt <= ifft_out_cnt + 1'b1;

      unique case (st)
        // S0a: registers and counters reset, configuration loaded
        S0A_IDLE: if (cfg_start) begin
          rsp_r  <= cfg_rsp_mode;
          npkt_r <= cfg_num_packets;
          ntgt_r <= (cfg_num_targets == '0 || int'(cfg_num_targets) > int'(NT))
                    ? ($clog2(NT+1))'(NT) : cfg_num_targets;
          if_r   <= cfg_if_len;
          step_r <= (cfg_angle_step == '0) ? IW'(1) : cfg_angle_step;
          th_r   <= cfg_threshold;
          pkt_idx <= '0; tx <= '0; cl_flag <= 1'b0; tgt_mode <= '0;
          cnt_p <= '0; cnt_l <= '0;
          st <= S0B_LOAD;
        end
        // S0b: packet X_m into BRAM A
        S0B_LOAD: if (s_valid) begin
          if (cnt_l == LW'(L - 1)) begin
            cnt_l <= '0;
            cnt_p <= cnt_p + 1'b1;
            if (cnt_p == PW'(P - 1)) begin
              st <= S1_FFT_SEND; cnt_p <= '0; cnt_l <= '0;
            end
          end else begin
            cnt_l <= cnt_l + 1'b1;
          end
        end
        // S1: FFT of each antenna channel, result in BRAM D
        S1_FFT_SEND: begin
          a_rd_v    <= 1'b1;
          a_rd_last <= (cnt_p == PW'(P - 1));
          cnt_p     <= cnt_p + 1'b1;
          if (cnt_p == PW'(P - 1)) begin
            st <= S1_FFT_WAIT; fft_out_cnt <= '0;
          end
        end
        S1_FFT_WAIT: if (fft_out_valid && fft_out_cnt == PW'(P - 1)) begin
          cnt_p <= '0;
          if (cnt_l == LW'(L - 1)) begin
            cnt_l <= '0;
            cnt_i <= '0;
            if (pkt_idx == '0) begin
              // first packet: SARP or MJARP pass for target number tx
              cur_mode <= rsp_mode_e'(rsp_r[NW'(tx)]);
              cln_start <= 1'b1;
              ps_start  <= 1'b1;
              st <= rsp_r[NW'(tx)] ? S6_DBF_ANG : S3_DBF_ALL;
            end else begin
              sel_t <= '0; sel_start <= 1'b1;
              st <= S9_SEL_DBF;
            end
          end else begin
            cnt_l <= cnt_l + 1'b1;
            st <= S1_FFT_SEND;
          end
        end
        // S3/S4 (SARP): all selected angles through DBF into CLEAN
        S3_DBF_ALL: begin
          cnt_p <= cnt_p + 1'b1;
          if (cnt_p == PW'(P - 1)) begin
            cnt_p <= '0;
            if (last_angle) st <= S4_AZ_WAIT;
            else            cnt_i <= cnt_i + step_r;
          end
        end
        S4_AZ_WAIT: if (cln_azv) begin
          // S5: read the selected angle's row back from F
          tgt_aidx_r[NW'(tx)] <= cln_az;
          col_angle     <= cln_az;
          ifft_col_last <= 1'b1;
          ifft_out_cnt  <= '0;
          cnt_p <= '0;
          st <= S5_SARP_RD;
        end
        S5_SARP_RD: begin
          cln_rd_en <= 1'b1;
          cln_rd_p  <= cnt_p;
          cnt_p     <= cnt_p + 1'b1;
          if (cnt_p == PW'(P - 1)) st <= S11_COL_WAIT;
        end
        // S6/S7 (MJARP): one angle through DBF, CLEAN, MF and IFFT
        S6_DBF_ANG: begin
          if (cnt_p == '0) begin
            col_angle     <= cnt_i;
            ifft_col_last <= last_angle;
            ifft_out_cnt  <= '0;
          end
          cnt_p <= cnt_p + 1'b1;
          if (cnt_p == PW'(P - 1)) st <= S11_COL_WAIT;
        end
        // S11-S13: IFFT and peak search of the column
        S11_COL_WAIT: begin
          if (ifft_out_valid && ifft_out_cnt == PW'(P - 1) && !ifft_col_last) begin
            cnt_p <= '0;
            cnt_i <= cnt_i + step_r;
            st    <= S6_DBF_ANG;
          end
          if (ps_done) begin                 // last column searched
            cnt_p <= '0;
            st    <= S12_DECIDE;
          end
        end
        // threshold test (S12/S13 -> S14 or S0)
        S12_DECIDE: begin
          if (ps_m2 > th_r && int'(tx) < int'(ntgt_r)) begin
            tgt_ridx_r[NW'(tx)] <= ps_ridx;
            tgt_amp_r[NW'(tx)]  <= ps_amp;
            if (cur_mode == RSP_MJARP) tgt_aidx_r[NW'(tx)] <= ps_aidx;
            tgt_mode[NW'(tx)]   <= cur_mode;
            z0_we   <= 1'b1;             // zeta[tx][0] = first-packet peak
            z0_addr <= $clog2(NT*M)'(int'(tx) * int'(M));
            tx      <= tx + 1'b1;
            cl_flag <= 1'b1;
            if (int'(tx) + 1 < int'(ntgt_r)) begin
              psr_start <= 1'b1;
              st <= S14_PSR;
            end else begin
              st <= S_NEXT_PKT;
            end
          end else begin
            st <= S_NEXT_PKT;
          end
        end
        // S14: PSR of the latest target into A, then FFT/DBF/CLEAN again
        S14_PSR: if (psr_done) begin
          cnt_p <= '0; cnt_l <= '0;
          st <= S1_FFT_SEND;
        end
        // S2/S3/S9: selective processing of packet m > 0, one target at a time
        S9_SEL_DBF: begin
          cnt_p <= cnt_p + 1'b1;
          if (cnt_p == PW'(P - 1)) begin cnt_p <= '0; st <= S9_SEL_WAIT; end
        end
        S9_SEL_WAIT: if (sel_done) begin
          if (int'(sel_t) + 1 < int'(tx)) begin
            sel_t <= sel_t + 1'b1;
            sel_start <= 1'b1;
            st <= S9_SEL_DBF;
          end else begin
            st <= S_NEXT_PKT;
          end
        end
        S_NEXT_PKT: begin
          if (int'(pkt_idx) + 1 >= int'(npkt_r) || tx == '0) begin
            st <= S_DONE;
          end else begin
            pkt_idx <= pkt_idx + 1'b1;
            cnt_p <= '0; cnt_l <= '0;
            st <= S0B_LOAD;
          end
        end
        S_DONE: begin
          done <= 1'b1;
          st   <= S0A_IDLE;
        end
        default: st <= S0A_IDLE;
      endcase
    end
  end

  // the DBF output goes to CLEAN only while the first packet is processed
  always_comb to_clean = (pkt_idx == '0);

  // protocol checks
  a_psr_idle_in_dbf: assert property (@(posedge clk) disable iff (!rst_n)
    (st == S3_DBF_ALL || st == S6_DBF_ANG) |-> !psr_busy);
  a_fft_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    fft_out_valid |-> (st == S1_FFT_WAIT || st == S1_FFT_SEND));

endmodule
