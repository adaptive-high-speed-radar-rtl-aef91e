// tb_rsp_top: reduced-size end-to-end test of rsp_top: P = 64 fast-time samples, L = 8 antennas, I = 31 angles (6 degree grid), M = 4 packets, 3 targets, K = 4. Runs in seconds.
// All stimulus and checking is in rsp_driver (scene, tables, external FFT
// and IFFT models, expected targets and slow-time samples, QR check,
// mechanism counters); this wrapper only connects it to the accelerator.
// The driver prints TB_RESULT and ends the simulation.
module tb_rsp_top;
  import rsp_pkg::*;
  localparam int unsigned P = 64, L = 8, I = 31, M = 4, NT = 3, K = 4;

  logic                      clk, rst_n, cfg_start;
  logic [NT-1:0]             cfg_rsp_mode;
  logic [$clog2(M+1)-1:0]    cfg_num_packets;
  logic [$clog2(NT+1)-1:0]   cfg_num_targets;
  logic [$clog2(P):0]        cfg_if_len;
  logic [$clog2(I)-1:0]      cfg_angle_step;
  logic [63:0]               cfg_threshold;
  logic                      w_we;
  logic [$clog2(I)-1:0]      w_addr_i;
  logic [$clog2(L)-1:0]      w_addr_l;
  c_dbf_t                    w_data;
  logic                      e_we;
  logic [$clog2(M*P)-1:0]    e_addr;
  c_cm_t                     e_data;
  logic                      g_we;
  logic [$clog2(P/2)-1:0]    g_addr;
  logic                      g_data;
  logic                      s_valid, s_ready;
  c_fft_t                    s_data;
  logic                      fft_in_valid, fft_in_last, fft_out_valid;
  c_fft_t                    fft_in_data, fft_out_data;
  logic                      ifft_in_valid, ifft_in_last, ifft_out_valid;
  c_cm_t                     ifft_in_data;
  c_ifft_t                   ifft_out_data;
  logic                      busy, done;
  logic [$clog2(NT+1)-1:0]   num_targets;
  logic [$clog2(P)-1:0]      tgt_ridx [NT];
  logic [$clog2(I)-1:0]      tgt_aidx [NT];
  c_ifft_t                   tgt_amp  [NT];
  logic [NT-1:0]             tgt_mode;
  logic [$clog2(NT*M)-1:0]   zeta_raddr;
  c_ifft_t                   zeta_rdata;
  logic                      qr_u_we, qr_start, qr_busy, qr_done, qr_rd_sel;
  logic [$clog2(K*K)-1:0]    qr_u_addr, qr_rd_addr;
  c_qr_t                     qr_u_data, qr_rd_data;
  logic [4:0]                dbg_state;
  logic                      dbg_cl;

  rsp_top #(.P(P), .L(L), .I(I), .M(M), .NT(NT), .K(K)) dut (.*);

  rsp_driver #(.P(P), .L(L), .I(I), .M(M), .NT(NT), .K(K), .WATCHDOG(2_000_000)) drv (.*);

  // scheduler state and CLEAN flag, observed for the mechanism counters
  always_comb begin
    dbg_state = 5'(dut.st);
    dbg_cl    = dut.cl_flag;
  end

endmodule
