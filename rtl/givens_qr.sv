// givens_qr: QR factorisation of the K x K covariance matrix U by Givens
// rotations, the core of the Givens-rotation eigenvalue decomposition used
// for MUSIC Doppler estimation.
//
// BRAM J holds U and BRAM K is set to the identity at start. The B =
// K(K-1)/2 rotations null U[mu,nu] for nu = 0..K-2 and mu = nu+1..K-1 in
// that order. Rotation beta:
//   C1    read u1 = U[nu,nu], u2 = U[mu,nu]
//   C2    update theta: d = sqrt(u1^2 + u2^2) (complex square root in polar
//         form, sqrt((r+Re)/2) + j*sign(Im)*sqrt((r-Re)/2), r = |u1^2+u2^2|),
//         cos = u1/d, sin = u2/d  (two clocks)
//   C3-C5 for every column j: read rows nu and mu, rotate
//            row_nu' =  cos*row_nu + sin*row_mu
//            row_mu' = -sin*row_nu + cos*row_mu
//         and write both back, first for J (K columns) then for K.
// Only rows nu and mu are touched, never a full K x K product. At the end J
// holds R (upper triangular) and K holds the accumulated rotation G with
// G*U = R, i.e. Q = G^T in the design's notation (U = Q R when the
// rotations are orthogonal). The squares are complex squares, not |.|^2,
// exactly as in the design's cos/sin formulas.
//
// Number format <32,12> (20 fractional bits) throughout; the design keeps
// this stage in double-precision floating point, which is not reproduced
// here (see the documentation). Square roots and divisions are exact
// integer operations done in one clock each (combinational), a choice made
// for simplicity, not speed.
//
// Interface: load U through u_we/u_addr (row*K+col)/u_data while idle, pulse
// `start`, wait for `done`. Read J (rd_sel = 0) or K (rd_sel = 1) through
// rd_addr; rd_data follows one clock later. Timing per rotation: 2 (C1) +
// 2 (C2) + 2*(K+1) (C3-C5) clocks; total about B*(2K+6) + K*K clocks.
module givens_qr
  import rsp_pkg::*;
#(
  parameter int unsigned K = K_DEF
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   u_we,
  input  logic [$clog2(K*K)-1:0] u_addr,
  input  c_qr_t                  u_data,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  input  logic                   rd_sel,
  input  logic [$clog2(K*K)-1:0] rd_addr,
  output c_qr_t                  rd_data
);
  localparam int unsigned KW = $clog2(K);
  localparam int unsigned AW = $clog2(K*K);

  typedef enum logic [3:0] { S_IDLE, S_INIT, S_RD1, S_RD2, S_TH1, S_TH2,
                             S_ROT, S_ROT_LAST, S_NEXT } state_e;
  state_e st;

  c_qr_t j_mem [K*K];
  c_qr_t k_mem [K*K];

  logic [KW-1:0] nu, mu, col;
  logic          on_k;          // 0: rotating J (U), 1: rotating K (Q)
  logic [AW-1:0] init_cnt;
  c_qr_t         u1, u2, cs, sn, d_q;
  c_qr_t         ra, rb;         // read data of rows nu and mu
  logic          rv;             // ra/rb valid, rotate column col_d
  logic [KW-1:0] col_d;
  logic          on_k_d;

  // ---------------- arithmetic helpers ----------------
  function automatic logic [63:0] isqrt(input logic [127:0] v);
    logic [127:0] rem, res, bitv;
    // digit-by-digit (restoring) square root, two bits of v per step
    rem = v; res = '0; bitv = 128'd1 << 126;
    for (int i = 0; i < 64; i++) begin
      if (rem >= res + bitv) begin
        rem = rem - (res + bitv);
        res = (res >> 1) + bitv;
      end else begin
        res = res >> 1;
      end
      bitv = bitv >> 2;
    end
    return res[63:0];
  endfunction

  function automatic logic signed [QR_W-1:0] sat_qr(input logic signed [127:0] x);
    if (x > 128'sd2147483647)       return 32'sh7fffffff;
    else if (x < -128'sd2147483648) return 32'sh80000000;
    else                            return x[QR_W-1:0];
  endfunction

  // complex product a*b rounded to QR_F fractional bits
  function automatic c_qr_t cmul_qr(input c_qr_t a, input c_qr_t b);
    logic signed [127:0] re, im;
    re = 128'(a.re) * 128'(b.re) - 128'(a.im) * 128'(b.im);
    im = 128'(a.re) * 128'(b.im) + 128'(a.im) * 128'(b.re);
    cmul_qr.re = sat_qr((re + (128'sd1 <<< (QR_F - 1))) >>> QR_F);
    cmul_qr.im = sat_qr((im + (128'sd1 <<< (QR_F - 1))) >>> QR_F);
  endfunction

  // complex division a/b = a*conj(b)/|b|^2, QR_F fractional bits
  function automatic c_qr_t cdiv_qr(input c_qr_t a, input c_qr_t b);
    logic signed [127:0] nre, nim, den;
    nre = 128'(a.re) * 128'(b.re) + 128'(a.im) * 128'(b.im);
    nim = 128'(a.im) * 128'(b.re) - 128'(a.re) * 128'(b.im);
    den = 128'(b.re) * 128'(b.re) + 128'(b.im) * 128'(b.im);
    cdiv_qr.re = sat_qr((nre <<< QR_F) / den);
    cdiv_qr.im = sat_qr((nim <<< QR_F) / den);
  endfunction

  // ---------------- theta update, stage 1: d = csqrt(u1^2 + u2^2) -------
  c_qr_t               d_c;
  logic signed [127:0] s_re, s_im;
  logic [127:0]        r_abs, hp, hm;
  always_comb begin
    // two CMs (squares) and a CA; QR_F fractional bits
    s_re = (128'(u1.re) * 128'(u1.re) - 128'(u1.im) * 128'(u1.im)
          + 128'(u2.re) * 128'(u2.re) - 128'(u2.im) * 128'(u2.im)) >>> QR_F;
    s_im = (128'(u1.re) * 128'(u1.im) + 128'(u2.re) * 128'(u2.im)) >>> (QR_F - 1);
    // |x| = sqrt(re^2 + im^2), QR_F fractional bits
    r_abs = 128'(isqrt(128'(s_re * s_re + s_im * s_im)));
    // (r + Re)/2 and (r - Re)/2, shifted for a square root at QR_F bits
    hp = 128'((128'(r_abs) + s_re) >>> 1) << QR_F;
    hm = 128'((128'(r_abs) - s_re) >>> 1) << QR_F;
    d_c.re = sat_qr(128'(isqrt(hp)));
    d_c.im = (s_im < 0) ? sat_qr(-128'(isqrt(hm))) : sat_qr(128'(isqrt(hm)));
  end

  // ---------------- rotation of one column ----------------
  c_qr_t new_a, new_b, neg_sn;
  always_comb begin
    neg_sn.re = -sn.re;
    neg_sn.im = -sn.im;
    new_a.re = sat_qr(128'(cmul_qr(cs, ra).re) + 128'(cmul_qr(sn, rb).re));
    new_a.im = sat_qr(128'(cmul_qr(cs, ra).im) + 128'(cmul_qr(sn, rb).im));
    new_b.re = sat_qr(128'(cmul_qr(neg_sn, ra).re) + 128'(cmul_qr(cs, rb).re));
    new_b.im = sat_qr(128'(cmul_qr(neg_sn, ra).im) + 128'(cmul_qr(cs, rb).im));
  end

  // ---------------- memories (two ports each, as a true dual-port BRAM) ----
  logic [AW-1:0] addr_a, addr_b, waddr_a, waddr_b;
  always_comb begin
    addr_a  = AW'(int'(nu) * int'(K) + int'(col));
    addr_b  = AW'(int'(mu) * int'(K) + int'(col));
    waddr_a = AW'(int'(nu) * int'(K) + int'(col_d));
    waddr_b = AW'(int'(mu) * int'(K) + int'(col_d));
  end

  c_qr_t ja, jb, ka, kb;
  always_ff @(posedge clk) begin
    ja <= j_mem[addr_a];
    jb <= j_mem[addr_b];
    ka <= k_mem[addr_a];
    kb <= k_mem[addr_b];
    rd_data <= rd_sel ? k_mem[rd_addr] : j_mem[rd_addr];
    if (st == S_IDLE && u_we) j_mem[u_addr] <= u_data;
    if (st == S_INIT) k_mem[init_cnt] <= (int'(init_cnt) % (K + 1) == 0)
                                         ? c_qr_t'{re: 32'sd1 <<< QR_F, im: '0} : '0;
    if (rv && !on_k_d) begin j_mem[waddr_a] <= new_a; j_mem[waddr_b] <= new_b; end
    if (rv &&  on_k_d) begin k_mem[waddr_a] <= new_a; k_mem[waddr_b] <= new_b; end
  end
  always_comb begin
    ra = on_k_d ? ka : ja;
    rb = on_k_d ? kb : jb;
  end

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; nu <= '0; mu <= '0; col <= '0; on_k <= 1'b0; init_cnt <= '0;
      u1 <= '0; u2 <= '0; cs <= '0; sn <= '0; d_q <= '0;
      rv <= 1'b0; col_d <= '0; on_k_d <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      rv   <= 1'b0;
      case (st)
        S_IDLE: if (start) begin st <= S_INIT; init_cnt <= '0; end
        S_INIT: begin                       // C0: K <= identity, counters reset
          init_cnt <= init_cnt + 1'b1;
          if (int'(init_cnt) == int'(K * K) - 1) begin
            st <= S_RD1; nu <= '0; mu <= KW'(1); col <= '0;
          end
        end
        S_RD1: st <= S_RD2;                 // C1: read U[nu,nu] (port a), U[mu,nu] (port b)
        S_RD2: begin
          u1 <= ja;
          u2 <= jb;
          st <= S_TH1;
        end
        S_TH1: begin                        // C2: update theta, square root
          d_q <= d_c;
          st  <= S_TH2;
        end
        S_TH2: begin                        // C2: update theta, divisions
          if (d_q == '0) begin
            cs <= c_qr_t'{re: 32'sd1 <<< QR_F, im: '0};
            sn <= '0;
          end else begin
            cs <= cdiv_qr(u1, d_q);
            sn <= cdiv_qr(u2, d_q);
          end
          st <= S_ROT; col <= '0; on_k <= 1'b0;
        end
        S_ROT: begin                        // C3-C5 over K columns, J then K
          rv     <= 1'b1;
          col_d  <= col;
          on_k_d <= on_k;
          if (int'(col) == int'(K) - 1) begin
            col <= '0;
            if (on_k) st <= S_ROT_LAST;
            else      on_k <= 1'b1;
          end else begin
            col <= col + 1'b1;
          end
        end
        S_ROT_LAST: st <= S_NEXT;           // last write drains
        S_NEXT: begin
          if (int'(mu) == int'(K) - 1) begin
            if (int'(nu) == int'(K) - 2) begin
              st <= S_IDLE; done <= 1'b1;
            end else begin
              nu <= nu + 1'b1; mu <= nu + KW'(2); col <= nu + 1'b1; st <= S_RD1; // next column's diagonal
            end
          end else begin
            mu <= mu + 1'b1; col <= nu; st <= S_RD1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
