// fft_model: behavioural model of a streaming P-point FFT/IFFT core (the
// vendor FFT core of the design), for simulation only.
//
// It collects one frame of P complex samples (fixed point, IN_F fractional
// bits), computes the transform in double precision with an iterative
// radix-2 algorithm, scales by 1/P (both directions, the convention of
// rsp_pkg), rounds and saturates to OUT_W bits with OUT_F fractional bits,
// and returns the P outputs in natural order, one per clock, starting
// LAT clocks after the last input. INV = 0: forward (e^-j), 1: inverse.
// While rst_n is low it drops any partial frame. It has no back-pressure; a new frame may only start after the previous
// frame's outputs have all left.
module fft_model #(
  parameter int unsigned P     = 1024,
  parameter bit          INV   = 1'b0,
  parameter int unsigned IN_W  = 24,
  parameter int unsigned IN_F  = 23,
  parameter int unsigned OUT_W = 24,
  parameter int unsigned OUT_F = 23,
  parameter int unsigned LAT   = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_re,
  input  logic signed [IN_W-1:0]  in_im,
  input  logic                    in_last,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_re,
  output logic signed [OUT_W-1:0] out_im
);
  real xr [P];
  real xi [P];
  int  n_in  = 0;
  int  n_out = -1;     // -1: no output pending
  int  wait_c = 0;
  int  frames = 0;

  function automatic logic signed [OUT_W-1:0] q(input real v);
    real s;
    real hi, lo;
    s  = v * (2.0 ** OUT_F);
    hi = (2.0 ** (OUT_W - 1)) - 1.0;
    lo = -(2.0 ** (OUT_W - 1));
    if (s > hi) s = hi;
    if (s < lo) s = lo;
    return OUT_W'($rtoi(s >= 0.0 ? s + 0.5 : s - 0.5));
  endfunction

  task automatic transform();
    int j, m, half;
    real tr, ti, wr, wi, ang, ur, ui;
    // bit reversal
    j = 0;
    for (int i = 1; i < int'(P); i++) begin
      m = int'(P) / 2;
      while ((j & m) != 0) begin j = j ^ m; m = m / 2; end
      j = j ^ m;
      if (i < j) begin
        tr = xr[i]; xr[i] = xr[j]; xr[j] = tr;
        ti = xi[i]; xi[i] = xi[j]; xi[j] = ti;
      end
    end
    for (int len = 2; len <= int'(P); len *= 2) begin
      half = len / 2;
      for (int k = 0; k < half; k++) begin
        ang = (INV ? 2.0 : -2.0) * 3.14159265358979323846 * k / len;
        wr = $cos(ang); wi = $sin(ang);
        for (int s = 0; s < int'(P); s += len) begin
          ur = xr[s + k + half] * wr - xi[s + k + half] * wi;
          ui = xr[s + k + half] * wi + xi[s + k + half] * wr;
          xr[s + k + half] = xr[s + k] - ur;
          xi[s + k + half] = xi[s + k] - ui;
          xr[s + k] = xr[s + k] + ur;
          xi[s + k] = xi[s + k] + ui;
        end
      end
    end
    for (int i = 0; i < int'(P); i++) begin
      xr[i] = xr[i] / P;
      xi[i] = xi[i] / P;
    end
  endtask

  initial begin
    out_valid = 1'b0;
    out_re = '0;
    out_im = '0;
  end

  always @(posedge clk) begin
    out_valid <= 1'b0;
    if (!rst_n) begin
      n_in  = 0;
      n_out = -1;
    end else if (in_valid) begin
      xr[n_in] = real'(in_re) / (2.0 ** IN_F);
      xi[n_in] = real'(in_im) / (2.0 ** IN_F);
      n_in++;
      if (n_in == int'(P)) begin
        if (!in_last) $display("fft_model: in_last missing at sample %0d", P - 1);
        transform();
        n_in = 0;
        n_out = 0;
        wait_c = LAT;
        frames++;
      end
    end
    if (n_out >= 0) begin
      if (wait_c > 0) wait_c--;
      else begin
        out_valid <= 1'b1;
        out_re <= q(xr[n_out]);
        out_im <= q(xi[n_out]);
        n_out++;
        if (n_out == int'(P)) n_out = -1;
      end
    end
  end

endmodule
