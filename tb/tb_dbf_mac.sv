// tb_dbf_mac: self-checking test of the beamforming MAC (dbf_mac) at its
// default size, L = 32 antennas.
// Random FFT-format samples x[l] and DBF-format weights w[l] are applied
// back to back (one vector per clock, with idle gaps); the output must equal
// (1/L) * sum_l x[l] * w[l], computed here in double precision, within two
// LSBs of the <22,2> output format, and must appear one clock after its
// input with the same tag. Full-scale weights (|w| = 1) and large inputs
// are included so that the rounding and saturation paths are exercised.
module tb_dbf_mac;
  import rsp_pkg::*;
  localparam int unsigned L = L_DEF;
  localparam int N = 400;

  logic         clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  c_fft_t [L-1:0] x;
  c_dbf_t [L-1:0] w;
  logic [15:0]  in_tag = '0, out_tag;
  c_dbf_t       y;
  int checks = 0, failures = 0;
  real er [N];
  real ei [N];
  int  n_out = 0;

  always #5 clk = ~clk;

  dbf_mac #(.L(L), .TAG_W(16)) dut (.*);

  function automatic int rnd(input int bits);
    return int'($urandom_range((1 << bits) - 1)) - (1 << (bits - 1));
  endfunction

  // check every output against the expected value stored under its tag
  always @(negedge clk) if (rst_n && out_valid) begin
    real dr, di;
    checks++;
    dr = real'(y.re) / (2.0 ** DBF_F) - er[out_tag];
    di = real'(y.im) / (2.0 ** DBF_F) - ei[out_tag];
    if (int'(out_tag) != n_out || dr * dr + di * di > (2.0 / (2.0 ** DBF_F)) ** 2) begin
      failures++;
      if (failures < 10)
        $display("FAIL: tag %0d (expected %0d) y = %f,%f expected %f,%f", out_tag, n_out,
                 real'(y.re) / (2.0 ** DBF_F), real'(y.im) / (2.0 ** DBF_F), er[out_tag], ei[out_tag]);
    end
    n_out++;
  end

  initial begin
    real sr, si, a, b, c, d;
    x = '0; w = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < N; n++) begin
      sr = 0.0; si = 0.0;
      for (int l = 0; l < int'(L); l++) begin
        if (n < 20) begin           // large inputs, unit weights
          x[l].re = FFT_W'(rnd(FFT_W)); x[l].im = FFT_W'(rnd(FFT_W));
          w[l].re = DBF_W'(1 << DBF_F); w[l].im = '0;
        end else begin
          x[l].re = FFT_W'(rnd(FFT_W - 2)); x[l].im = FFT_W'(rnd(FFT_W - 2));
          w[l].re = DBF_W'(rnd(DBF_W - 1)); w[l].im = DBF_W'(rnd(DBF_W - 1));
        end
        a = real'(x[l].re) / (2.0 ** FFT_F); b = real'(x[l].im) / (2.0 ** FFT_F);
        c = real'(w[l].re) / (2.0 ** DBF_F); d = real'(w[l].im) / (2.0 ** DBF_F);
        sr += a * c - b * d;
        si += a * d + b * c;
      end
      er[n] = sr / L; ei[n] = si / L;
      in_tag = 16'(n);
      in_valid = 1'b1;
      @(negedge clk);
      if ($urandom_range(3) == 0) begin
        in_valid = 1'b0;
        @(negedge clk);
      end
    end
    in_valid = 1'b0;
    repeat (4) @(negedge clk);
    checks++;
    if (n_out != N) begin
      failures++;
      $display("FAIL: %0d outputs, expected %0d", n_out, N);
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
