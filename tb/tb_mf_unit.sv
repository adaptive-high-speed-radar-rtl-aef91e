// tb_mf_unit: self-checking test of the frequency-domain matched filter
// (mf_unit) with P = 64 samples and M = 4 packets.
// BRAM E is loaded with random code spectra (CM format <26,6>), then random
// beamformed samples y (DBF format <22,2>) are streamed for every packet m
// and bin k, with random gaps. Each output must equal y * conj(E[m][k])
// (double-precision reference) within one LSB of the CM format, two clocks
// after its input, carrying the input's tag.
module tb_mf_unit;
  import rsp_pkg::*;
  localparam int unsigned P = 64, M = 4;

  logic                     clk = 1'b0, rst_n = 1'b0;
  logic                     e_we = 1'b0, in_valid = 1'b0, out_valid;
  logic [$clog2(M*P)-1:0]   e_addr = '0;
  c_cm_t                    e_data = '0, z;
  logic [$clog2(M)-1:0]     pkt = '0;
  logic [$clog2(P)-1:0]     k = '0;
  c_dbf_t                   y = '0;
  logic [15:0]              in_tag = '0, out_tag;
  int checks = 0, failures = 0, n_out = 0;
  real er [M*P];
  real ei [M*P];
  c_cm_t etab [M*P];

  always #5 clk = ~clk;

  mf_unit #(.P(P), .M(M), .TAG_W(16)) dut (.*);

  function automatic int rnd(input int bits);
    return int'($urandom_range((1 << bits) - 1)) - (1 << (bits - 1));
  endfunction

  always @(negedge clk) if (rst_n && out_valid) begin
    real dr, di;
    checks++;
    dr = real'(z.re) / (2.0 ** CM_F) - er[out_tag];
    di = real'(z.im) / (2.0 ** CM_F) - ei[out_tag];
    if (int'(out_tag) != n_out || dr * dr + di * di > (1.5 / (2.0 ** CM_F)) ** 2) begin
      failures++;
      if (failures < 10) $display("FAIL: output %0d (tag %0d) z = %f,%f expected %f,%f", n_out,
                                  out_tag, real'(z.re) / (2.0 ** CM_F), real'(z.im) / (2.0 ** CM_F),
                                  er[out_tag], ei[out_tag]);
    end
    n_out++;
  end

  initial begin
    real a, b, c, d;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < int'(M * P); n++) begin
      // spectra of a +-1 code of length P/2 are bounded by P/2 = 32 < 2^5
      etab[n].re = CM_W'(rnd(CM_F + 5)); etab[n].im = CM_W'(rnd(CM_F + 5));
      e_we = 1'b1; e_addr = ($clog2(M*P))'(n); e_data = etab[n];
      @(negedge clk);
    end
    e_we = 1'b0;
    for (int m = 0; m < int'(M); m++)
      for (int kk = 0; kk < int'(P); kk++) begin
        y.re = DBF_W'(rnd(DBF_W - 6)); y.im = DBF_W'(rnd(DBF_W - 6));
        a = real'(y.re) / (2.0 ** DBF_F); b = real'(y.im) / (2.0 ** DBF_F);
        c = real'(etab[m * P + kk].re) / (2.0 ** CM_F);
        d = real'(etab[m * P + kk].im) / (2.0 ** CM_F);
        er[m * P + kk] = a * c + b * d;        // y * conj(e)
        ei[m * P + kk] = b * c - a * d;
        pkt = ($clog2(M))'(m); k = ($clog2(P))'(kk); in_tag = 16'(m * P + kk);
        in_valid = 1'b1;
        @(negedge clk);
        if ($urandom_range(4) == 0) begin in_valid = 1'b0; @(negedge clk); end
      end
    in_valid = 1'b0;
    repeat (5) @(negedge clk);
    checks++;
    if (n_out != int'(M * P)) begin failures++; $display("FAIL: %0d outputs", n_out); end
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
