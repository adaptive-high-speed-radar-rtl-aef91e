// cordic_phasor: combinational unit phasor e^{+j*2*pi*k/N} for a phase index
// k of PW bits (N = 2^PW), used to generate the Fourier vector of the
// selective matched filter on the fly instead of storing a P x P matrix.
//
// Method: the two top bits of the phase select the quadrant; the remaining
// angle (0 to 90 degrees) is produced by 20 CORDIC rotation iterations
// starting from x = 1/G (G = CORDIC gain, prod sqrt(1+2^-2i) = 1.64676) and
// y = 0; the quadrant then swaps/negates cos and sin. Angles are handled in
// units of 2^-24 turn; ATAN[i] = round(2^24 * atan(2^-i) / (2*pi)).
// Output format <24,2> (22 fractional bits), absolute error below 2^-19.
// The CORDIC itself is this implementation's choice: the design only says
// the Fourier vector is generated from the range index.
module cordic_phasor #(
  parameter int unsigned PW = 10
) (
  input  logic [PW-1:0]      k,
  output logic signed [23:0] cos_o,
  output logic signed [23:0] sin_o
);
  localparam int unsigned NIT = 20;
  localparam logic signed [31:0] X0 = 32'sd2547003;   // round(2^22 / G)
  localparam logic signed [31:0] ATAN [NIT] = '{
    32'sd2097152, 32'sd1238021, 32'sd654136, 32'sd332050, 32'sd166669,
    32'sd83416,   32'sd41718,   32'sd20860,  32'sd10430,  32'sd5215,
    32'sd2608,    32'sd1304,    32'sd652,    32'sd326,    32'sd163,
    32'sd81,      32'sd41,      32'sd20,     32'sd10,     32'sd5 };

  logic [23:0]        ph;
  logic [1:0]         quad;
  logic signed [31:0] x, y, z, xn, yn;

  always_comb begin
    ph   = 24'(k) << (24 - PW);
    quad = ph[23:22];
    x = X0;
    y = '0;
    z = 32'(ph[21:0]);
    for (int i = 0; i < int'(NIT); i++) begin
      if (z >= 0) begin
        xn = x - (y >>> i);
        yn = y + (x >>> i);
        z  = z - ATAN[i];
      end else begin
        xn = x + (y >>> i);
        yn = y - (x >>> i);
        z  = z + ATAN[i];
      end
      x = xn;
      y = yn;
    end
    unique case (quad)
      2'd0: begin cos_o = 24'(x);  sin_o = 24'(y);  end
      2'd1: begin cos_o = 24'(-y); sin_o = 24'(x);  end
      2'd2: begin cos_o = 24'(-x); sin_o = 24'(-y); end
      default: begin cos_o = 24'(y); sin_o = 24'(-x); end
    endcase
  end

endmodule
