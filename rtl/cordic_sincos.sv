// cordic_sincos: combinational sine/cosine of a phase given in turns.
//
// phase is an unsigned 32-bit fraction of a full turn (2^32 = 360 degrees).
// The top bits pick the quadrant so that the remaining angle lies within
// +-45 degrees; ITER rotation-mode CORDIC steps then drive that angle to zero.
// The CORDIC gain is removed by starting from x = 1/gain. cos and sin come out
// as signed Q1.22 values in 24 bits (1.0 = 2^22), accurate to a few LSB.
// The arctangent table holds round(atan(2^-i) / (2*pi) * 2^32).
// The whole function settles in one clock-free pass (no registers); it builds
// the Doppler steering vectors of the MUSIC unit and the beam-angle cosine of
// the T_inf estimator. The CORDIC method is this design's choice.
module cordic_sincos #(
  parameter int ITER = 24
) (
  input  logic        [31:0] phase,
  output logic signed [23:0] cos_o,
  output logic signed [23:0] sin_o
);
  localparam logic [31:0] ATAN [26] = '{
    32'd536870912, 32'd316933406, 32'd167458907, 32'd85004756, 32'd42667331,
    32'd21354465,  32'd10679838,  32'd5340245,   32'd2670163,  32'd1335087,
    32'd667544,    32'd333772,    32'd166886,    32'd83443,    32'd41722,
    32'd20861,     32'd10430,     32'd5215,      32'd2608,     32'd1304,
    32'd652,       32'd326,       32'd163,       32'd81,       32'd41,
    32'd20};
  localparam logic signed [29:0] X0 = 30'sd40752055;  // 2^26 / CORDIC gain

  logic [31:0]        shifted;
  logic [1:0]         quad;
  logic signed [31:0] z;
  logic signed [29:0] x, y, xn, yn;
  logic signed [23:0] c, s;

  always_comb begin
    shifted = phase + 32'h2000_0000;
    quad    = shifted[31:30];
    z       = $signed(phase - {quad, 30'b0});
    x       = X0;
    y       = '0;
    for (int i = 0; i < ITER; i++) begin
      if (z >= 0) begin
        xn = x - (y >>> i);
        yn = y + (x >>> i);
        z  = z - $signed(ATAN[i]);
      end else begin
        xn = x + (y >>> i);
        yn = y - (x >>> i);
        z  = z + $signed(ATAN[i]);
      end
      x = xn;
      y = yn;
    end
    c = 24'((x + 30'sd8) >>> 4);
    s = 24'((y + 30'sd8) >>> 4);
    unique case (quad)
      2'd0: begin cos_o = c;  sin_o = s;  end
      2'd1: begin cos_o = -s; sin_o = c;  end
      2'd2: begin cos_o = -c; sin_o = -s; end
      default: begin cos_o = s; sin_o = -c; end
    endcase
  end
endmodule
