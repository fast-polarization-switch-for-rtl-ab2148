// cordic_sincos -- combinational sine and cosine of a phase word.
//
// Helper of pcm_voltage. The phase is an unsigned fraction of a full turn
// (angle = 2*pi*phase/2^16). The phase is first folded into [-90, +90)
// degrees (a half-turn shift negates both results), then ITER rotation-mode
// CORDIC steps run on 32-bit signed values with 30 fraction bits, starting
// from x = K (the CORDIC gain compensation, 0.6072529...) so that no final
// multiply is needed. sin and cos come out as signed Q1.15, saturated to
// +-32767. Accuracy is about 2 LSB of Q1.15.
// The choice of CORDIC for the sin/cos of the control equations is this
// design's own.
module cordic_sincos #(
  parameter int unsigned ITER = 20
) (
  input  logic        [15:0] phase,
  output logic signed [15:0] sin_q15,
  output logic signed [15:0] cos_q15
);

  // atan(2^-i) as a fraction of a full turn, times 2^32
  localparam logic [31:0] ATAN [24] = '{
    32'd536870912, 32'd316933406, 32'd167458907, 32'd85004756,
    32'd42667331,  32'd21354465,  32'd10679838,  32'd5340245,
    32'd2670163,   32'd1335087,   32'd667544,    32'd333772,
    32'd166886,    32'd83443,     32'd41722,     32'd20861,
    32'd10430,     32'd5215,      32'd2608,      32'd1304,
    32'd652,       32'd326,       32'd163,       32'd81};
  localparam logic signed [31:0] K_Q30 = 32'sd652032874;

  initial assert (ITER >= 1 && ITER <= 24) else $error("cordic_sincos: ITER must be 1..24");

  function automatic logic signed [15:0] to_q15(input logic signed [31:0] v);
    logic signed [31:0] s;
    s = v >>> 15;
    if (s > 32'sd32767)  return 16'sd32767;
    if (s < -32'sd32767) return -16'sd32767;
    return 16'(s);
  endfunction

  always_comb begin
    logic signed [31:0] x, y, z, xn;
    logic               flip;
    z    = $signed({phase, 16'd0});                 // -180 .. +180 degrees
    flip = (z >= 32'sh4000_0000) || (z < -32'sh4000_0000);
    if (flip) z = z + 32'sh8000_0000;               // shift by half a turn
    x = K_Q30;
    y = '0;
    for (int i = 0; i < ITER; i++) begin
      if (z >= 0) begin
        xn = x - (y >>> i);
        y  = y + (x >>> i);
        z  = z - $signed(ATAN[i]);
      end else begin
        xn = x + (y >>> i);
        y  = y - (x >>> i);
        z  = z + $signed(ATAN[i]);
      end
      x = xn;
    end
    if (flip) begin
      x = -x;
      y = -y;
    end
    sin_q15 = to_q15(y);
    cos_q15 = to_q15(x);
  end

endmodule
