// polsw_pkg -- types and arithmetic shared by the polarization switch RTL.
//
// The visualisation pipeline works in floating point, as the polarimeter
// display chain it implements does. Numbers are IEEE-754 binary32 words
// (fp32_t). The functions below are combinational and synthesizable. They
// are deliberately simple, a choice of this design:
//   * results are truncated (rounded toward zero), not rounded to nearest;
//   * subnormal inputs are read as zero and subnormal results flushed to zero;
//   * overflow gives a signed infinity; NaN is not produced on purpose and
//     is not propagated faithfully.
// These are ample for pixel coordinates of a few hundred pixels.
//
// The control path (electrode voltages of the polarization controller) is
// fixed point: voltages are volt_t, signed with VOLT_FRAC fraction bits.
package polsw_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;

  // Channel counts: four polarimeter outputs / Stokes parameters S0..S3,
  // three components of the normalised Stokes vector.
  localparam int unsigned N_RAW  = 4;
  localparam int unsigned N_SOP  = 3;

  typedef fp32_t [N_RAW-1:0] vec4_t;
  typedef fp32_t [N_SOP-1:0] vec3_t;
  typedef fp32_t [N_RAW-1:0][N_RAW-1:0] mat4_t;  // [row][col]
  typedef fp32_t [N_SOP-1:0][N_SOP-1:0] mat3_t;  // [row][col]

  // Fixed-point voltage: signed, 16 integer bits, 16 fraction bits.
  localparam int unsigned VOLT_FRAC = 16;
  typedef logic signed [31:0] volt_t;

  // ------------------------------------------------------------------
  // Count of leading zeros in a 32-bit word (32 for zero).
  function automatic logic [5:0] clz32(input logic [31:0] v);
    logic [5:0] n;
    logic       found;
    n = 6'd32;
    found = 1'b0;
    for (int i = 31; i >= 0; i--) begin
      if (!found && v[i]) begin
        n = 6'(31 - i);
        found = 1'b1;
      end
    end
    return n;
  endfunction

  function automatic logic fp_is_zero(input fp32_t a);
    return a[30:23] == 8'd0;
  endfunction

  function automatic fp32_t fp_neg(input fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

  // ------------------------------------------------------------------
  // a * b
  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic        s;
    logic [47:0] p;
    logic signed [10:0] e;
    logic [22:0] m;
    s = a[31] ^ b[31];
    if (fp_is_zero(a) || fp_is_zero(b)) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = 11'(a[30:23]) + 11'(b[30:23]) - 11'sd127;
    if (p[47]) begin
      m = p[46:24];
      e = e + 11'sd1;
    end else begin
      m = p[45:23];
    end
    if (e >= 11'sd255) return {s, 8'hFF, 23'd0};
    if (e <= 11'sd0)   return {s, 31'd0};
    return {s, e[7:0], m};
  endfunction

  // ------------------------------------------------------------------
  // a + b
  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t       x, y;            // |x| >= |y|
    logic [7:0]  d;
    logic [26:0] mx, my;          // 1.m with three guard bits
    logic [27:0] sum;
    logic [5:0]  lz;
    logic signed [9:0] e;
    if (fp_is_zero(a)) return fp_is_zero(b) ? {a[31] & b[31], 31'd0} : b;
    if (fp_is_zero(b)) return a;
    if (a[30:0] >= b[30:0]) begin
      x = a; y = b;
    end else begin
      x = b; y = a;
    end
    d  = x[30:23] - y[30:23];
    mx = {1'b1, x[22:0], 3'b000};
    my = (d > 8'd26) ? 27'd0 : ({1'b1, y[22:0], 3'b000} >> d);
    e  = 10'(x[30:23]);
    if (x[31] == y[31]) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[27]) begin
        e = e + 10'sd1;
        if (e >= 10'sd255) return {x[31], 8'hFF, 23'd0};
        return {x[31], e[7:0], sum[26:4]};
      end
      return {x[31], e[7:0], sum[25:3]};
    end
    sum = {1'b0, mx} - {1'b0, my};
    if (sum == 28'd0) return FP_ZERO;
    lz  = clz32({5'd0, sum[26:0]}) - 6'd5;   // zeros above bit 26
    sum = sum << lz;
    e   = e - 10'(lz);
    if (e <= 10'sd0) return {x[31], 31'd0};
    return {x[31], e[7:0], sum[25:3]};
  endfunction

  function automatic fp32_t fp_sub(input fp32_t a, input fp32_t b);
    return fp_add(a, fp_neg(b));
  endfunction

  // ------------------------------------------------------------------
  // 1 / a. The mantissa quotient 2^47 / 1.m lies in (2^23, 2^24].
  function automatic fp32_t fp_recip(input fp32_t a);
    logic [47:0] q;
    logic signed [9:0] e;
    if (fp_is_zero(a)) return {a[31], 8'hFF, 23'd0};
    q = 48'h8000_0000_0000 / {24'd0, 1'b1, a[22:0]};
    if (q[24]) begin
      e = 10'sd254 - 10'(a[30:23]);
      if (e <= 10'sd0) return {a[31], 31'd0};
      return {a[31], e[7:0], 23'd0};
    end
    e = 10'sd253 - 10'(a[30:23]);
    if (e <= 10'sd0) return {a[31], 31'd0};
    return {a[31], e[7:0], q[22:0]};
  endfunction

  // ------------------------------------------------------------------
  // Signed integer to float.
  function automatic fp32_t fp_from_int(input logic signed [31:0] v);
    logic        s;
    logic [31:0] mag;
    logic [5:0]  lz;
    s   = v[31];
    mag = s ? 32'(-v) : 32'(v);
    if (mag == 32'd0) return FP_ZERO;
    lz  = clz32(mag);
    mag = mag << lz;
    return {s, 8'(8'd158 - 8'(lz)), mag[30:8]};
  endfunction

  // Float to signed integer, truncated toward zero, saturated to 32 bits.
  function automatic logic signed [31:0] fp_to_int(input fp32_t a);
    logic [31:0] mag;
    logic [7:0]  sh;
    if (a[30:23] < 8'd127) return 32'sd0;
    sh = a[30:23] - 8'd127;
    if (sh > 8'd30) return a[31] ? 32'sh8000_0000 : 32'sh7FFF_FFFF;
    if (sh >= 8'd23) mag = {8'd0, 1'b1, a[22:0]} << (sh - 8'd23);
    else             mag = {8'd0, 1'b1, a[22:0]} >> (8'd23 - sh);
    return a[31] ? -$signed(mag) : $signed(mag);
  endfunction

  // Dot product of two 4-vectors / 3-vectors.
  function automatic fp32_t fp_dot4(input vec4_t r, input vec4_t v);
    return fp_add(fp_add(fp_mul(r[0], v[0]), fp_mul(r[1], v[1])),
                  fp_add(fp_mul(r[2], v[2]), fp_mul(r[3], v[3])));
  endfunction

  function automatic fp32_t fp_dot3(input vec3_t r, input vec3_t v);
    return fp_add(fp_add(fp_mul(r[0], v[0]), fp_mul(r[1], v[1])),
                  fp_mul(r[2], v[2]));
  endfunction

endpackage
