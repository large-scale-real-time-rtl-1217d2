// tpc_fp_pkg: single-precision (IEEE-754 binary32) arithmetic used by the
// ion-tail filter, written as synthesizable functions.
//
// The ion-tail filter converts its 12-bit fixed-point samples to 32-bit
// floating point and does all arithmetic there (this follows the paper).
// How the operators round is not given; these functions use this design's
// simplified rules: results are truncated (round toward zero), subnormal
// inputs and results are flushed to zero, and overflow saturates to the
// largest finite value. NaN and infinity are not produced. Each function is
// purely combinational; the filter places it inside a pipeline of the depth
// the paper gives (3 cycles per add or multiply, 4 for the conversion) so
// that synthesis can retime the logic across the stages.
package tpc_fp_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_MAX  = 32'h7F7F_FFFF;

  // signed fixed-point value v with FBITS fraction bits -> float
  function automatic fp32_t fp_from_fixed(input logic signed [31:0] v, input int fbits);
    logic [31:0] mag;
    logic        s;
    int          msb;
    logic [31:0] norm;
    s   = v[31];
    mag = s ? 32'(-v) : 32'(v);
    if (mag == 0) return FP_ZERO;
    msb = 0;
    for (int i = 0; i < 32; i++) if (mag[i]) msb = i;
    norm = mag << (31 - msb);                 // leading one at bit 31
    return {s, 8'(127 + msb - fbits), norm[30:8]};
  endfunction

  // float -> signed fixed point with FBITS fraction bits, rounded to nearest
  // (ties away from zero), saturated to the signed 32-bit range
  function automatic logic signed [31:0] fp_to_fixed(input fp32_t a, input int fbits);
    logic [7:0]  e;
    logic [55:0] m;
    int          sh;
    logic [55:0] r;
    logic [31:0] mag;
    e = a[30:23];
    if (e == 0) return '0;
    m  = {32'd0, 1'b1, a[22:0]};             // value = m * 2^(e-127-23)
    sh = int'(e) - 127 - 23 + fbits;          // shift so that the result has fbits fractions
    if (sh >= 8) return a[31] ? 32'sh8000_0001 : 32'sh7FFF_FFFF;
    if (sh >= 0) r = m << sh;
    else if (sh < -25) r = '0;
    else r = ((m >> (-sh - 1)) + 56'd1) >> 1;
    mag = (r > 56'h7FFF_FFFF) ? 32'h7FFF_FFFF : r[31:0];
    return a[31] ? -$signed(mag) : $signed(mag);
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic        s;
    logic [47:0] p;
    int          e;
    logic [22:0] f;
    s = a[31] ^ b[31];
    if (a[30:23] == 0 || b[30:23] == 0) return FP_ZERO;
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin
      f = p[46:24];
      e = e + 1;
    end else begin
      f = p[45:23];
    end
    if (e <= 0) return FP_ZERO;
    if (e >= 255) return {s, FP_MAX[30:0]};
    return {s, 8'(e), f};
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t       x, y;
    logic [26:0] mx, my, sum;              // 1 hidden + 23 + 3 guard bits
    int          d, e, lz;
    logic        s;
    if (a[30:23] == 0) return b[30:23] == 0 ? FP_ZERO : b;
    if (b[30:23] == 0) return a;
    // x has the larger magnitude
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    d  = int'(x[30:23]) - int'(y[30:23]);
    mx = {1'b0, 1'b1, x[22:0], 2'b00};
    my = {1'b0, 1'b1, y[22:0], 2'b00};
    my = (d > 26) ? 27'd0 : (my >> d);
    s  = x[31];
    e  = int'(x[30:23]);
    if (x[31] == y[31]) sum = mx + my;
    else                sum = mx - my;
    if (sum == 0) return FP_ZERO;
    if (sum[26]) begin
      sum = sum >> 1;
      e   = e + 1;
    end else begin
      lz = 0;
      for (int i = 25; i >= 0; i--) begin
        if (sum[25]) break;
        sum = sum << 1;
        lz++;
      end
      e = e - lz;
    end
    if (e <= 0) return FP_ZERO;
    if (e >= 255) return {s, FP_MAX[30:0]};
    return {s, 8'(e), sum[24:2]};
  endfunction

  function automatic fp32_t fp_neg(input fp32_t a);
    return (a[30:23] == 0) ? FP_ZERO : {~a[31], a[30:0]};
  endfunction

endpackage
