// fp16_pkg: IEEE 754 half-precision (FP16) multiply and add as functions,
// used by the FFT engine.
//
// Format: 1 sign bit, 5 exponent bits (bias 15), 10 fraction bits. Both
// operations round to nearest, ties to even. Subnormal inputs are treated as
// zero and results below the normal range are flushed to zero; results above
// it become infinity; a NaN operand, 0 * inf and inf - inf give the quiet NaN
// 7E00. These simplifications (flush to zero, one NaN value) are this
// design's choice; the FFT only needs half precision, as the paper states.
package fp16_pkg;
  localparam logic [15:0] FP16_NAN = 16'h7e00;

  // round the 11-bit significand m (leading one at bit 10) with round bit rb
  // and sticky bit st, and pack it with exponent e (unbiased + 15)
  function automatic logic [15:0] fp16_pack(input logic s, input int e,
                                            input logic [10:0] m,
                                            input logic rb, input logic st);
    logic [11:0] mr;
    int          er;
    mr = {1'b0, m} + 12'((rb && (st || m[0])) ? 1 : 0);
    er = e;
    if (mr[11]) begin
      mr = mr >> 1;
      er = er + 1;
    end
    if (er >= 31) return {s, 5'h1f, 10'd0};
    if (er <= 0)  return {s, 15'd0};
    return {s, 5'(er), mr[9:0]};
  endfunction

  function automatic logic [15:0] fp16_mul(input logic [15:0] a, input logic [15:0] b);
    logic        s;
    logic [21:0] p;
    int          e;
    s = a[15] ^ b[15];
    if ((a[14:10] == 5'h1f && a[9:0] != 0) || (b[14:10] == 5'h1f && b[9:0] != 0))
      return FP16_NAN;
    if (a[14:10] == 5'h1f || b[14:10] == 5'h1f) begin
      if (a[14:10] == 5'd0 || b[14:10] == 5'd0) return FP16_NAN;
      return {s, 5'h1f, 10'd0};
    end
    if (a[14:10] == 5'd0 || b[14:10] == 5'd0) return {s, 15'd0};
    p = {11'd0, 1'b1, a[9:0]} * {11'd0, 1'b1, b[9:0]};
    e = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (p[21]) return fp16_pack(s, e + 1, p[21:11], p[10], |p[9:0]);
    return fp16_pack(s, e, p[20:10], p[9], |p[8:0]);
  endfunction

  function automatic logic [15:0] fp16_add(input logic [15:0] a, input logic [15:0] b);
    logic [15:0] x, y;
    logic [24:0] mx, my;
    logic [25:0] sum;
    logic        lost;
    int          d, e, lead;
    if ((a[14:10] == 5'h1f && a[9:0] != 0) || (b[14:10] == 5'h1f && b[9:0] != 0))
      return FP16_NAN;
    if (a[14:10] == 5'h1f && b[14:10] == 5'h1f)
      return (a[15] == b[15]) ? a : FP16_NAN;
    if (a[14:10] == 5'h1f) return a;
    if (b[14:10] == 5'h1f) return b;
    if (a[14:10] == 5'd0) return (b[14:10] == 5'd0) ? {a[15] & b[15], 15'd0} : b;
    if (b[14:10] == 5'd0) return a;
    // x has the larger magnitude
    if (a[14:0] >= b[14:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    d  = int'(x[14:10]) - int'(y[14:10]);
    mx = {1'b1, x[9:0], 14'd0};
    my = {1'b1, y[9:0], 14'd0};
    lost = 1'b0;
    if (d >= 25) begin
      lost = 1'b1;
      my   = '0;
    end else begin
      for (int i = 0; i < 25; i++) if (i < d && my[i]) lost = 1'b1;
      my = my >> d;
    end
    my[0] = my[0] | lost;
    if (x[15] == y[15]) sum = {1'b0, mx} + {1'b0, my};
    else                sum = {1'b0, mx} - {1'b0, my};
    if (sum == '0) return 16'h0000;
    e = int'(x[14:10]);
    if (sum[25]) begin
      return fp16_pack(x[15], e + 1, sum[25:15], sum[14], |sum[13:0]);
    end
    lead = 24;
    for (int i = 0; i <= 24; i++) if (sum[i]) lead = i;
    sum = sum << (24 - lead);
    return fp16_pack(x[15], e - (24 - lead), sum[24:14], sum[13], |sum[12:0]);
  endfunction

  function automatic logic [15:0] fp16_neg(input logic [15:0] a);
    return {~a[15], a[14:0]};
  endfunction
endpackage
