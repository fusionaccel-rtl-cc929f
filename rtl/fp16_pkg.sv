// fp16_pkg: IEEE 754 binary16 (FP16) arithmetic used by every floating-point
// unit of the accelerator.
//
// FP16 is 1 sign bit [15], 5 exponent bits [14:10] (bias 15) and 10 fraction
// bits [9:0]. The functions below are combinational; the pipelined unit
// modules (fp16_mul, fp16_add, fp16_cmp, fp16_div) wrap them in registers to
// get the latencies the design is built around.
//
// Numeric behaviour (this design's choice, chosen to resemble a typical FPGA
// floating-point operator core):
//   * subnormal inputs are treated as zero and subnormal results are flushed
//     to a signed zero (flush-to-zero);
//   * results are rounded to nearest, ties to even, before the range check;
//   * overflow gives a signed infinity; invalid operations give the quiet
//     NaN 16'h7E00.
// Every operation first forms the exact result as an integer magnitude times
// a power of two and then calls fp16_round_pack, so all operations share one
// rounding path.
package fp16_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_QNAN = 16'h7E00;
  localparam fp16_t FP16_ZERO = 16'h0000;

  function automatic logic fp16_is_nan(input fp16_t x);
    return (x[14:10] == 5'h1F) && (x[9:0] != 10'd0);
  endfunction

  function automatic logic fp16_is_inf(input fp16_t x);
    return (x[14:10] == 5'h1F) && (x[9:0] == 10'd0);
  endfunction

  // Zero or subnormal: both count as zero under flush-to-zero.
  function automatic logic fp16_is_zero(input fp16_t x);
    return x[14:10] == 5'd0;
  endfunction

  // Round mag * 2**scale to FP16 with the given sign.
  function automatic fp16_t fp16_round_pack(input logic sign, input logic [47:0] mag,
                                            input int scale);
    int          msb;
    int          e_unb;
    int          biased;
    logic [11:0] keep;
    logic        guard;
    logic        sticky;
    logic [47:0] low_mask;
    msb = -1;
    for (int i = 0; i < 48; i++) if (mag[i]) msb = i;
    if (msb < 0) return {sign, 15'd0};
    if (msb >= 10) begin
      keep = 12'(mag >> (msb - 10));
      guard = (msb >= 11) ? mag[msb-11] : 1'b0;
      low_mask = (msb >= 12) ? ((48'd1 << (msb - 11)) - 48'd1) : 48'd0;
      sticky = |(mag & low_mask);
    end else begin
      keep = 12'(mag << (10 - msb));
      guard = 1'b0;
      sticky = 1'b0;
    end
    if (guard && (sticky || keep[0])) keep = keep + 12'd1;
    e_unb = msb + scale;
    if (keep[11]) begin
      keep = keep >> 1;
      e_unb = e_unb + 1;
    end
    biased = e_unb + 15;
    if (biased >= 31) return {sign, 5'h1F, 10'd0};
    if (biased <= 0) return {sign, 15'd0};
    return {sign, biased[4:0], keep[9:0]};
  endfunction

  function automatic fp16_t fp16_mul_f(input fp16_t a, input fp16_t b);
    logic        s;
    logic [21:0] prod;
    s = a[15] ^ b[15];
    if (fp16_is_nan(a) || fp16_is_nan(b)) return FP16_QNAN;
    if ((fp16_is_inf(a) && fp16_is_zero(b)) || (fp16_is_inf(b) && fp16_is_zero(a)))
      return FP16_QNAN;
    if (fp16_is_inf(a) || fp16_is_inf(b)) return {s, 5'h1F, 10'd0};
    if (fp16_is_zero(a) || fp16_is_zero(b)) return {s, 15'd0};
    prod = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    return fp16_round_pack(s, 48'(prod), int'(a[14:10]) + int'(b[14:10]) - 50);
  endfunction

  function automatic fp16_t fp16_add_f(input fp16_t a, input fp16_t b);
    logic signed [44:0] va;
    logic signed [44:0] vb;
    logic signed [44:0] sum;
    logic [47:0]        mag;
    if (fp16_is_nan(a) || fp16_is_nan(b)) return FP16_QNAN;
    if (fp16_is_inf(a) && fp16_is_inf(b) && (a[15] != b[15])) return FP16_QNAN;
    if (fp16_is_inf(a)) return a;
    if (fp16_is_inf(b)) return b;
    // value = v * 2**-24, exact for every normal FP16 number
    va = fp16_is_zero(a) ? 45'sd0 : 45'sd0 + ({34'd0, 1'b1, a[9:0]} << (a[14:10] - 5'd1));
    vb = fp16_is_zero(b) ? 45'sd0 : 45'sd0 + ({34'd0, 1'b1, b[9:0]} << (b[14:10] - 5'd1));
    if (a[15]) va = -va;
    if (b[15]) vb = -vb;
    sum = va + vb;
    if (sum == 45'sd0) return {a[15] & b[15], 15'd0};
    mag = (sum < 0) ? 48'(-sum) : 48'(sum);
    return fp16_round_pack(sum < 0, mag, -24);
  endfunction

  function automatic fp16_t fp16_div_f(input fp16_t a, input fp16_t b);
    logic        s;
    logic [24:0] num;
    logic [24:0] q;
    logic [24:0] r;
    s = a[15] ^ b[15];
    if (fp16_is_nan(a) || fp16_is_nan(b)) return FP16_QNAN;
    if (fp16_is_inf(a) && fp16_is_inf(b)) return FP16_QNAN;
    if (fp16_is_zero(a) && fp16_is_zero(b)) return FP16_QNAN;
    if (fp16_is_inf(a) || fp16_is_zero(b)) return {s, 5'h1F, 10'd0};
    if (fp16_is_inf(b) || fp16_is_zero(a)) return {s, 15'd0};
    num = {1'b1, a[9:0], 14'd0};
    q = num / 25'({1'b1, b[9:0]});
    r = num % 25'({1'b1, b[9:0]});
    // the remainder becomes a sticky bit below the quotient
    return fp16_round_pack(s, {22'd0, q, r != 25'd0},
                           int'(a[14:10]) - int'(b[14:10]) - 15);
  endfunction

  // a > b, with zeros and subnormals equal to zero; false if either is NaN.
  function automatic logic fp16_gt_f(input fp16_t a, input fp16_t b);
    logic signed [16:0] ka;
    logic signed [16:0] kb;
    if (fp16_is_nan(a) || fp16_is_nan(b)) return 1'b0;
    ka = fp16_is_zero(a) ? 17'sd0 : (a[15] ? -$signed({2'b0, a[14:0]}) : $signed({2'b0, a[14:0]}));
    kb = fp16_is_zero(b) ? 17'sd0 : (b[15] ? -$signed({2'b0, b[14:0]}) : $signed({2'b0, b[14:0]}));
    return ka > kb;
  endfunction

  function automatic fp16_t fp16_from_uint(input logic [15:0] n);
    return fp16_round_pack(1'b0, 48'(n), 0);
  endfunction

  // ReLU: negative values (and negative zero) become +0.
  function automatic fp16_t fp16_relu(input fp16_t x);
    return x[15] ? FP16_ZERO : x;
  endfunction

endpackage
