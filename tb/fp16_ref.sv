// fp16_ref: reference FP16 arithmetic for the testbenches, written with
// real (double) arithmetic so that it shares no code with the RTL.
//
// Products and sums of two FP16 numbers are exact in double precision, and a
// quotient rounded to double and then to FP16 is still correctly rounded, so
// to_fp16(op(to_real(a), to_real(b))) is the correctly rounded FP16 result.
// Like the RTL it flushes subnormals to zero and rounds before the range
// check. fp16_same() treats +0 and -0 as equal.
package fp16_ref;

  function automatic real to_real(input logic [15:0] h);
    real m;
    int  e;
    if (h[14:10] == 5'd0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    e = int'(h[14:10]) - 15;
    if (e >= 0) for (int i = 0; i < e; i++) m = m * 2.0;
    else for (int i = 0; i < -e; i++) m = m / 2.0;
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] to_fp16(input real r);
    logic s;
    real  a, scaled, frac;
    int   e, f;
    if (r != r) return 16'h7E00;
    s = (r < 0.0);
    a = s ? -r : r;
    if (a == 0.0) return {s, 15'd0};
    if (a >= 65520.0) return {s, 5'h1F, 10'd0};
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0) begin a = a * 2.0; e--; end
    scaled = a * 1024.0;
    f = int'($floor(scaled));
    frac = scaled - real'(f);
    if (frac > 0.5 || (frac == 0.5 && (f % 2) == 1)) f++;
    if (f == 2048) begin f = 1024; e++; end
    if (e + 15 >= 31) return {s, 5'h1F, 10'd0};
    if (e + 15 <= 0) return {s, 15'd0};
    return {s, 5'(e + 15), 10'(f - 1024)};
  endfunction

  function automatic logic [15:0] mul(input logic [15:0] a, input logic [15:0] b);
    return to_fp16(to_real(a) * to_real(b));
  endfunction
  function automatic logic [15:0] add(input logic [15:0] a, input logic [15:0] b);
    return to_fp16(to_real(a) + to_real(b));
  endfunction
  function automatic logic [15:0] div(input logic [15:0] a, input logic [15:0] b);
    if (b[14:10] == 5'd0) return (a[14:10] == 5'd0) ? 16'h7E00 : {a[15] ^ b[15], 15'h7C00};
    if (a[14:10] == 5'd0) return {a[15] ^ b[15], 15'd0};
    return to_fp16(to_real(a) / to_real(b));
  endfunction
  function automatic logic gt(input logic [15:0] a, input logic [15:0] b);
    return to_real(a) > to_real(b);
  endfunction
  function automatic logic [15:0] relu(input logic [15:0] a);
    return (to_real(a) > 0.0) ? a : 16'h0000;
  endfunction

  function automatic logic fp16_same(input logic [15:0] a, input logic [15:0] b);
    if (a[14:10] == 0 && b[14:10] == 0) return 1'b1;
    return a == b;
  endfunction

  // random finite normal FP16 value with exponent in [emin, emax]
  function automatic logic [15:0] rand_fp16(input int emin, input int emax);
    logic [15:0] h;
    h[15]    = 1'($urandom);
    h[14:10] = 5'(emin + int'($urandom % 32'(emax - emin + 1)));
    h[9:0]   = 10'($urandom);
    return h;
  endfunction

endpackage
