// fp16_ref_pkg: reference arithmetic for the binary16 testbenches, written with real numbers.
//
// A binary16 operand is turned into a real, the operation is done in double precision (exact
// for one product or one sum of two binary16 values), and the result is rounded back to the
// nearest binary16 value with ties to even, then flushed to zero below 2^-14. These rules are
// the ones the datapath implements, derived here a second way, without bit manipulation.
package fp16_ref_pkg;

  typedef logic [15:0] h_t;

  typedef struct {
    h_t   y;
    logic underflow;
    logic overflow;
  } ref_result_t;

  function automatic real pow2(input int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic logic is_nan(input h_t h);
    return (h[14:10] == 5'd31) && (h[9:0] != 10'd0);
  endfunction

  function automatic logic is_inf(input h_t h);
    return (h[14:10] == 5'd31) && (h[9:0] == 10'd0);
  endfunction

  function automatic logic is_zero_ftz(input h_t h);
    return h[14:10] == 5'd0;
  endfunction

  // Value of a finite binary16 word; subnormals read as zero.
  function automatic real to_real(input h_t h);
    real m;
    if (h[14:10] == 5'd0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    m = m * pow2(int'(h[14:10]) - 15);
    return h[15] ? -m : m;
  endfunction

  // Round a real to binary16, nearest even, flush to zero below 2^-14.
  function automatic ref_result_t from_real(input real x);
    ref_result_t r;
    logic s;
    int   e, be;
    real  ax, sc, f, fr;
    r.underflow = 1'b0;
    r.overflow  = 1'b0;
    s  = (x < 0.0);
    ax = s ? -x : x;
    if (ax == 0.0) begin
      r.y = {s, 15'd0};
      return r;
    end
    e = 0;
    while (ax >= pow2(e + 1)) e++;
    while (ax < pow2(e)) e--;
    sc = ax * pow2(10 - e);                // in [1024, 2048)
    f  = $floor(sc);
    fr = sc - f;
    if (fr > 0.5 || (fr == 0.5 && (int'(f) % 2 == 1))) f = f + 1.0;
    if (f >= 2048.0) begin
      f = 1024.0;
      e++;
    end
    be = e + 15;
    if (be <= 0) begin
      r.y = {s, 15'd0};
      r.underflow = 1'b1;
    end else if (be >= 31) begin
      r.y = {s, 15'h7C00};
      r.overflow = 1'b1;
    end else begin
      r.y = {s, 5'(be), 10'(int'(f) - 1024)};
    end
    return r;
  endfunction

  function automatic ref_result_t mul(input h_t a, input h_t b);
    ref_result_t r;
    r.underflow = 1'b0;
    r.overflow  = 1'b0;
    if (is_nan(a) || is_nan(b) || (is_inf(a) && is_zero_ftz(b)) || (is_inf(b) && is_zero_ftz(a)))
      r.y = 16'h7E00;
    else if (is_inf(a) || is_inf(b))
      r.y = {a[15] ^ b[15], 15'h7C00};
    else if (is_zero_ftz(a) || is_zero_ftz(b))
      r.y = {a[15] ^ b[15], 15'd0};
    else begin
      r = from_real(to_real(a) * to_real(b));
      if (r.y[14:0] == 15'd0) r.y[15] = a[15] ^ b[15];
    end
    return r;
  endfunction

  // Adder of non-negative operands.
  function automatic ref_result_t add(input h_t a, input h_t b);
    ref_result_t r;
    r.underflow = 1'b0;
    r.overflow  = 1'b0;
    if (is_nan(a) || is_nan(b) || a[15] || b[15]) r.y = 16'h7E00;
    else if (is_inf(a) || is_inf(b))              r.y = 16'h7C00;
    else begin
      r = from_real(to_real(a) + to_real(b));
      r.underflow = 1'b0;
    end
    return r;
  endfunction

endpackage
