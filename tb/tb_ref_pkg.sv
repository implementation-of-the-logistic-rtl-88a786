// tb_ref_pkg: reference arithmetic for the testbenches.
//
// Models Q16.16 multiplication, narrowing and one logistic-map step with
// plain 64-bit integer arithmetic, written independently of the RTL: the
// product is formed with a single longint multiplication, the quotient by
// 2^16 with integer division and an explicit correction towards -infinity
// (truncation) or +infinity (rounding), and the range checks on longint
// values. The testbenches compare the hardware against these functions.
package tb_ref_pkg;

  typedef struct {
    int q;
    bit over;
    bit under;
  } conv_res_t;

  localparam longint SCALE = 64'sd65536;
  localparam longint QMAX  = 64'sd2147483647;
  localparam longint QMIN  = -64'sd2147483648;

  // Narrow an exact Q32.32 product p to Q16.16. rnd = 1: toward +inf.
  function automatic conv_res_t conv_ref(longint p, bit rnd);
    conv_res_t res;
    longint quo, rem, v;
    quo = p / SCALE;                 // rounds toward zero
    rem = p % SCALE;
    if (rnd) v = (rem > 0) ? quo + 1 : quo;   // ceiling
    else     v = (rem < 0) ? quo - 1 : quo;   // floor
    res.over = 0;
    res.under = 0;
    if (v > QMAX) begin
      res.over = 1; res.q = int'(QMAX);
    end else if (v < QMIN) begin
      res.over = 1; res.q = int'(QMIN);
    end else if (p != 0 && p > -SCALE && p < SCALE) begin
      res.under = 1; res.q = 0;
    end else begin
      res.q = int'(v);
    end
    return res;
  endfunction

  function automatic conv_res_t mulconv_ref(int a, int b, bit rnd);
    return conv_ref(longint'(a) * longint'(b), rnd);
  endfunction

  // One logistic-map step x' = (r*x) * (1 - x), with the flags ORed.
  function automatic conv_res_t step_ref(int r, int x, bit rnd);
    conv_res_t rx, res;
    longint omx;
    bit omx_over;
    rx = mulconv_ref(r, x, rnd);
    omx = SCALE - longint'(x);
    omx_over = (omx > QMAX);
    if (omx_over) omx = QMAX;
    res = mulconv_ref(rx.q, int'(omx), rnd);
    res.over  = res.over | rx.over | omx_over;
    res.under = res.under | rx.under;
    return res;
  endfunction

endpackage
