// fp16_pkg -- IEEE 754 binary16 arithmetic used by every FP16 datapath of the
// accelerator (MAC tree, error-compensation MACs, clustering boundaries,
// Orizuru comparators, residual subtraction).
//
// All functions are combinational and synthesizable. Simplifications, which are
// choices of this design and not taken from the paper: subnormal inputs are read
// as zero and subnormal results are flushed to zero; NaN is not produced (an
// exponent of 31 is treated as infinity); rounding is round-to-nearest-even.
// Ordering for comparisons uses a sign-magnitude to offset-binary key, so -0 is
// ordered just below +0.
package fp16_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_ZERO    = 16'h0000;
  localparam fp16_t FP16_POS_INF = 16'h7C00;

  function automatic logic fp16_is_zero(fp16_t a);
    return a[14:10] == 5'd0;
  endfunction

  function automatic logic fp16_is_inf(fp16_t a);
    return a[14:10] == 5'd31;
  endfunction

  // Total-order key: larger key <=> larger value.
  function automatic logic [15:0] fp16_key(fp16_t a);
    return a[15] ? ~a : (a | 16'h8000);
  endfunction

  function automatic logic fp16_lt(fp16_t a, fp16_t b);
    return fp16_key(a) < fp16_key(b);
  endfunction

  function automatic logic fp16_gt(fp16_t a, fp16_t b);
    return fp16_key(a) > fp16_key(b);
  endfunction

  // Pack sign, biased exponent and an 11-bit significand with round bits.
  // sig holds the hidden bit at position 13, guard at 2, round/sticky below.
  function automatic fp16_t fp16_round_pack(logic s, int e, logic [14:0] sig);
    logic [11:0] m;
    logic        g, st;
    m  = {1'b0, sig[13:3]};
    g  = sig[2];
    st = |sig[1:0];
    if (g && (st || m[0])) m = m + 12'd1;
    if (m[11]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e >= 31) return {s, 15'h7C00};
    if (e <= 0) return {s, 15'h0000};
    return {s, e[4:0], m[9:0]};
  endfunction

  function automatic fp16_t fp16_mul(fp16_t a, fp16_t b);
    logic        s;
    logic [21:0] p;
    logic [14:0] sig;
    int          e;
    s = a[15] ^ b[15];
    if (fp16_is_inf(a) || fp16_is_inf(b)) return {s, 15'h7C00};
    if (fp16_is_zero(a) || fp16_is_zero(b)) return {s, 15'h0000};
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (p[21]) begin
      sig = {1'b0, p[21:11], p[10], p[9], |p[8:0]};
      e   = e + 1;
    end else begin
      sig = {1'b0, p[20:10], p[9], p[8], |p[7:0]};
    end
    return fp16_round_pack(s, e, sig);
  endfunction

  function automatic fp16_t fp16_add(fp16_t a, fp16_t b);
    fp16_t       x, y;
    logic [14:0] mx, my, sum;
    int          ex, d;
    logic        st;
    if (fp16_is_zero(a)) return fp16_is_zero(b) ? FP16_ZERO : b;
    if (fp16_is_zero(b)) return a;
    if (fp16_is_inf(a)) return {a[15], 15'h7C00};
    if (fp16_is_inf(b)) return {b[15], 15'h7C00};
    // x gets the larger magnitude
    if (a[14:0] >= b[14:0]) begin
      x = a;
      y = b;
    end else begin
      x = b;
      y = a;
    end
    ex = int'(x[14:10]);
    d  = ex - int'(y[14:10]);
    mx = {1'b0, 1'b1, x[9:0], 3'b000};
    my = {1'b0, 1'b1, y[9:0], 3'b000};
    if (d > 13) begin
      my = 15'd1;  // only sticky survives
    end else if (d > 0) begin
      st = 1'b0;
      for (int i = 0; i < 14; i++) if (i < d) st = st | my[i];
      my = (my >> d) | {14'd0, st};
    end
    if (x[15] == y[15]) begin
      sum = mx + my;
      if (sum[14]) begin
        sum = (sum >> 1) | {14'd0, sum[0]};
        ex  = ex + 1;
      end
    end else begin
      sum = mx - my;
      if (sum == 15'd0) return FP16_ZERO;
      for (int i = 0; i < 14; i++) begin
        if (!sum[13]) begin
          sum = sum << 1;
          ex  = ex - 1;
        end
      end
    end
    return fp16_round_pack(x[15], ex, sum);
  endfunction

  function automatic fp16_t fp16_sub(fp16_t a, fp16_t b);
    return fp16_add(a, {~b[15], b[14:0]});
  endfunction

  // a / 2, exact unless the result underflows
  function automatic fp16_t fp16_half(fp16_t a);
    if (fp16_is_zero(a) || fp16_is_inf(a)) return a;
    if (a[14:10] == 5'd1) return {a[15], 15'h0000};
    return {a[15], a[14:10] - 5'd1, a[9:0]};
  endfunction

  // Unsigned integer (index count) to FP16, round-to-nearest-even.
  function automatic fp16_t fp16_from_uint(logic [15:0] u);
    int          msb;
    logic [31:0] w;
    logic [14:0] sig;
    if (u == 16'd0) return FP16_ZERO;
    msb = 0;
    for (int i = 0; i < 16; i++) if (u[i]) msb = i;
    // place the leading one at bit 13 of sig (sig = 1.mmmmmmmmmm g r s)
    w = {16'd0, u} << (29 - msb);  // leading one at bit 29
    sig = {1'b0, w[29:17], (|w[16:0])};
    return fp16_round_pack(1'b0, msb + 15, sig);
  endfunction

endpackage
