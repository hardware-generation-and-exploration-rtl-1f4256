// tb_ref_pkg: reference arithmetic for the testbenches, written
// independently of the RTL.
//
// FP16 values are converted to `real` (double), added there - the exact sum
// of two binary16 numbers always fits a double - and rounded back to
// binary16 with round-to-nearest-even by plain arithmetic (scaling and
// floor), so the reference shares no code with the RTL adder. Integer types
// use W-bit wrapping arithmetic. On top of the scalar operations the package
// models a LUT group read-out, the column reduction tree and random stimulus.
package tb_ref_pkg;
  import lut_pkg::*;

  function automatic real pow2(input int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp16_to_real(input logic [15:0] h);
    real mag;
    int  e;
    e = int'(h[14:10]);
    if (e == 0) mag = real'(h[9:0]) * pow2(-24);
    else        mag = real'(1024 + int'(h[9:0])) * pow2(e - 25);
    return h[15] ? -mag : mag;
  endfunction

  function automatic logic [15:0] real_to_fp16(input real r);
    logic [63:0] bits;
    logic        s;
    real         a, q, fr;
    int          e, m;
    bits = $realtobits(r);
    s    = bits[63];
    a    = s ? -r : r;
    if (a == 0.0) return {s, 15'b0};
    if (a < pow2(-14)) begin
      q  = a * pow2(24);
      m  = $rtoi(q);
      fr = q - real'(m);
      if (fr > 0.5 || (fr == 0.5 && (m % 2) == 1)) m = m + 1;
      return {s, 15'(m)};
    end
    e = -14;
    while (e < 16 && a >= pow2(e + 1)) e = e + 1;
    if (e > 15) return {s, 5'h1f, 10'b0};
    q  = a / pow2(e - 10);
    m  = $rtoi(q);
    fr = q - real'(m);
    if (fr > 0.5 || (fr == 0.5 && (m % 2) == 1)) m = m + 1;
    if (m == 2048) begin
      m = 1024;
      e = e + 1;
    end
    if (e > 15) return {s, 5'h1f, 10'b0};
    return {s, 5'(e + 15), 10'(m - 1024)};
  endfunction

  // scalar add / negate of the activation type (values right-aligned in 16 bits)
  function automatic logic [15:0] ref_add(input dtype_e dt, input int w,
                                          input logic [15:0] a, input logic [15:0] b);
    if (dt == DT_FP16) return real_to_fp16(fp16_to_real(a) + fp16_to_real(b));
    return 16'((int'(a) + int'(b)) % (1 << w));
  endfunction

  function automatic logic [15:0] ref_neg(input dtype_e dt, input int w,
                                          input logic [15:0] a);
    if (dt == DT_FP16) return {~a[15], a[14:0]};
    return 16'(((1 << w) - int'(a)) % (1 << w));
  endfunction

  // Partial sum of one ternary group: the terms are added left to right,
  // zero weights skipped. A group whose leading non-zero weight is -1 is
  // produced as the negation of its mirrored group, which is how the
  // hardware obtains it (symmetry); the all-zero group is +0.
  function automatic logic [15:0] ref_group(input dtype_e dt, input int w,
                                            input tern_e wt[MAX_MU],
                                            input logic [15:0] x[MAX_MU],
                                            input int mu);
    logic [15:0] acc;
    logic        started, flip;
    started = 1'b0;
    flip    = 1'b0;
    acc     = '0;
    for (int k = 0; k < mu; k++) begin
      if (wt[k] != TW_ZERO) begin
        if (!started) begin
          flip    = (wt[k] == TW_NEG);
          acc     = x[k];
          started = 1'b1;
        end else begin
          // sign relative to the leading weight
          acc = ref_add(dt, w, acc, ((wt[k] == TW_NEG) != flip) ? ref_neg(dt, w, x[k]) : x[k]);
        end
      end
    end
    return flip ? ref_neg(dt, w, acc) : acc;
  endfunction

  // Entry i of a LUT: the group whose base-3 index is i (digits +,0,- = 0,1,2).
  function automatic void index_to_group(input int idx, input int mu, output tern_e wt[MAX_MU]);
    int t;
    t = idx;
    for (int k = MAX_MU - 1; k >= 0; k--) wt[k] = TW_ZERO;
    for (int k = mu - 1; k >= 0; k--) begin
      wt[k] = (t % 3 == 0) ? TW_POS : (t % 3 == 1) ? TW_ZERO : TW_NEG;
      t = t / 3;
    end
  endfunction

  // Reduction over n values: neighbours paired level by level, odd last passed on.
  function automatic logic [15:0] ref_tree(input dtype_e dt, input int w,
                                           input logic [15:0] v[64], input int n);
    logic [15:0] t[64];
    int          cnt;
    t   = v;
    cnt = n;
    while (cnt > 1) begin
      for (int i = 0; i < cnt / 2; i++) t[i] = ref_add(dt, w, t[2*i], t[2*i+1]);
      if (cnt % 2 == 1) t[cnt/2] = t[cnt-1];
      cnt = (cnt + 1) / 2;
    end
    return t[0];
  endfunction

  function automatic tern_e rand_tern();
    int unsigned r;
    r = $urandom_range(2);
    return (r == 0) ? TW_ZERO : (r == 1) ? TW_POS : TW_NEG;
  endfunction

  // Random activation: FP16 with magnitude in [2^-6, 2^2), or a random W-bit integer.
  function automatic logic [15:0] rand_act(input dtype_e dt, input int w);
    if (dt == DT_FP16)
      return {1'($urandom_range(1)), 5'($urandom_range(15 + 1, 9)), 10'($urandom)};
    return 16'($urandom) & 16'((1 << w) - 1);
  endfunction

endpackage
