// fp16_add: IEEE-754 binary16 adder, single cycle, combinational.
//
// Used as the scalar adder for FP16 activations (LUT build adders, reduction
// tree, output accumulator). The operands are unpacked with the hidden bit
// (subnormals use exponent 1 and hidden bit 0), swapped so that the larger
// magnitude comes first, and the smaller one is aligned with guard, round and
// sticky bits below its 11-bit mantissa. After the add or
// subtract the result is normalised (left shifts are limited so that
// subnormal results keep exponent 1), rounded to nearest, ties to even, and
// packed; exponent overflow gives infinity.
//
// Special values: any NaN operand or inf-inf gives the canonical quiet NaN
// 16'h7E00; an infinite operand otherwise passes through. Exact cancellation
// gives +0 and (-0)+(-0) gives -0, as IEEE-754 prescribes for round to
// nearest.
//
// The accelerator this core follows takes its floating-point units from an
// external library and does not describe them; this adder is this design's
// own implementation of the standard operation.
module fp16_add (
  input  logic [15:0] a,
  input  logic [15:0] b,
  output logic [15:0] y
);

  always_comb begin
    logic        sa, sb, sx, sy, sub, rnd_up, sticky_al;
    logic [4:0]  ea, eb, ex, ey, d;
    logic [5:0]  e;
    logic [3:0]  lz, shl;
    logic [10:0] ma, mb, mx, my;
    logic [13:0] xw, yw, lost;
    logic [14:0] sum;
    logic [13:0] nrm;
    logic [11:0] m12;
    logic        a_nan, b_nan, a_inf, b_inf;

    sa = a[15]; ea = a[14:10];
    sb = b[15]; eb = b[14:10];
    a_nan = (ea == 5'h1f) && (a[9:0] != 0);
    b_nan = (eb == 5'h1f) && (b[9:0] != 0);
    a_inf = (ea == 5'h1f) && (a[9:0] == 0);
    b_inf = (eb == 5'h1f) && (b[9:0] == 0);
    ma = {ea != 0, a[9:0]};
    mb = {eb != 0, b[9:0]};

    // larger magnitude first; subnormals use exponent 1
    if ({ea, a[9:0]} >= {eb, b[9:0]}) begin
      sx = sa; mx = ma; ex = (ea == 0) ? 5'd1 : ea;
      sy = sb; my = mb; ey = (eb == 0) ? 5'd1 : eb;
    end else begin
      sx = sb; mx = mb; ex = (eb == 0) ? 5'd1 : eb;
      sy = sa; my = ma; ey = (ea == 0) ? 5'd1 : ea;
    end
    sub = sx ^ sy;
    d   = ex - ey;

    // align the smaller operand: 11 mantissa bits + guard, round, sticky
    lost = '0;
    if (d >= 5'd14) begin
      yw        = '0;
      sticky_al = (my != 0);
    end else begin
      yw        = {my, 3'b000} >> d;
      lost      = {my, 3'b000} & ((14'd1 << d) - 14'd1);
      sticky_al = (lost != 0);
    end
    yw[0] = yw[0] | sticky_al;
    xw    = {mx, 3'b000};
    sum   = sub ? ({1'b0, xw} - {1'b0, yw}) : ({1'b0, xw} + {1'b0, yw});

    // leading zeros below the carry bit (bit 13 is the hidden-bit position)
    lz = 4'd14;
    for (int i = 0; i < 14; i++) if (sum[i]) lz = 4'(13 - i);

    nrm    = sum[13:0];
    e      = {1'b0, ex};
    shl    = '0;
    rnd_up = 1'b0;
    m12    = '0;
    y      = '0;

    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) begin
      y = 16'h7e00;
    end else if (a_inf) begin
      y = a;
    end else if (b_inf) begin
      y = b;
    end else if (sum == '0) begin
      y = {(sa & sb), 15'b0};
    end else begin
      if (sum[14]) begin
        nrm = {sum[14:2], sum[1] | sum[0]};
        e   = {1'b0, ex} + 6'd1;
      end else begin
        // normalise, but never below exponent 1 (subnormal result)
        shl = ({1'b0, lz} > (ex - 5'd1)) ? 4'(ex - 5'd1) : lz;
        nrm = sum[13:0] << shl;
        e   = {1'b0, ex} - {2'b0, shl};
      end
      rnd_up = nrm[2] && ((nrm[1:0] != 0) || nrm[3]);
      m12    = {1'b0, nrm[13:3]} + {11'b0, rnd_up};
      if (m12[11]) begin
        m12 = m12 >> 1;
        e   = e + 6'd1;
      end
      if (e >= 6'd31) y = {sx, 5'h1f, 10'b0};
      else            y = {sx, (m12[10] ? e[4:0] : 5'd0), m12[9:0]};
    end
  end

endmodule
