// lut_pkg: types, constants and constant functions shared by the ternary
// LUT-based GEMV core.
//
// Ternary weight groups of MU weights are indexed in base 3, term A (the
// first activation of the group) being the most significant digit, with the
// digit codes +1 -> 0, 0 -> 1, -1 -> 2. Index 0 is therefore +A+B+C..., and
// the first (3^MU-1)/2 indices are exactly the combinations whose leading
// non-zero weight is +1 (the "positive half"). Only those are stored in a
// LUT; the others are negations of a stored entry (index i and 3^MU-1-i are
// negatives of each other), and index (3^MU-1)/2 is the all-zero group.
//
// A weight group is stored as a key of KEY_W = SEL_W+1 bits: the MSB is the
// symmetry (invert) flag, the low SEL_W bits select a LUT entry. The select
// value (3^MU-1)/2, one past the last entry, encodes the all-zero group.
// SEL_W = clog2((3^MU-1)/2 + 1), which equals ceil(log2((3^MU-1)/2)) for the
// group sizes of practical interest (MU >= 3) and adds the one bit needed to
// tell all 3^MU groups apart for MU = 1 and 2.
package lut_pkg;

  // Activation (adder) data type.
  typedef enum logic [0:0] {
    DT_INT  = 1'b0,   // W-bit two's complement, wrapping arithmetic
    DT_FP16 = 1'b1    // IEEE-754 binary16
  } dtype_e;

  // Ternary weight as used by the offline encoder.
  typedef enum logic [1:0] {
    TW_ZERO = 2'd0,
    TW_POS  = 2'd1,
    TW_NEG  = 2'd2
  } tern_e;

  localparam int unsigned MAX_MU = 6;

  function automatic int unsigned pow3(input int unsigned e);
    int unsigned r;
    r = 1;
    for (int unsigned i = 0; i < e; i++) r = r * 3;
    return r;
  endfunction

  // Number of stored LUT entries for group size mu.
  function automatic int unsigned n_entries(input int unsigned mu);
    return (pow3(mu) - 1) / 2;
  endfunction

  // Select width of a key (see header).
  function automatic int unsigned sel_width(input int unsigned mu);
    return $clog2(n_entries(mu) + 1);
  endfunction

  function automatic int unsigned key_width(input int unsigned mu);
    return sel_width(mu) + 1;
  endfunction

  // Default data width of an activation type.
  function automatic int unsigned dtype_width(input dtype_e dt);
    return (dt == DT_FP16) ? 16 : 8;
  endfunction

  // Offline weight encoding of one group (w[0] is the weight of term A).
  // Returns {sym, sel} right-aligned in a 32-bit word.
  function automatic logic [31:0] encode_group(input tern_e w[MAX_MU],
                                               input int unsigned mu);
    int unsigned t, h, sel;
    logic sym;
    t = 0;
    for (int unsigned k = 0; k < mu; k++) begin
      t = t * 3 + ((w[k] == TW_POS) ? 0 : (w[k] == TW_ZERO) ? 1 : 2);
    end
    h = n_entries(mu);
    if (t < h) begin
      sym = 1'b0; sel = t;
    end else if (t == h) begin
      sym = 1'b0; sel = h;            // all-zero group
    end else begin
      sym = 1'b1; sel = pow3(mu) - 1 - t;
    end
    return 32'((sym ? (1 << sel_width(mu)) : 0) | sel);
  endfunction

endpackage
