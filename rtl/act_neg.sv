// act_neg: sign inversion of one activation-type value.
//
// For FP16 this flips the sign bit (a wire-level inverter); for integer
// types it is two's-complement negation (~x + 1), which needs an
// incrementer. Combinational. Used by the LUT build network for "-C" terms
// and by the FAC units to produce the mirrored half of a LUT.
module act_neg #(
  parameter lut_pkg::dtype_e DTYPE = lut_pkg::DT_FP16,
  parameter int unsigned     W     = lut_pkg::dtype_width(DTYPE)
) (
  input  logic [W-1:0] x,
  output logic [W-1:0] y
);

  if (DTYPE == lut_pkg::DT_FP16) begin : g_fp
    assign y = {~x[W-1], x[W-2:0]};
  end else begin : g_int
    assign y = ~x + W'(1);
  end

endmodule
