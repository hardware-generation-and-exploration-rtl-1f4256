// act_add: scalar adder of the configured activation data type.
//
// DTYPE = DT_FP16 instantiates the binary16 adder (fp16_add, W must be 16);
// DT_INT is a W-bit two's-complement adder that wraps modulo 2^W, i.e. the
// "adder of the activation type" without any widening. Purely combinational.
// Every Pre+ (LUT build), Post+ (reduction tree) and output-accumulator
// adder of the core is one of these.
module act_add #(
  parameter lut_pkg::dtype_e DTYPE = lut_pkg::DT_FP16,
  parameter int unsigned     W     = lut_pkg::dtype_width(DTYPE)
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] y
);

  if (DTYPE == lut_pkg::DT_FP16) begin : g_fp
    if (W != 16) begin : g_bad_w
      $error("act_add: FP16 needs W = 16");
    end
    fp16_add u_fp (.a(a), .b(b), .y(y));
  end else begin : g_int
    assign y = a + b;
  end

endmodule
