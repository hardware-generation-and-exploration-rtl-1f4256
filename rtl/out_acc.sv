// out_acc: one output buffer entry - the Post+ accumulator adder and the
// word-sized output register it feeds back from.
//
// The core is output stationary: each column's partial sum of every tile is
// added into this register until the whole reduction dimension has been
// processed. On a tile flagged `first` the register loads the partial sum
// instead of adding it, so consecutive GEMVs need no clear cycle.
//
// Timing: acc shows the new value the cycle after in_valid. Synchronous
// active-low reset clears the register to 0.
//
// Accumulator and output register follow the source architecture; the
// load-on-first restart is this design's choice.
module out_acc #(
  parameter lut_pkg::dtype_e DTYPE = lut_pkg::DT_FP16,
  parameter int unsigned     W     = lut_pkg::dtype_width(DTYPE)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic         first,
  input  logic [W-1:0] psum,
  output logic [W-1:0] acc
);

  logic [W-1:0] sum;

  act_add #(.DTYPE(DTYPE), .W(W)) u_add (.a(acc), .b(psum), .y(sum));

  always_ff @(posedge clk) begin
    if (!rst_n)        acc <= '0;
    else if (in_valid) acc <= first ? psum : sum;
  end

endmodule
