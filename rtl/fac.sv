// fac: the read-out part of one Fetch-and-Accumulate unit.
//
// The Fetch MUX picks LUT entry key[SEL_W-1:0] out of the (3^MU-1)/2 entries
// of one LUT; an inverter (act_neg) forms its negation and the Inv. MUX,
// steered by the key's symmetry bit key[SEL_W], passes either the entry or
// its negation. A select value of (3^MU-1)/2 or more (the all-zero weight
// group) yields +0. The adder that follows each FAC in the column is part of
// fac_column's reduction tree. Purely combinational.
//
// Fetch MUX, inverter and Inv. MUX follow the source architecture; the +0
// output for the all-zero select value is this design's own encoding choice.
module fac #(
  parameter lut_pkg::dtype_e DTYPE = lut_pkg::DT_FP16,
  parameter int unsigned     W     = lut_pkg::dtype_width(DTYPE),
  parameter int unsigned     MU    = 3,
  localparam int unsigned    NE    = lut_pkg::n_entries(MU),
  localparam int unsigned    SEL_W = lut_pkg::sel_width(MU),
  localparam int unsigned    KEY_W = SEL_W + 1
) (
  input  logic [NE-1:0][W-1:0] entries,
  input  logic [KEY_W-1:0]     key,
  output logic [W-1:0]         y
);

  logic [SEL_W-1:0] sel;
  logic             sym;
  logic [W-1:0]     fetched, inverted;

  assign sel = key[SEL_W-1:0];
  assign sym = key[SEL_W];

  // Fetch MUX
  always_comb begin
    fetched = '0;
    for (int unsigned i = 0; i < NE; i++) begin
      if (sel == SEL_W'(i)) fetched = entries[i];
    end
  end

  act_neg #(.DTYPE(DTYPE), .W(W)) u_inv (.x(fetched), .y(inverted));

  // Inv. MUX
  assign y = sym ? inverted : fetched;

endmodule
