// lut: one lookup table of the core - the LUT build network and the LUT
// entry register.
//
// From MU activations (act[0] = term A, act[1] = B, ...) it forms the
// (3^MU-1)/2 "positive-half" ternary combinations, in base-3 index order
// (digit codes +1 -> 0, 0 -> 1, -1 -> 2, term A most significant; index 0 is
// +A+B+C). The negative half is never built: a FAC unit obtains it by
// inverting the mirrored entry (symmetry reduction).
//
// The build network adds one term per pipeline level. Level j holds the
// (3^j-1)/2 positive-half combinations of the first j terms. An entry of
// level j+1 with prefix index i and new digit d is
//     d = +1 : prefix_i + X      (one adder)
//     d =  0 : prefix_i          (no adder, sparsity)
//     d = -1 : prefix_i + (-X)   (one adder)
// and the single combination whose prefix is all zero is X itself (no
// adder). Every partial sum is thus computed once and shared by all entries
// that extend it (redundancy elimination). Level j+1 needs 3^j-1 adders,
// 10 in total for MU = 3 and 36 for MU = 4.
//
// Timing: level 1 is the input register, each further level is one adder
// stage followed by a register, and the register of level MU is the LUT
// entry register. entries is valid MU cycles after in_valid
// (entries_valid), a new build can start every cycle, and every register is
// loaded only when its stage carries valid data, so entries hold their value
// through bubbles. Synchronous, active-low reset clears the valid bits.
//
// The three reductions (symmetry, redundancy, sparsity) and the index order
// follow the source architecture; the placement of the pipeline registers is
// this design's choice.
module lut #(
  parameter lut_pkg::dtype_e DTYPE = lut_pkg::DT_FP16,
  parameter int unsigned     W     = lut_pkg::dtype_width(DTYPE),
  parameter int unsigned     MU    = 3,
  localparam int unsigned    NE    = lut_pkg::n_entries(MU)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [MU-1:0][W-1:0] act,
  output logic [NE-1:0][W-1:0] entries,
  output logic                entries_valid
);

  // st_e[j]: entries of level j+1 (only the first n_entries(j+1) are used)
  // st_a[j]: activations still to be added, carried along the pipeline
  logic [NE-1:0][W-1:0] st_e [MU];
  logic [MU-1:0][W-1:0] st_a [MU];
  logic [MU-1:0]        st_v;

  // level 1: input register, the only entry is +A
  always_ff @(posedge clk) begin
    if (!rst_n) st_v[0] <= 1'b0;
    else        st_v[0] <= in_valid;
    if (in_valid) begin
      st_a[0]    <= act;
      st_e[0]    <= '0;
      st_e[0][0] <= act[0];
    end
  end

  for (genvar j = 1; j < MU; j++) begin : g_lvl
    localparam int unsigned NP = lut_pkg::n_entries(j);      // prefix entries
    localparam int unsigned NN = lut_pkg::n_entries(j + 1);  // new entries
    logic [W-1:0]          x, x_neg;
    logic [NN-1:0][W-1:0]  nxt;

    assign x = st_a[j-1][j];
    act_neg #(.DTYPE(DTYPE), .W(W)) u_neg (.x(x), .y(x_neg));

    for (genvar i = 0; i < NP; i++) begin : g_pref
      act_add #(.DTYPE(DTYPE), .W(W)) u_pos (.a(st_e[j-1][i]), .b(x),     .y(nxt[3*i]));
      assign nxt[3*i+1] = st_e[j-1][i];
      act_add #(.DTYPE(DTYPE), .W(W)) u_neg (.a(st_e[j-1][i]), .b(x_neg), .y(nxt[3*i+2]));
    end
    assign nxt[3*NP] = x;   // all-zero prefix followed by +X

    always_ff @(posedge clk) begin
      if (!rst_n) st_v[j] <= 1'b0;
      else        st_v[j] <= st_v[j-1];
      if (st_v[j-1]) begin
        st_a[j]       <= st_a[j-1];
        st_e[j]       <= '0;
        st_e[j][NN-1:0] <= nxt;
      end
    end
  end

  assign entries       = st_e[MU-1];
  assign entries_valid = st_v[MU-1];

endmodule
