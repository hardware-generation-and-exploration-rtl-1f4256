// fac_column: one output column of the FAC array.
//
// L FAC units, one per LUT, read this column's L weight keys against the L
// LUTs; their outputs are registered and then summed by a pipelined Post+
// reduction tree into the column's partial sum for the current tile. The
// tree pairs neighbours at each level ((0+1), (2+3), ...; an odd last value
// passes unchanged to the next level) and registers every level, so the
// result order of the additions is fixed and known.
//
// Timing: psum is valid 1 + clog2(L) cycles after in_valid (TREE_LAT); one
// tile per cycle. Registers load only when their stage is valid.
// Synchronous active-low reset clears the valid bits.
//
// The reduction tree follows the source architecture's description; its
// pairing order and registers are this design's choice.
module fac_column #(
  parameter lut_pkg::dtype_e DTYPE = lut_pkg::DT_FP16,
  parameter int unsigned     W     = lut_pkg::dtype_width(DTYPE),
  parameter int unsigned     MU    = 3,
  parameter int unsigned     L     = 11,
  localparam int unsigned    NE    = lut_pkg::n_entries(MU),
  localparam int unsigned    KEY_W = lut_pkg::key_width(MU),
  localparam int unsigned    LV    = $clog2(L)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [L-1:0][NE-1:0][W-1:0]   entries,
  input  logic [L-1:0][KEY_W-1:0]       keys,
  output logic [W-1:0]                  psum,
  output logic                          psum_valid
);

  // tr[l][i]: value i of tree level l (level 0 = registered FAC outputs)
  logic [L-1:0][W-1:0] tr [LV+1];
  logic [LV:0]         tv;
  logic [L-1:0][W-1:0] fac_y;

  for (genvar l = 0; l < L; l++) begin : g_fac
    fac #(.DTYPE(DTYPE), .W(W), .MU(MU)) u_fac (
      .entries(entries[l]), .key(keys[l]), .y(fac_y[l]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) tv[0] <= 1'b0;
    else        tv[0] <= in_valid;
    if (in_valid) tr[0] <= fac_y;
  end

  for (genvar lv = 1; lv <= LV; lv++) begin : g_lvl
    localparam int unsigned NI = (L + (1 << (lv - 1)) - 1) >> (lv - 1);  // inputs
    localparam int unsigned NO = (NI + 1) / 2;                           // outputs
    logic [NO-1:0][W-1:0] s;
    for (genvar i = 0; i < NI / 2; i++) begin : g_add
      act_add #(.DTYPE(DTYPE), .W(W)) u_add (
        .a(tr[lv-1][2*i]), .b(tr[lv-1][2*i+1]), .y(s[i]));
    end
    if (NI % 2 == 1) begin : g_pass
      assign s[NO-1] = tr[lv-1][NI-1];
    end
    always_ff @(posedge clk) begin
      if (!rst_n) tv[lv] <= 1'b0;
      else        tv[lv] <= tv[lv-1];
      if (tv[lv-1]) begin
        tr[lv]        <= '0;
        tr[lv][NO-1:0] <= s;
      end
    end
  end

  assign psum       = tr[LV][0];
  assign psum_valid = tv[LV];

endmodule
