// lut_gemv_core: LUT-based ternary-weight GEMV engine (top level).
//
// Each cycle the core takes an input tile of n = L*MU activations and an
// encoded weight tile of n x K ternary weights (L x K keys, one per group of
// MU weights) and adds the K dot products of that tile into K output-
// stationary accumulators; its peak rate is n*K ternary multiply-adds per
// cycle.
//
//   act_tile ──> L x lut ───────── entries ──> K x fac_column ──> K x out_acc ──> out_data
//   wkey_tile ─> weight_buffer ─── keys ─────┘   (L FACs + tree)
//   in_valid, num_tiles ──> controller ──────────────────────── acc_valid/first, out_valid
//
// LUT l serves activations act_tile[l*MU +: MU] and is read by the K FACs of
// row l (spatial reuse of each LUT by K read-outs). A GEMV whose reduction
// length is num_tiles*n is streamed as num_tiles tiles; the result appears on
// out_data with a one-cycle out_valid pulse and stays there until the next
// GEMV's first tile is accumulated. out_data[k] is the dot product of the
// input vector with weight column k.
//
// Latency: out_valid rises LAT + 1 cycles after the last tile's in_valid,
// LAT = MU + 1 + clog2(L) (LUT build MU, FAC register 1, tree clog2(L)).
// No back-pressure; bubbles in in_valid are allowed.
//
// The defaults are the 32 x 32 FP16 configuration with group size 3; since
// 32 is not a multiple of 3, L = 11 LUTs give an input tile of 33.
// Synchronous active-low reset.
//
// Block structure, tile shape (n = L*MU by K) and output stationarity follow
// the source architecture; the port protocol is this design's own.
module lut_gemv_core #(
  parameter lut_pkg::dtype_e DTYPE = lut_pkg::DT_FP16,
  parameter int unsigned     W     = lut_pkg::dtype_width(DTYPE),
  parameter int unsigned     MU    = 3,
  parameter int unsigned     L     = 11,
  parameter int unsigned     K     = 32,
  parameter int unsigned     CNT_W = 16,
  localparam int unsigned    N     = L * MU,
  localparam int unsigned    NE    = lut_pkg::n_entries(MU),
  localparam int unsigned    KEY_W = lut_pkg::key_width(MU),
  localparam int unsigned    LAT   = MU + 1 + $clog2(L)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic [N-1:0][W-1:0]            act_tile,
  input  logic [L-1:0][K-1:0][KEY_W-1:0] wkey_tile,
  input  logic [CNT_W-1:0]               num_tiles,
  output logic                           out_valid,
  output logic [K-1:0][W-1:0]            out_data,
  output logic [CNT_W-1:0]               tile_idx
);

  logic [L-1:0][NE-1:0][W-1:0]    entries;
  logic [L-1:0]                   entries_valid;
  logic [L-1:0][K-1:0][KEY_W-1:0] keys_d;
  logic                           keys_valid;
  logic [K-1:0][W-1:0]            psum;
  logic [K-1:0]                   psum_valid;
  logic                           acc_valid, acc_first;

  // LUT build phase
  for (genvar l = 0; l < L; l++) begin : g_lut
    lut #(.DTYPE(DTYPE), .W(W), .MU(MU)) u_lut (
      .clk, .rst_n, .in_valid,
      .act(act_tile[l*MU +: MU]),
      .entries(entries[l]),
      .entries_valid(entries_valid[l]));
  end

  weight_buffer #(.L(L), .K(K), .KEY_W(KEY_W), .DEPTH(MU)) u_wbuf (
    .clk, .rst_n, .in_valid,
    .keys_in(wkey_tile), .keys_out(keys_d), .out_valid(keys_valid));

  // Fetch & accumulate phase
  for (genvar k = 0; k < K; k++) begin : g_col
    logic [L-1:0][KEY_W-1:0] col_keys;
    for (genvar l = 0; l < L; l++) begin : g_key
      assign col_keys[l] = keys_d[l][k];
    end
    fac_column #(.DTYPE(DTYPE), .W(W), .MU(MU), .L(L)) u_col (
      .clk, .rst_n,
      .in_valid(keys_valid),
      .entries(entries),
      .keys(col_keys),
      .psum(psum[k]),
      .psum_valid(psum_valid[k]));
    out_acc #(.DTYPE(DTYPE), .W(W)) u_acc (
      .clk, .rst_n,
      .in_valid(acc_valid), .first(acc_first),
      .psum(psum[k]), .acc(out_data[k]));
  end

  controller #(.LAT(LAT), .CNT_W(CNT_W)) u_ctrl (
    .clk, .rst_n, .in_valid, .num_tiles,
    .acc_valid, .acc_first, .out_valid, .tile_idx);

  // The controller's flag pipeline must track the datapath.
  a_lut_align: assert property (@(posedge clk) disable iff (!rst_n)
                                entries_valid == {L{keys_valid}});
  a_acc_align: assert property (@(posedge clk) disable iff (!rst_n)
                                psum_valid == {K{acc_valid}});

endmodule
