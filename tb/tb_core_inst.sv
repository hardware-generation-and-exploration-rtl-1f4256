// tb_core_inst: one lut_gemv_core instance at the given parameters with its
// tb_core_checker, reporting the checker's counts. Used to run the core in
// several configurations from one testbench.
module tb_core_inst #(
  parameter lut_pkg::dtype_e DTYPE = lut_pkg::DT_FP16,
  parameter int unsigned     W     = 16,
  parameter int unsigned     MU    = 3,
  parameter int unsigned     L     = 11,
  parameter int unsigned     K     = 32,
  parameter int unsigned     NG    = 6,
  parameter int unsigned     MAXT  = 5
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int unsigned N = L * MU, KW = lut_pkg::key_width(MU);

  logic rst_n, in_valid, out_valid;
  logic [N-1:0][W-1:0]         act_tile;
  logic [L-1:0][K-1:0][KW-1:0] wkey_tile;
  logic [15:0]                 num_tiles, tile_idx;
  logic [K-1:0][W-1:0]         out_data;

  lut_gemv_core #(.DTYPE(DTYPE), .W(W), .MU(MU), .L(L), .K(K)) dut (
    .clk, .rst_n, .in_valid, .act_tile, .wkey_tile, .num_tiles,
    .out_valid, .out_data, .tile_idx);

  tb_core_checker #(.DTYPE(DTYPE), .W(W), .MU(MU), .L(L), .K(K), .NG(NG), .MAXT(MAXT)) chk (
    .clk, .rst_n, .in_valid, .act_tile, .wkey_tile, .num_tiles,
    .out_valid, .out_data, .tile_idx, .done, .checks, .failures);
endmodule
