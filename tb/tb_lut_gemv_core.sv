// tb_lut_gemv_core: end-to-end test of the core at its default parameters
// (FP16, group size 3, 11 LUTs, 32 columns): eight GEMVs of up to six tiles,
// streamed back to back with bubbles, checked against the reference model of
// tb_core_checker, including the result latency.
module tb_lut_gemv_core;
  import lut_pkg::*;
  localparam int unsigned MU = 3, L = 11, K = 32, W = 16;
  localparam int unsigned N = L * MU, KW = key_width(MU);

  logic clk = 0, rst_n, in_valid, out_valid, done;
  logic [N-1:0][W-1:0]         act_tile;
  logic [L-1:0][K-1:0][KW-1:0] wkey_tile;
  logic [15:0]                 num_tiles, tile_idx;
  logic [K-1:0][W-1:0]         out_data;
  int checks, failures;
  always #5 clk = ~clk;

  lut_gemv_core dut (
    .clk, .rst_n, .in_valid, .act_tile, .wkey_tile, .num_tiles,
    .out_valid, .out_data, .tile_idx);

  tb_core_checker #(.DTYPE(DT_FP16), .W(W), .MU(MU), .L(L), .K(K), .NG(8), .MAXT(6)) chk (
    .clk, .rst_n, .in_valid, .act_tile, .wkey_tile, .num_tiles,
    .out_valid, .out_data, .tile_idx, .done, .checks, .failures);

  initial begin
    repeat (2000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
