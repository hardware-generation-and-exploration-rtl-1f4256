// tb_bitnet_gemv: long GEMVs on the default core (FP16, group size 3,
// 11 LUTs, 32 columns). The reduction length is that of the FFN
// down-projection of a 3B-parameter BitNet b1.58 model, 8640 inputs, i.e.
// ceil(8640 / 33) = 262 tiles; one 32-column slice of the 3200 outputs is
// computed per GEMV. Three GEMVs run back to back (262, 1 and 262 tiles)
// with bubbles, every output word and the result cycle are checked against
// the reference model. The padding rows of the last tile are ordinary random
// data here, which does not change what is checked.
module tb_bitnet_gemv;
  import lut_pkg::*;
  localparam int unsigned MU = 3, L = 11, K = 32, W = 16;
  localparam int unsigned N = L * MU, KW = key_width(MU);
  localparam int unsigned TILES = (8640 + N - 1) / N;

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

  tb_core_checker #(.DTYPE(DT_FP16), .W(W), .MU(MU), .L(L), .K(K), .NG(3),
                    .MAXT(TILES), .MINT(TILES)) chk (
    .clk, .rst_n, .in_valid, .act_tile, .wkey_tile, .num_tiles,
    .out_valid, .out_data, .tile_idx, .done, .checks, .failures);

  initial begin
    repeat (4000) @(posedge clk);
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
