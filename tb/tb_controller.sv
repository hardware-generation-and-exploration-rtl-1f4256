// tb_controller: a stream of GEMVs of random length (1..6 tiles, one of
// them a single-tile GEMV) with bubbles. A behavioural model counts tiles
// and delays the flags by LAT; acc_valid/acc_first must match it every
// cycle and out_valid must pulse exactly LAT+1 cycles after each GEMV's
// last tile. tile_idx must count the tiles of the current GEMV.
module tb_controller;
  localparam int unsigned LAT = 8;
  logic clk = 0, rst_n, v;
  logic [15:0] nt, tidx;
  logic acc_valid, acc_first, out_valid;
  logic hv [3000], hf [3000], hl [3000];
  int checks = 0, failures = 0, n_out = 0, n_exp_out = 0, n_single = 0;
  always #5 clk = ~clk;

  controller #(.LAT(LAT), .CNT_W(16)) dut (
    .clk, .rst_n, .in_valid(v), .num_tiles(nt),
    .acc_valid, .acc_first, .out_valid, .tile_idx(tidx));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt, len;
    rst_n = 0; v = 0; nt = 1;
    cnt = 0; len = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      if (c >= LAT + 5) begin
        checks += 3;
        if (acc_valid !== hv[c-LAT] || acc_first !== (hv[c-LAT] && hf[c-LAT])) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d acc_valid=%b first=%b", c, acc_valid, acc_first);
        end
        if (out_valid !== (hv[c-LAT-1] && hl[c-LAT-1])) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d out_valid=%b", c, out_valid);
        end
        if (out_valid) n_out++;
        if (tidx !== 16'(cnt)) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d tile_idx=%0d expected %0d", c, tidx, cnt);
        end
      end
      rst_n = (c >= 3);
      v     = rst_n && (c < 2900) && ($urandom_range(3) != 0);
      if (cnt == 0) begin
        len = (n_exp_out == 2) ? 1 : $urandom_range(6, 1);
        nt  = 16'(len);
      end else begin
        nt  = 16'($urandom_range(9, 1));   // ignored mid-GEMV
      end
      hv[c] = v;
      hf[c] = v && (cnt == 0);
      hl[c] = v && (cnt == len - 1);
      if (v) begin
        if (cnt == len - 1) begin
          cnt = 0;
          n_exp_out++;
          if (len == 1) n_single++;
        end else begin
          cnt++;
        end
      end
    end
    checks++;
    if (n_out != n_exp_out || n_single == 0) begin
      failures++;
      $display("FAIL %0d results, expected %0d (single-tile GEMVs %0d)", n_out, n_exp_out, n_single);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
