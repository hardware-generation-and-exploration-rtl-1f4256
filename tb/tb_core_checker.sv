// tb_core_checker: stimulus and scoreboard for a whole lut_gemv_core.
//
// It resets the core, then streams NG GEMVs back to back (lengths MINT..MAXT
// tiles, except the second one, which is always a single tile) with random bubbles. Every
// tile carries random activations and random ternary weights, encoded with
// the offline key encoding. A reference model computes each column's tile
// sum as the pairwise-tree reduction of the L group partial sums and
// accumulates it over the GEMV (load on the first tile). Each result must
// appear on out_data with out_valid exactly LAT+1 cycles after the GEMV's
// last tile was presented, and out_valid must never pulse otherwise.
//
// It counts how often each mechanism of the core was exercised: mirrored
// (sign-flipped) LUT reads, all-zero weight groups, input bubbles,
// single-tile and multi-tile accumulation, and GEMVs that enter while the
// previous result is still in the pipeline; a mechanism never seen counts
// as a failure. The DUT is instantiated by the enclosing testbench.
module tb_core_checker #(
  parameter lut_pkg::dtype_e DTYPE = lut_pkg::DT_FP16,
  parameter int unsigned     W     = 16,
  parameter int unsigned     MU    = 3,
  parameter int unsigned     L     = 11,
  parameter int unsigned     K     = 32,
  parameter int unsigned     NG    = 8,
  parameter int unsigned     MAXT  = 6,
  parameter int unsigned     MINT  = 2,
  localparam int unsigned    N     = L * MU,
  localparam int unsigned    KW    = lut_pkg::key_width(MU),
  localparam int unsigned    LAT   = MU + 1 + $clog2(L)
) (
  input  logic                        clk,
  output logic                        rst_n,
  output logic                        in_valid,
  output logic [N-1:0][W-1:0]         act_tile,
  output logic [L-1:0][K-1:0][KW-1:0] wkey_tile,
  output logic [15:0]                 num_tiles,
  input  logic                        out_valid,
  input  logic [K-1:0][W-1:0]         out_data,
  input  logic [15:0]                 tile_idx,
  output logic                        done,
  output int                          checks,
  output int                          failures
);
  import lut_pkg::*;
  import tb_ref_pkg::*;

  typedef struct {
    int          due;
    logic [15:0] val [K];
  } result_t;

  result_t     pending [$];
  logic [15:0] model [K];
  int n_sym = 0, n_zero = 0, n_bubble = 0, n_single = 0, n_multi = 0, n_overlap = 0, n_results = 0;

  task automatic make_tile(input logic first);
    tern_e       wt [MAX_MU];
    logic [15:0] x  [L][MAX_MU];
    logic [15:0] v  [64];
    logic [15:0] ts;
    logic [31:0] key;
    for (int l = 0; l < L; l++) begin
      for (int k = 0; k < MAX_MU; k++) x[l][k] = (k < MU) ? rand_act(DTYPE, W) : 16'h0;
      for (int k = 0; k < MU; k++) act_tile[l*MU + k] = W'(x[l][k]);
    end
    for (int i = 0; i < 64; i++) v[i] = '0;
    for (int c = 0; c < K; c++) begin
      for (int l = 0; l < L; l++) begin
        for (int k = 0; k < MAX_MU; k++) wt[k] = (k < MU) ? rand_tern() : TW_ZERO;
        // now and then a whole group of zeros
        if ($urandom_range(15) == 0) for (int k = 0; k < MU; k++) wt[k] = TW_ZERO;
        key = encode_group(wt, MU);
        wkey_tile[l][c] = KW'(key);
        if (key[sel_width(MU)]) n_sym++;
        if (int'(key[sel_width(MU)-1:0]) == int'(n_entries(MU))) n_zero++;
        v[l] = ref_group(DTYPE, W, wt, x[l], MU);
      end
      ts = ref_tree(DTYPE, W, v, L);
      model[c] = first ? ts : ref_add(DTYPE, W, model[c], ts);
    end
  endtask

  initial begin
    int      g, t, len, c;
    result_t r;
    logic    bad;
    done = 0; checks = 0; failures = 0;
    rst_n = 0; in_valid = 0; act_tile = '0; wkey_tile = '0; num_tiles = 16'd1;
    g = 0; t = 0; len = 0; c = 0;
    while (g < NG || pending.size() != 0) begin
      @(negedge clk);
      // outputs after edge c-1
      if (rst_n) begin
        checks++;
        if (out_valid) begin
          if (pending.size() == 0) begin
            failures++;
            $display("FAIL cycle %0d: unexpected out_valid", c);
          end else begin
            r = pending.pop_front();
            n_results++;
            if (r.due != c) begin
              failures++;
              $display("FAIL cycle %0d: result due at cycle %0d", c, r.due);
            end
            bad = 1'b0;
            for (int k = 0; k < K; k++) begin
              checks++;
              if (16'(out_data[k]) !== r.val[k]) begin
                failures++;
                bad = 1'b1;
                if (failures < 10) $display("FAIL result %0d column %0d: %h expected %h", n_results, k, out_data[k], r.val[k]);
              end
            end
          end
        end else if (pending.size() != 0 && pending[0].due == c) begin
          failures++;
          $display("FAIL cycle %0d: result missing", c);
          void'(pending.pop_front());
        end
      end
      // inputs for edge c
      rst_n     = (c >= 3);
      in_valid  = 1'b0;
      num_tiles = 16'($urandom_range(40, 1));       // only sampled at a first tile
      if (rst_n && g < NG) begin
        if (t > 0 && $urandom_range(4) == 0) begin
          n_bubble++;
        end else begin
          if (t == 0) begin
            len = (g == 1) ? 1 : $urandom_range(MAXT, MINT);
            num_tiles = 16'(len);
            if (pending.size() != 0) n_overlap++;
            if (len == 1) n_single++; else n_multi++;
          end
          checks++;
          if (tile_idx !== 16'(t)) begin
            failures++;
            $display("FAIL cycle %0d: tile_idx %0d expected %0d", c, tile_idx, t);
          end
          in_valid = 1'b1;
          make_tile(t == 0);
          t++;
          if (t == len) begin
            r.due = c + LAT + 1;
            for (int k = 0; k < K; k++) r.val[k] = model[k];
            pending.push_back(r);
            t = 0;
            g++;
          end
        end
      end
      c++;
    end
    $display("mechanisms: mirrored reads %0d, zero groups %0d, bubbles %0d, single-tile %0d, multi-tile %0d, overlapped GEMVs %0d, results %0d",
             n_sym, n_zero, n_bubble, n_single, n_multi, n_overlap, n_results);
    checks++;
    if (n_sym == 0 || n_zero == 0 || n_bubble == 0 || n_single == 0 || n_multi == 0 ||
        n_overlap == 0 || n_results != NG) begin
      failures++;
      $display("FAIL: a mechanism was never exercised or results are missing");
    end
    done = 1;
  end
endmodule
