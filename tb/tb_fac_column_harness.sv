// tb_fac_column_harness: drives one fac_column with a random stream of
// L LUT entry sets and key vectors (with bubbles) and checks each cycle that
// psum_valid follows in_valid by exactly 1 + clog2(L) cycles and that psum
// equals the reference: the L group partial sums reduced by the pairwise
// tree. Reports its counts through ports.
module tb_fac_column_harness #(
  parameter lut_pkg::dtype_e DTYPE = lut_pkg::DT_FP16,
  parameter int unsigned     W     = 16,
  parameter int unsigned     MU    = 3,
  parameter int unsigned     L     = 11,
  parameter int unsigned     NC    = 300
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  import lut_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned NE  = n_entries(MU);
  localparam int unsigned KW  = key_width(MU);
  localparam int unsigned LAT = 1 + $clog2(L);

  logic                         rst_n, in_valid, psum_valid;
  logic [L-1:0][NE-1:0][W-1:0]  entries;
  logic [L-1:0][KW-1:0]         keys;
  logic [W-1:0]                 psum;
  logic                         hv [NC];
  logic [15:0]                  hs [NC];

  fac_column #(.DTYPE(DTYPE), .W(W), .MU(MU), .L(L)) dut (
    .clk, .rst_n, .in_valid, .entries, .keys, .psum, .psum_valid);

  initial begin
    tern_e       wt [MAX_MU], ge [MAX_MU];
    logic [15:0] x  [MAX_MU];
    logic [15:0] v  [64];
    int          src;
    done = 0; checks = 0; failures = 0;
    rst_n = 0; in_valid = 0; entries = '0; keys = '0;
    for (int i = 0; i < 64; i++) v[i] = '0;
    for (int c = 0; c < NC; c++) begin
      @(negedge clk);
      if (c >= 1 + LAT && rst_n) begin
        src = c - LAT;
        checks++;
        if (psum_valid !== hv[src]) begin
          failures++;
          $display("FAIL col L=%0d cycle %0d: psum_valid=%b expected %b", L, c, psum_valid, hv[src]);
        end
        if (hv[src]) begin
          checks++;
          if (16'(psum) !== hs[src]) begin
            failures++;
            if (failures < 10) $display("FAIL col L=%0d cycle %0d: psum %h expected %h", L, c, psum, hs[src]);
          end
        end
      end
      rst_n = (c >= 3);
      hv[c] = rst_n && ($urandom_range(4) != 0);
      in_valid = hv[c];
      for (int l = 0; l < L; l++) begin
        for (int k = 0; k < MAX_MU; k++) begin
          x[k]  = rand_act(DTYPE, W);
          wt[k] = rand_tern();
        end
        for (int i = 0; i < NE; i++) begin
          index_to_group(i, MU, ge);
          entries[l][i] = W'(ref_group(DTYPE, W, ge, x, MU));
        end
        keys[l] = KW'(encode_group(wt, MU));
        v[l]    = ref_group(DTYPE, W, wt, x, MU);
      end
      hs[c] = ref_tree(DTYPE, W, v, L);
    end
    done = 1;
  end
endmodule
