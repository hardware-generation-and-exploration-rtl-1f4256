// tb_lut_harness: drives one lut instance with a random stream of
// activation groups (about one cycle in five is a bubble) and checks, each
// cycle, that entries_valid appears exactly MU cycles after in_valid and
// that the entries equal the reference partial sums of the positive-half
// groups in base-3 index order. Entries must also hold during bubbles.
// Reports its counts through ports to the enclosing testbench.
module tb_lut_harness #(
  parameter lut_pkg::dtype_e DTYPE = lut_pkg::DT_FP16,
  parameter int unsigned     W     = 16,
  parameter int unsigned     MU    = 3,
  parameter int unsigned     NC    = 400
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  import lut_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned NE = n_entries(MU);

  logic                  rst_n, in_valid, entries_valid;
  logic [MU-1:0][W-1:0]  act;
  logic [NE-1:0][W-1:0]  entries;
  logic                  hv [NC];
  logic [15:0]           hx [NC][MAX_MU];
  logic [15:0]           held [NE];

  lut #(.DTYPE(DTYPE), .W(W), .MU(MU)) dut (
    .clk, .rst_n, .in_valid, .act, .entries, .entries_valid);

  initial begin
    tern_e       wt [MAX_MU];
    logic [15:0] xs [MAX_MU];
    logic [15:0] e;
    int          src;
    done = 0; checks = 0; failures = 0;
    rst_n = 0; in_valid = 0; act = '0;
    for (int i = 0; i < NE; i++) held[i] = '0;
    for (int c = 0; c < NC; c++) begin
      @(negedge clk);
      // check the state after edge c-1
      if (c >= 1 + MU && rst_n) begin
        src = c - MU;
        checks++;
        if (entries_valid !== hv[src]) begin
          failures++;
          $display("FAIL lut MU=%0d cycle %0d: entries_valid=%b expected %b", MU, c, entries_valid, hv[src]);
        end
        if (hv[src]) begin
          for (int i = 0; i < NE; i++) begin
            index_to_group(i, MU, wt);
            held[i] = ref_group(DTYPE, W, wt, hx[src], MU);
          end
        end
        if (c > 40) begin
          for (int i = 0; i < NE; i++) begin
            e = 16'(entries[i]);
            checks++;
            if (e !== held[i]) begin
              failures++;
              if (failures < 10) $display("FAIL lut MU=%0d cycle %0d entry %0d: %h expected %h", MU, c, i, e, held[i]);
            end
          end
        end
      end
      // drive the inputs for edge c
      rst_n = (c >= 3);
      hv[c] = rst_n && ($urandom_range(4) != 0);
      for (int k = 0; k < MAX_MU; k++) xs[k] = rand_act(DTYPE, W);
      hx[c] = xs;
      in_valid = hv[c];
      for (int k = 0; k < MU; k++) act[k] = W'(xs[k]);
      if (!rst_n) hv[c] = 1'b0;
    end
    done = 1;
  end
endmodule
