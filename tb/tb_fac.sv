// tb_fac: checks the FAC read-out. For random ternary weight groups and
// activations, the LUT entries are filled from the reference, the group is
// encoded with the offline encoding, and the FAC output must equal the
// reference partial sum of the group itself - covering stored entries
// (symmetry bit 0), mirrored entries (symmetry bit 1) and the all-zero group.
// Instances: FP16 with group size 3 (default) and INT8 with group size 2.
module tb_fac;
  import lut_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned NE3 = n_entries(3), KW3 = key_width(3);
  localparam int unsigned NE2 = n_entries(2), KW2 = key_width(2);

  logic [NE3-1:0][15:0] e3;
  logic [KW3-1:0]       k3;
  logic [15:0]          y3;
  logic [NE2-1:0][7:0]  e2;
  logic [KW2-1:0]       k2;
  logic [7:0]           y2;
  int checks = 0, failures = 0;
  int n_sym = 0, n_zero = 0;

  fac #(.DTYPE(DT_FP16), .W(16), .MU(3)) dut3 (.entries(e3), .key(k3), .y(y3));
  fac #(.DTYPE(DT_INT),  .W(8),  .MU(2)) dut2 (.entries(e2), .key(k2), .y(y2));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tern_e       wt [MAX_MU], ge [MAX_MU];
    logic [15:0] x  [MAX_MU];
    logic [15:0] exp3, exp2;
    logic [31:0] key;
    for (int it = 0; it < 3000; it++) begin
      // FP16, mu = 3
      for (int k = 0; k < MAX_MU; k++) begin
        x[k]  = rand_act(DT_FP16, 16);
        wt[k] = rand_tern();
      end
      for (int i = 0; i < NE3; i++) begin
        index_to_group(i, 3, ge);
        e3[i] = ref_group(DT_FP16, 16, ge, x, 3);
      end
      key  = encode_group(wt, 3);
      k3   = KW3'(key);
      exp3 = ref_group(DT_FP16, 16, wt, x, 3);
      if (k3[KW3-1]) n_sym++;
      if (wt[0] == TW_ZERO && wt[1] == TW_ZERO && wt[2] == TW_ZERO) n_zero++;
      // INT8, mu = 2
      for (int k = 0; k < MAX_MU; k++) x[k] = rand_act(DT_INT, 8);
      for (int i = 0; i < NE2; i++) begin
        index_to_group(i, 2, ge);
        e2[i] = 8'(ref_group(DT_INT, 8, ge, x, 2));
      end
      k2   = KW2'(encode_group(wt, 2));
      exp2 = ref_group(DT_INT, 8, wt, x, 2);
      #1;
      checks += 2;
      if (y3 !== exp3) begin
        failures++;
        if (failures < 10) $display("FAIL fp16 key %b: %h expected %h", k3, y3, exp3);
      end
      if (y2 !== 8'(exp2)) begin
        failures++;
        if (failures < 10) $display("FAIL int8 key %b: %h expected %h", k2, y2, exp2);
      end
    end
    checks++;
    if (n_sym == 0 || n_zero == 0) begin
      failures++;
      $display("FAIL: mirrored or all-zero groups never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
