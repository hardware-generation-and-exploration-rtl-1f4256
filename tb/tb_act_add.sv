// tb_act_add: checks the activation-type adder in both data types: an FP16
// instance against the real-valued reference and an INT8 instance against
// wrapping 8-bit integer addition, on random operands.
module tb_act_add;
  import lut_pkg::*;
  import tb_ref_pkg::*;

  logic [15:0] fa, fb, fy;
  logic [7:0]  ia, ib, iy;
  int checks = 0, failures = 0;

  act_add #(.DTYPE(DT_FP16), .W(16)) dut_fp  (.a(fa), .b(fb), .y(fy));
  act_add #(.DTYPE(DT_INT),  .W(8))  dut_int (.a(ia), .b(ib), .y(iy));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) begin
      fa = rand_act(DT_FP16, 16);
      fb = rand_act(DT_FP16, 16);
      ia = 8'($urandom);
      ib = 8'($urandom);
      #1;
      checks += 2;
      if (fy !== ref_add(DT_FP16, 16, fa, fb)) begin
        failures++;
        if (failures < 10) $display("FAIL fp %h + %h = %h", fa, fb, fy);
      end
      if (iy !== 8'(int'(ia) + int'(ib))) begin
        failures++;
        if (failures < 10) $display("FAIL int %h + %h = %h", ia, ib, iy);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
