// tb_out_acc: output accumulator. Random partial sums are streamed with
// bubbles and random first flags; the register must load on `first`, add
// otherwise, hold during bubbles, and show the result one cycle after each
// valid input. FP16 (default) and INT8 instances.
module tb_out_acc;
  import lut_pkg::*;
  import tb_ref_pkg::*;

  logic        clk = 0, rst_n, v, first;
  logic [15:0] ps, acc_fp, m_fp;
  logic [7:0]  ps8, acc_i, m_i;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  out_acc #(.DTYPE(DT_FP16), .W(16)) dut_fp (.clk, .rst_n, .in_valid(v), .first, .psum(ps),  .acc(acc_fp));
  out_acc #(.DTYPE(DT_INT),  .W(8))  dut_i  (.clk, .rst_n, .in_valid(v), .first, .psum(ps8), .acc(acc_i));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; v = 0; first = 0; ps = '0; ps8 = '0;
    m_fp = '0; m_i = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      v     = ($urandom_range(3) != 0);
      first = (c == 0) || ($urandom_range(7) == 0);
      ps    = rand_act(DT_FP16, 16);
      ps8   = 8'($urandom);
      if (v) begin
        m_fp = first ? ps  : ref_add(DT_FP16, 16, m_fp, ps);
        m_i  = first ? ps8 : 8'(ref_add(DT_INT, 8, 16'(m_i), 16'(ps8)));
      end
      @(negedge clk);
      checks += 2;
      if (acc_fp !== m_fp) begin
        failures++;
        if (failures < 10) $display("FAIL fp cycle %0d: %h expected %h", c, acc_fp, m_fp);
      end
      if (acc_i !== m_i) begin
        failures++;
        if (failures < 10) $display("FAIL int cycle %0d: %h expected %h", c, acc_i, m_i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
