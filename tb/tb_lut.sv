// tb_lut: runs the LUT build check for the default FP16 LUT with group size
// 3, an INT8 LUT with group size 4 and an FP16 LUT with group size 1.
module tb_lut;
  logic clk = 0;
  logic d0, d1, d2;
  int   c0, c1, c2, f0, f1, f2;
  always #5 clk = ~clk;

  tb_lut_harness #(.DTYPE(lut_pkg::DT_FP16), .W(16), .MU(3)) h0 (.clk, .done(d0), .checks(c0), .failures(f0));
  tb_lut_harness #(.DTYPE(lut_pkg::DT_INT),  .W(8),  .MU(4)) h1 (.clk, .done(d1), .checks(c1), .failures(f1));
  tb_lut_harness #(.DTYPE(lut_pkg::DT_FP16), .W(16), .MU(1)) h2 (.clk, .done(d2), .checks(c2), .failures(f2));

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    wait (d0 && d1 && d2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2);
    $finish;
  end
endmodule
