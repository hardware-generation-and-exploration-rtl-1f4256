// tb_fac_column: column read-out and reduction tree for the default FP16
// column (group size 3, 11 LUTs) and an INT8 column (group size 2, 6 LUTs).
module tb_fac_column;
  logic clk = 0;
  logic d0, d1;
  int   c0, c1, f0, f1;
  always #5 clk = ~clk;

  tb_fac_column_harness #(.DTYPE(lut_pkg::DT_FP16), .W(16), .MU(3), .L(11)) h0 (.clk, .done(d0), .checks(c0), .failures(f0));
  tb_fac_column_harness #(.DTYPE(lut_pkg::DT_INT),  .W(8),  .MU(2), .L(6))  h1 (.clk, .done(d1), .checks(c1), .failures(f1));

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    wait (d0 && d1);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1);
    $finish;
  end
endmodule
