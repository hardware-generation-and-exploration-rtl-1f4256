// tb_workloads: the core in the configurations of the design-space study,
// each streaming several GEMVs end to end against the reference model:
//   - INT8, L=34, mu=2, K=30 (2040 ternary MACs/cycle, matched to an
//     INT8 edge accelerator with 32 x 2 x 32 = 2048)
//   - INT8, L=26, mu=2, K=23 (1196 MACs/cycle, matched to an FPGA design)
//   - INT8, 32 x 32 tile with mu=4 (L=8, K=32)
//   - FP16, 8 x 8 tile with mu=1 (L=8, K=8: the plain sign-flip case)
//   - FP16, mu=5 (L=2, K=8, tile 10 x 8)
module tb_workloads;
  import lut_pkg::*;
  logic clk = 0;
  logic [4:0] d;
  int c [5], f [5];
  always #5 clk = ~clk;

  tb_core_inst #(.DTYPE(DT_INT),  .W(8),  .MU(2), .L(34), .K(30)) w0 (.clk, .done(d[0]), .checks(c[0]), .failures(f[0]));
  tb_core_inst #(.DTYPE(DT_INT),  .W(8),  .MU(2), .L(26), .K(23)) w1 (.clk, .done(d[1]), .checks(c[1]), .failures(f[1]));
  tb_core_inst #(.DTYPE(DT_INT),  .W(8),  .MU(4), .L(8),  .K(32)) w2 (.clk, .done(d[2]), .checks(c[2]), .failures(f[2]));
  tb_core_inst #(.DTYPE(DT_FP16), .W(16), .MU(1), .L(8),  .K(8))  w3 (.clk, .done(d[3]), .checks(c[3]), .failures(f[3]));
  tb_core_inst #(.DTYPE(DT_FP16), .W(16), .MU(5), .L(2),  .K(8))  w4 (.clk, .done(d[4]), .checks(c[4]), .failures(f[4]));

  function automatic int total(input int v [5]);
    int s = 0;
    for (int i = 0; i < 5; i++) s += v[i];
    return s;
  endfunction

  initial begin
    repeat (3000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", total(c), total(f) + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    wait (&d);
    for (int i = 0; i < 5; i++) $display("configuration %0d: checks %0d failures %0d", i, c[i], f[i]);
    $display("TB_RESULT checks=%0d failures=%0d", total(c), total(f));
    $finish;
  end
endmodule
