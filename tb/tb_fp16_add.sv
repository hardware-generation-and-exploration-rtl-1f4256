// tb_fp16_add: self-checking test of the binary16 adder.
// Random operands over the whole finite range (normals and subnormals, both
// signs, overflow to infinity) are compared bit for bit with the real-valued
// reference of tb_ref_pkg; hand-picked cases cover signed zeros, exact
// cancellation, rounding ties, infinities and NaN.
module tb_fp16_add;
  import tb_ref_pkg::*;

  logic [15:0] a, b, y;
  int checks = 0, failures = 0;

  fp16_add dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [15:0] ta, input logic [15:0] tb_, input logic [15:0] exp);
    a = ta; b = tb_;
    #1;
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %h + %h = %h, expected %h", ta, tb_, y, exp);
    end
  endtask

  function automatic logic [15:0] rnd_finite();
    logic [15:0] v;
    v = 16'($urandom);
    if (v[14:10] == 5'h1f) v[14:10] = 5'h1e;
    return v;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] x, z;
    // hand-picked cases
    check(16'h0000, 16'h0000, 16'h0000);   // +0 + +0
    check(16'h8000, 16'h8000, 16'h8000);   // -0 + -0
    check(16'h8000, 16'h0000, 16'h0000);   // -0 + +0
    check(16'h3c00, 16'hbc00, 16'h0000);   // 1 - 1 = +0
    check(16'h3c00, 16'h3c00, 16'h4000);   // 1 + 1 = 2
    check(16'h3c00, 16'h1000, 16'h3c00);   // 1 + 2^-11: tie, stays even
    check(16'h3c01, 16'h1000, 16'h3c02);   // odd + half ulp: rounds up
    check(16'h7bff, 16'h7bff, 16'h7c00);   // overflow to +inf
    check(16'h0001, 16'h0001, 16'h0002);   // subnormals
    check(16'h03ff, 16'h0001, 16'h0400);   // subnormal -> normal
    check(16'h7c00, 16'h3c00, 16'h7c00);   // inf + 1
    check(16'hfc00, 16'h7c00, 16'h7e00);   // -inf + inf = NaN
    check(16'h7e01, 16'h3c00, 16'h7e00);   // NaN in
    // random finite operands, and operands of close magnitude (cancellation)
    for (int i = 0; i < 20000; i++) begin
      x = rnd_finite();
      z = (i % 3 == 0) ? {~x[15], x[14:4], 4'($urandom)} : rnd_finite();
      check(x, z, real_to_fp16(fp16_to_real(x) + fp16_to_real(z)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
