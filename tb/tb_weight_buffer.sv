// tb_weight_buffer: the weight tile delay line must reproduce every valid
// tile exactly DEPTH cycles later, in order, with out_valid aligned, when the
// stream has bubbles. Default sizes (11 x 32 keys of 5 bits, depth 3) and a
// depth-1 instance.
module tb_weight_buffer;
  localparam int unsigned L = 11, K = 32, KW = 5;
  logic clk = 0, rst_n, v;
  logic [L-1:0][K-1:0][KW-1:0] kin, kout3, kout1;
  logic ov3, ov1;
  logic [L-1:0][K-1:0][KW-1:0] hk [600];
  logic hv [600];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  weight_buffer dut3 (.clk, .rst_n, .in_valid(v), .keys_in(kin), .keys_out(kout3), .out_valid(ov3));
  weight_buffer #(.L(L), .K(K), .KEY_W(KW), .DEPTH(1)) dut1 (
    .clk, .rst_n, .in_valid(v), .keys_in(kin), .keys_out(kout1), .out_valid(ov1));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the tile the stream carried d valid tiles before cycle c's output
  initial begin
    logic [L-1:0][K-1:0][KW-1:0] exp_k;
    logic bad;
    rst_n = 0; v = 0; kin = '0;
    for (int c = 0; c < 600; c++) begin
      @(negedge clk);
      if (c >= 8) begin
        checks += 2;
        exp_k = hk[c-3];
        bad   = (ov3 !== hv[c-3]) || (hv[c-3] && (kout3 != exp_k));
        if (bad) begin
          failures++;
          if (failures < 10) $display("FAIL depth3 cycle %0d", c);
        end
        exp_k = hk[c-1];
        bad   = (ov1 !== hv[c-1]) || (hv[c-1] && (kout1 != exp_k));
        if (bad) begin
          failures++;
          if (failures < 10) $display("FAIL depth1 cycle %0d", c);
        end
      end
      rst_n = (c >= 3);
      v     = rst_n && ($urandom_range(3) != 0);
      for (int l = 0; l < L; l++) for (int k = 0; k < K; k++) kin[l][k] = KW'($urandom);
      hv[c] = v;
      hk[c] = kin;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
