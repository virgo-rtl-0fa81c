// tb_fp_mac: checks the fused FP16 x FP16 + FP32 multiply-add against a
// double-precision reference rounded once to FP32.  Covers directed corner
// cases (zeros, cancellation, subnormal FP16 inputs, carries on rounding) and
// random operands.
module tb_fp_mac;
  import fp_ref_pkg::*;
  logic [15:0] a, b;
  logic [31:0] c, y, exp_y;
  int checks = 0, failures = 0;

  fp_mac dut (.a(a), .b(b), .c(c), .y(y));

  task automatic check(input logic [15:0] ta, input logic [15:0] tb_, input logic [31:0] tc);
    real r;
    a = ta; b = tb_; c = tc;
    #1;
    r = fp16_to_real(ta) * fp16_to_real(tb_) + fp32_to_real(tc);
    exp_y = real_to_fp32(r);
    checks++;
    if (y !== exp_y && !(y[30:0] == 0 && exp_y[30:0] == 0)) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h c=%h y=%h exp=%h", ta, tb_, tc, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(16'h3C00, 16'h3C00, 32'h0000_0000);        // 1*1+0
    check(16'h4000, 16'h4200, 32'h3F80_0000);        // 2*3+1 = 7
    check(16'h3C00, 16'h3C00, 32'hBF80_0000);        // 1*1-1 = 0
    check(16'h0001, 16'h0001, 32'h0000_0000);        // subnormal * subnormal
    check(16'h0200, 16'h4400, 32'h3380_0000);        // subnormal * 4 + tiny
    check(16'h7BFF, 16'h7BFF, 32'h4000_0000);        // max * max
    check(16'h3C01, 16'h3C01, 32'h4B80_0000);        // rounding with large addend
    check(16'hBC00, 16'h3C00, 32'h3F80_0001);        // near cancellation
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] cc;
      cc = $urandom;
      cc[30:23] = 8'(110 + ($urandom % 30));
      if (i % 7 == 0) cc = 32'd0;
      check(rand_fp16(), rand_fp16(), cc);
    end
    // integer-valued dot-product style accumulation
    for (int i = 0; i < 2000; i++) begin
      int x, z;
      x = int'($urandom % 200) - 100;
      z = int'($urandom % 200) - 100;
      check(real_to_fp16_int(x), real_to_fp16_int(z), real_to_fp32(real'(int'($urandom % 100000) - 50000)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
