// tb_fp32_mul: checks fp32_mul against double-precision arithmetic rounded to single,
// on random operands of widely different exponents, on rounding ties and on the
// special cases (zeros, infinities, NaN, overflow, underflow).
module tb_fp32_mul;
  import fp_ref_pkg::*;

  fp32_t a, b, y;
  int checks = 0, failures = 0;

  fp32_mul dut (.a, .b, .y);

  task automatic check(fp32_t ea, fp32_t eb, fp32_t exp_y);
    a = ea; b = eb;
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL mul %h * %h = %h, expected %h", ea, eb, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t x, z;
    for (int i = 0; i < 5000; i++) begin
      x = rand_fp(i < 2500 ? 3 : 50);
      z = rand_fp(i < 2500 ? 3 : 50);
      check(x, z, fmul(x, z));
    end
    check(32'h3F80_0000, 32'h4049_0FDB, 32'h4049_0FDB);    // 1 * pi
    check(32'h4000_0000, 32'hC040_0000, 32'hC0C0_0000);    // 2 * -3 = -6
    check(32'h0000_0000, 32'hC040_0000, 32'h8000_0000);    // 0 * -3 = -0
    check(32'h7F80_0000, 32'h0000_0000, 32'h7FC0_0000);    // inf * 0
    check(32'h7F80_0000, 32'hBF80_0000, 32'hFF80_0000);    // inf * -1
    check(32'h7FC0_0001, 32'h3F80_0000, 32'h7FC0_0000);    // NaN
    check(32'h7F00_0000, 32'h7F00_0000, 32'h7F80_0000);    // overflow
    check(32'h0080_0000, 32'h3E80_0000, 32'h0000_0000);    // underflow flushes
    check(32'h3F80_0001, 32'h3F80_0001, 32'h3F80_0002);    // (1+u)^2 rounds to 1+2u
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
