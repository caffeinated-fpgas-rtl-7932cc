// tb_fp32_add: checks fp32_add against double-precision arithmetic rounded to single,
// on random operands of widely different exponents, on near-cancellation and on the
// special cases (zeros, infinities, NaN, overflow).
module tb_fp32_add;
  import fp_ref_pkg::*;

  fp32_t a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a, .b, .y);

  task automatic check(fp32_t ea, fp32_t eb, fp32_t exp_y);
    a = ea; b = eb;
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL add %h + %h = %h, expected %h", ea, eb, y, exp_y);
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
    for (int i = 0; i < 4000; i++) begin
      x = rand_fp(i < 2000 ? 3 : 30);
      z = rand_fp(i < 2000 ? 3 : 30);
      check(x, z, fadd(x, z));
    end
    // near cancellation: b = -(a with a few low bits changed)
    for (int i = 0; i < 1000; i++) begin
      x = rand_fp(10);
      z = {~x[31], x[30:0] ^ 31'($urandom_range(255, 0))};
      check(x, z, fadd(x, z));
    end
    check(32'h3F80_0000, 32'h3F80_0000, 32'h4000_0000);    // 1 + 1 = 2
    check(32'h3F80_0000, 32'hBF80_0000, 32'h0000_0000);    // 1 - 1 = +0
    check(32'h8000_0000, 32'h8000_0000, 32'h8000_0000);    // -0 + -0 = -0
    check(32'h0000_0000, 32'h4049_0FDB, 32'h4049_0FDB);    // 0 + pi
    check(32'h7F80_0000, 32'h3F80_0000, 32'h7F80_0000);    // inf + 1
    check(32'h7F80_0000, 32'hFF80_0000, 32'h7FC0_0000);    // inf - inf
    check(32'h7FC0_0001, 32'h3F80_0000, 32'h7FC0_0000);    // NaN
    check(32'h7F7F_FFFF, 32'h7F7F_FFFF, 32'h7F80_0000);    // overflow
    check(32'h3F80_0000, 32'h3380_0000, 32'h3F80_0000);    // 1 + 2^-24: tie to even
    check(32'h3F80_0001, 32'h3380_0000, 32'h3F80_0002);    // tie rounds up to even
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
