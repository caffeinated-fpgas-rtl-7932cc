// tb_wino_pt: checks the Winograd partial transform on random vectors against
// o = (i0 - i2, i1 + i2, i2 - i1, i1 - i3) computed with the reference arithmetic, and on
// a hand-worked integer example.
module tb_wino_pt;
  import fp_ref_pkg::*;

  fp32_t [3:0] i, o;
  int checks = 0, failures = 0;

  wino_pt dut (.i, .o);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t [3:0] e;
    for (int n = 0; n < 2000; n++) begin
      for (int k = 0; k < 4; k++) i[k] = rand_fp(8);
      if (n == 0) i = {r2f(7.0), r2f(5.0), r2f(3.0), r2f(2.0)};   // i3..i0 = 7,5,3,2
      #1;
      e[0] = fsub(i[0], i[2]);
      e[1] = fadd(i[1], i[2]);
      e[2] = fsub(i[2], i[1]);
      e[3] = fsub(i[1], i[3]);
      if (n == 0) e = {r2f(-4.0), r2f(2.0), r2f(8.0), r2f(-3.0)}; // 3-7, 5-3, 3+5, 2-5
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (o[k] !== e[k]) begin
          failures++;
          if (failures < 10) $display("FAIL o[%0d]=%h expected %h", k, o[k], e[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
