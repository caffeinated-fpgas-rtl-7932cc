// fp32_add: combinational IEEE-754 single precision adder.
//
// y = a + b with round-to-nearest-even. Subnormal inputs are read as zero and subnormal
// results are flushed to zero (a common FPGA simplification; the paper only says the
// engine computes in single precision). NaN inputs or inf - inf give the quiet NaN
// 0x7FC00000; overflow gives a signed infinity. Subtraction is done by the caller
// flipping the sign bit of b. The datapath aligns the smaller operand with guard, round
// and sticky bits, adds or subtracts the 24-bit significands, renormalises with a
// leading-zero count and rounds once. There is no register: callers pipeline around it.
module fp32_add
  import wino_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  always_comb begin
    logic        sa, sb, sx, sy, so;
    logic [7:0]  ea, eb, ex, ey;
    logic [22:0] fa, fb;
    logic [23:0] mx, my;
    logic [8:0]  d;
    logic [49:0] sh;
    logic [26:0] ax, ay, n;
    logic [27:0] sum;
    logic [9:0]  e;
    logic [4:0]  lz;
    logic [24:0] rm;
    logic        up;
    logic        a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;

    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    a_nan  = (ea == 8'hFF) && (fa != 0);
    b_nan  = (eb == 8'hFF) && (fb != 0);
    a_inf  = (ea == 8'hFF) && (fa == 0);
    b_inf  = (eb == 8'hFF) && (fb == 0);
    a_zero = (ea == 8'h00);
    b_zero = (eb == 8'h00);

    // operand ordering: x is the one of larger magnitude
    if ({ea, fa} >= {eb, fb}) begin
      sx = sa; ex = ea; mx = {1'b1, fa};
      sy = sb; ey = eb; my = {1'b1, fb};
    end else begin
      sx = sb; ex = eb; mx = {1'b1, fb};
      sy = sa; ey = ea; my = {1'b1, fa};
    end

    d  = {1'b0, ex} - {1'b0, ey};
    sh = (d > 9'd49) ? 50'd0 : ({my, 26'd0} >> d);
    ax = {mx, 3'b000};
    ay = {sh[49:24], (|sh[23:0]) | (d > 9'd49)};
    so = sx;
    lz = '0;
    sum = '0;

    if (sx == sy) begin
      sum = {1'b0, ax} + {1'b0, ay};
      if (sum[27]) begin
        n = {sum[27:2], sum[1] | sum[0]};
        e = {2'b00, ex} + 10'd1;
      end else begin
        n = sum[26:0];
        e = {2'b00, ex};
      end
    end else begin
      n = ax - ay;
      for (int i = 26; i >= 0; i--) begin
        if (n[i]) begin
          lz = 5'(26 - i);
          break;
        end
      end
      n = n << lz;
      e = {2'b00, ex} - {5'd0, lz};
    end

    up = n[2] & (n[1] | n[0] | n[3]);
    rm = {1'b0, n[26:3]} + {24'd0, up};
    if (rm[24]) begin
      rm = rm >> 1;
      e  = e + 10'd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb)))
      y = 32'h7FC0_0000;
    else if (a_inf)
      y = {sa, 8'hFF, 23'd0};
    else if (b_inf)
      y = {sb, 8'hFF, 23'd0};
    else if (a_zero && b_zero)
      y = {sa & sb, 31'd0};
    else if (a_zero)
      y = b;
    else if (b_zero)
      y = a;
    else if ((sx != sy) && (n == 27'd0 || ax == ay))
      y = 32'd0;                       // exact cancellation gives +0
    else if (e[9] || e == 10'd0)
      y = {so, 31'd0};                 // underflow: flush to zero
    else if (e >= 10'd255)
      y = {so, 8'hFF, 23'd0};          // overflow
    else
      y = {so, e[7:0], rm[22:0]};
  end

endmodule
