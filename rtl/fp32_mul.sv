// fp32_mul: combinational IEEE-754 single precision multiplier.
//
// y = a * b with round-to-nearest-even on the 48-bit significand product. Subnormal
// inputs are read as zero and subnormal results are flushed to zero (this design's
// simplification). NaN inputs and inf * 0 give the quiet NaN 0x7FC00000; overflow gives
// a signed infinity. No register: the processing element places one after it.
module fp32_mul
  import wino_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  always_comb begin
    logic        sa, sb, s;
    logic [7:0]  ea, eb;
    logic [22:0] fa, fb;
    logic [47:0] p;
    logic [23:0] m;
    logic        g, st, up;
    logic [24:0] rm;
    logic [9:0]  e;

    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    s = sa ^ sb;
    p = {1'b1, fa} * {1'b1, fb};
    e = {2'b00, ea} + {2'b00, eb} - 10'd127;
    if (p[47]) begin
      m  = p[47:24];
      g  = p[23];
      st = |p[22:0];
      e  = e + 10'd1;
    end else begin
      m  = p[46:23];
      g  = p[22];
      st = |p[21:0];
    end
    up = g & (st | m[0]);
    rm = {1'b0, m} + {24'd0, up};
    if (rm[24]) begin
      rm = rm >> 1;
      e  = e + 10'd1;
    end

    if (((ea == 8'hFF) && (fa != 0)) || ((eb == 8'hFF) && (fb != 0)))
      y = 32'h7FC0_0000;
    else if (((ea == 8'hFF) && (eb == 8'h00)) || ((eb == 8'hFF) && (ea == 8'h00)))
      y = 32'h7FC0_0000;
    else if ((ea == 8'hFF) || (eb == 8'hFF))
      y = {s, 8'hFF, 23'd0};
    else if ((ea == 8'h00) || (eb == 8'h00))
      y = {s, 31'd0};
    else if (e[9] || e == 10'd0)
      y = {s, 31'd0};
    else if (e >= 10'd255)
      y = {s, 8'hFF, 23'd0};
    else
      y = {s, e[7:0], rm[22:0]};
  end

endmodule
