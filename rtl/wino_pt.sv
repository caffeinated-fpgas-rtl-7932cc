// wino_pt: the Winograd F(2x2,3x3) partial transform of one 4-element vector.
//
// For a column j of a 4-row tile (or, with the indices swapped, a row of a 4x4 tile) it
// computes, exactly as the paper's column transform equation gives:
//   o[0] = i[0] - i[2]   o[1] = i[1] + i[2]   o[2] = i[2] - i[1]   o[3] = i[1] - i[3]
// Applying it to the four columns and then to the four rows of a 4x4 input tile d gives
// the full input transform V = B^T d B. Four fp32 adders, combinational.
module wino_pt
  import wino_pkg::*;
(
  input  fp32_t [3:0] i,
  output fp32_t [3:0] o
);

  fp32_add u_add0 (.a(i[0]), .b(fneg(i[2])), .y(o[0]));
  fp32_add u_add1 (.a(i[1]), .b(i[2]),       .y(o[1]));
  fp32_add u_add2 (.a(i[2]), .b(fneg(i[1])), .y(o[2]));
  fp32_add u_add3 (.a(i[1]), .b(fneg(i[3])), .y(o[3]));

endmodule
