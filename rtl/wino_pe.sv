// wino_pe: Winograd processing element with its partial result buffer.
//
// Each cycle it can accept one 4x2 tile and its right-hand neighbour, both already
// column-transformed by the input stage (together X = B^T d), and the 4x4 transformed
// filter U of the current (output map, input channel) pair. A five-stage pipeline then
//   1. registers the inputs,
//   2. applies the four row-wise partial transforms: V = X B (four wino_pt),
//   3. multiplies element-wise: M = U (.) V (16 fp32 multipliers),
//   4. applies the left output transform: Z = A^T M (2x4),
//   5. applies the right output transform: Y = Z A (2x2),
// and in the cycle after stage 5 adds Y into the partial result buffer at the tile's
// address, or overwrites the entry when `in_first` marked the first input channel.
// A^T = [1 1 1 0; 0 1 -1 -1] is the standard F(2x2,3x3) matrix; the paper names A
// without printing it. The stage split and the accumulate-by-overwrite on the first
// channel are this design's choices. The buffer read used for accumulation is
// combinational (distributed RAM style), so the same entry may be updated on
// consecutive cycles with no hazard; a second, registered read port lets the output
// stage collect results. The buffer write happens on the sixth clock edge after in_valid.
module wino_pe
  import wino_pkg::*;
#(
  parameter int unsigned DEPTH = 4096   // output tiles held per processing element
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  tile42_t                  in_left,
  input  tile42_t                  in_right,
  input  blk44_t                   in_u,
  input  logic [$clog2(DEPTH)-1:0] in_addr,
  input  logic                     in_first,
  output logic                     acc_valid,   // a result is written this cycle
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output tile22_t                  rd_data
);

  localparam int unsigned AW = $clog2(DEPTH);

  typedef struct packed {
    logic          valid;
    logic [AW-1:0] addr;
    logic          first;
  } ctl_t;

  ctl_t    c1, c2, c3, c4, c5;
  blk44_t  x1, u1, u2, v2, m3;
  fp32_t [1:0][3:0] z4;
  tile22_t y5;

  blk44_t  v_c, m_c;
  fp32_t [1:0][3:0] z_c;
  tile22_t y_c;

  tile22_t prb [DEPTH];

  // stage 1: input registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c1 <= '0;
    else        c1 <= '{valid: in_valid, addr: in_addr, first: in_first};
  end
  always_ff @(posedge clk) begin
    for (int r = 0; r < 4; r++) begin
      x1[r] <= {in_right[r][1], in_right[r][0], in_left[r][1], in_left[r][0]};
    end
    u1 <= in_u;
  end

  // stage 2: row-wise partial transforms
  for (genvar r = 0; r < 4; r++) begin : g_row_pt
    wino_pt u_pt (.i(x1[r]), .o(v_c[r]));
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c2 <= '0;
    else        c2 <= c1;
  end
  always_ff @(posedge clk) begin
    v2 <= v_c;
    u2 <= u1;
  end

  // stage 3: element-wise multiplication
  for (genvar r = 0; r < 4; r++) begin : g_mul_r
    for (genvar k = 0; k < 4; k++) begin : g_mul_c
      fp32_mul u_mul (.a(u2[r][k]), .b(v2[r][k]), .y(m_c[r][k]));
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c3 <= '0;
    else        c3 <= c2;
  end
  always_ff @(posedge clk) m3 <= m_c;

  // stage 4: Z = A^T M
  for (genvar k = 0; k < 4; k++) begin : g_at
    fp32_t s01, d12;
    fp32_add u_a0 (.a(m3[0][k]), .b(m3[1][k]),       .y(s01));
    fp32_add u_a1 (.a(s01),      .b(m3[2][k]),       .y(z_c[0][k]));
    fp32_add u_a2 (.a(m3[1][k]), .b(fneg(m3[2][k])), .y(d12));
    fp32_add u_a3 (.a(d12),      .b(fneg(m3[3][k])), .y(z_c[1][k]));
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c4 <= '0;
    else        c4 <= c3;
  end
  always_ff @(posedge clk) z4 <= z_c;

  // stage 5: Y = Z A
  for (genvar r = 0; r < 2; r++) begin : g_a
    fp32_t s01, d12;
    fp32_add u_b0 (.a(z4[r][0]), .b(z4[r][1]),       .y(s01));
    fp32_add u_b1 (.a(s01),      .b(z4[r][2]),       .y(y_c[r][0]));
    fp32_add u_b2 (.a(z4[r][1]), .b(fneg(z4[r][2])), .y(d12));
    fp32_add u_b3 (.a(d12),      .b(fneg(z4[r][3])), .y(y_c[r][1]));
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c5 <= '0;
    else        c5 <= c4;
  end
  always_ff @(posedge clk) y5 <= y_c;

  // accumulation into the partial result buffer
  tile22_t old_c, acc_c;
  assign old_c = prb[c5.addr];
  for (genvar r = 0; r < 2; r++) begin : g_acc_r
    for (genvar k = 0; k < 2; k++) begin : g_acc_c
      fp32_add u_acc (.a(old_c[r][k]), .b(y5[r][k]), .y(acc_c[r][k]));
    end
  end

  always_ff @(posedge clk) begin
    if (c5.valid) prb[c5.addr] <= c5.first ? y5 : acc_c;
    rd_data <= prb[rd_addr];
  end

  assign acc_valid = c5.valid;

endmodule
