// wino_tile_buffer: on-chip store of column-transformed 4x2 input tiles.
//
// Tiles are addressed by a linear tile index A = (c*P + p)*TPR + t (channel c, tile row p,
// tile column t, TPR tiles per row, a multiple of eight). The store is split into eight
// banks by A mod 8, so that
//   * the input stage can write four consecutive tiles (A0, A0+1, A0+2, A0+3; A0 a
//     multiple of 4) in one cycle, which is what its eight replicated column transforms
//     produce, and
//   * the compute stage can read five consecutive tiles (A0 .. A0+4) in one cycle: the
//     four processing elements each need a tile and its right-hand neighbour.
// Since A0 mod 8 is 0 or 4, the four or five tiles always sit in distinct banks. The
// paper says only that tiles are stored in BRAM; the banking is this design's choice.
// Reads are synchronous (one cycle latency), like a block RAM. Write and read addresses
// are not checked against DEPTH; the compute unit refuses jobs that do not fit.
module wino_tile_buffer
  import wino_pkg::*;
#(
  parameter int unsigned DEPTH = 32768   // tiles; a multiple of 8
) (
  input  logic                      clk,
  // write port: four tiles at A0 (multiple of 4)
  input  logic                      wr_en,
  input  logic [$clog2(DEPTH)-1:0]  wr_base,
  input  logic [3:0]                wr_mask,
  input  tile42_t [3:0]             wr_tile,
  // read port: five tiles at A0 (multiple of 4), data one cycle later
  input  logic                      rd_en,
  input  logic [$clog2(DEPTH)-1:0]  rd_base,
  output tile42_t [4:0]             rd_tile
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned BD = DEPTH / 8;

  tile42_t     q [8];
  logic [2:0]  rd_off_q;

  // one simple dual-port memory per bank: bank b holds the tiles with A mod 8 == b
  for (genvar b = 0; b < 8; b++) begin : g_bank
    tile42_t       mem [BD];
    logic [2:0]    wk, rk;     // position of bank b among the tiles written / read
    logic [AW-1:0] wa, ra;
    assign wk = 3'(b) - wr_base[2:0];
    assign wa = wr_base + AW'(wk);
    assign rk = 3'(b) - rd_base[2:0];
    assign ra = rd_base + AW'(rk);

    always_ff @(posedge clk) begin
      if (wr_en && wk < 3'd4 && wr_mask[wk[1:0]]) mem[wa[AW-1:3]] <= wr_tile[wk[1:0]];
      if (rd_en) q[b] <= mem[ra[AW-1:3]];
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_off_q <= rd_base[2:0];
  end

  always_comb begin
    for (int i = 0; i < 5; i++) rd_tile[i] = q[3'(rd_off_q + 3'(i))];
  end

endmodule
