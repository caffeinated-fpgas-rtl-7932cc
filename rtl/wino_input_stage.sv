// wino_input_stage: moves input feature maps from off-chip memory into 4x2 tiles.
//
// For every input channel c and every tile row p (padded input rows 2p .. 2p+3) it
//   1. burst-reads the input rows it does not hold yet into a four-row temporary buffer
//      (all four rows for p = 0, then the two new rows per tile row, since consecutive
//      tile rows overlap by two rows); a row outside the image (zero padding) is only
//      marked as zero and not read,
//   2. cuts the four rows into 4x2 tiles, eight columns (four tiles) per cycle, applies
//      the column-wise partial transform to each of the eight columns with eight
//      replicated wino_pt instances, and writes the four transformed tiles to the tile
//      buffer.
// Columns left of the image (padding) and right of it up to TPR tiles (TPR a multiple
// of eight) read as zero. Tiles do not overlap in columns; neighbouring tile rows share
// two rows, as in the paper. Tiling of one tile row takes TPR/4 cycles.
// Memory port: AXI4-style read address and read data channels, one fp32 per beat, one
// INCR burst per input row (so W <= 256). The beat width, the burst per row and the
// row reuse are this design's choices.
module wino_input_stage
  import wino_pkg::*;
#(
  parameter int unsigned TPR_MAX  = 120,    // max tiles per row (multiple of 8)
  parameter int unsigned TB_DEPTH = 32768   // tile buffer depth
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  job_t                        job,
  input  dims_t                       dims,
  output logic                        done,
  // memory read
  output logic                        arvalid,
  input  logic                        arready,
  output logic [ADDR_W-1:0]           araddr,
  output logic [7:0]                  arlen,
  input  logic                        rvalid,
  output logic                        rready,
  input  fp32_t                       rdata,
  input  logic                        rlast,
  // tile buffer write port
  output logic                        tb_wr_en,
  output logic [$clog2(TB_DEPTH)-1:0] tb_wr_base,
  output logic [3:0]                  tb_wr_mask,
  output tile42_t [3:0]               tb_wr_tile
);

  localparam int unsigned WP  = 2 * TPR_MAX;     // padded columns held per row
  localparam int unsigned XW  = $clog2(WP + 1);
  localparam int unsigned TAW = $clog2(TB_DEPTH);

  typedef enum logic [2:0] {S_IDLE, S_ROW, S_AR, S_RECV, S_TILE, S_DONE} state_t;
  state_t state;

  fp32_t       temp [4][WP];
  logic [3:0]  slot_ok;                 // slot holds a real image row
  logic [15:0] c;
  logic [11:0] p;
  logic [2:0]  ri;                      // row of the tile row being loaded (0..3)
  logic [11:0] x;                       // beat counter within a row
  logic [11:0] t0;                      // first tile of the current tiling cycle
  logic [TAW-1:0] row_base;             // tile address of tile 0 of (c, p)

  logic [12:0] rpad;                    // padded row index 2p + ri
  logic signed [13:0] rimg;             // image row index
  logic [1:0]  slot;
  assign rpad = {p, 1'b0} + 13'(ri);
  assign rimg = $signed({1'b0, rpad}) - (pad_top(job) ? 14'sd1 : 14'sd0);
  assign slot = rpad[1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      done     <= 1'b0;
      slot_ok  <= '0;
      c        <= '0;
      p        <= '0;
      ri       <= '0;
      x        <= '0;
      t0       <= '0;
      row_base <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c        <= '0;
          p        <= '0;
          ri       <= '0;
          row_base <= '0;
          state    <= S_ROW;
        end
        S_ROW: begin
          if (ri == 3'd4) begin
            t0    <= '0;
            state <= S_TILE;
          end else if (rimg >= 0 && rimg < $signed({2'b00, job.h})) begin
            state <= S_AR;
          end else begin
            slot_ok[slot] <= 1'b0;
            ri <= ri + 3'd1;
          end
        end
        S_AR: if (arready) begin
          x     <= '0;
          state <= S_RECV;
        end
        S_RECV: if (rvalid) begin
          x <= x + 12'd1;
          if (rlast) begin
            slot_ok[slot] <= 1'b1;
            ri    <= ri + 3'd1;
            state <= S_ROW;
          end
        end
        S_TILE: begin
          if (t0 + 12'd4 >= dims.tpr) begin
            row_base <= row_base + TAW'(dims.tpr);
            ri <= 3'd2;
            if (p + 12'd1 == dims.p) begin
              p  <= '0;
              ri <= '0;
              if (c + 16'd1 == job.c) state <= S_DONE;
              else c <= c + 16'd1;
            end else begin
              p <= p + 12'd1;
            end
            if (!(c + 16'd1 == job.c && p + 12'd1 == dims.p)) state <= S_ROW;
          end
          t0 <= t0 + 12'd4;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // temporary row buffer write
  always_ff @(posedge clk) begin
    if (state == S_RECV && rvalid)
      temp[slot][XW'(x) + XW'(job.pad)] <= rdata;
  end

  // memory read request: one burst of W beats for image row rimg of channel c
  logic [47:0] row_word;
  assign row_word = 48'(c) * 48'(dims.cstr) + 48'(rimg[11:0]) * 48'(job.w);
  assign arvalid  = (state == S_AR);
  assign araddr   = job.in_addr + ADDR_W'(row_word << 2);
  assign arlen    = 8'(job.w - 12'd1);
  assign rready   = (state == S_RECV);

  // tiling: eight columns, four tiles, per cycle
  fp32_t [7:0][3:0] col_in, col_out;
  always_comb begin
    for (int k = 0; k < 8; k++) begin
      logic [12:0] xc;
      xc = {t0, 1'b0} + 13'(k);
      for (int r = 0; r < 4; r++) begin
        logic [1:0] s;
        s = 2'(p * 2) + 2'(r);
        if (slot_ok[s] && xc >= 13'(job.pad) && xc < 13'(job.w) + 13'(job.pad) && xc < 13'(WP))
          col_in[k][r] = temp[s][XW'(xc)];
        else
          col_in[k][r] = '0;
      end
    end
  end

  for (genvar k = 0; k < NUM_IN_PT; k++) begin : g_col_pt
    wino_pt u_pt (.i(col_in[k]), .o(col_out[k]));
  end

  always_comb begin
    for (int t = 0; t < 4; t++)
      for (int r = 0; r < 4; r++)
        for (int j = 0; j < 2; j++)
          tb_wr_tile[t][r][j] = col_out[2*t+j][r];
  end
  assign tb_wr_en   = (state == S_TILE);
  assign tb_wr_base = row_base + TAW'(t0);
  assign tb_wr_mask = 4'hF;

  // AXI read address must stay stable until accepted
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    arvalid && !arready |=> arvalid && $stable(araddr) && $stable(arlen));

endmodule
