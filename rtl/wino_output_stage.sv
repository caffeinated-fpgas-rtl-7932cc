// wino_output_stage: writes one finished output feature map back to off-chip memory.
//
// For every output row y (0 .. Ho-1) it
//   1. gathers the row from the partial result buffers of the four processing elements
//      into the output buffer: in cycle g it reads entry (y/2)*G + g of all four, and
//      processing element i supplies output columns 8g+2i and 8g+2i+1 (row y mod 2 of
//      its 2x2 tile); G cycles per row,
//   2. burst-writes the Wo words of the row to out_addr + ((k*Ho + y)*Wo)*4 and waits
//      for the write response.
// Columns computed beyond Wo (tile padding) are dropped here. The paper gives the two
// steps (gather into an output buffer, then burst write over AXI); the one-row output
// buffer, one burst per row (Wo <= 256) and one fp32 per beat are this design's choices.
module wino_output_stage
  import wino_pkg::*;
#(
  parameter int unsigned TPR_MAX   = 120,   // max tiles per row; sets the row buffer size
  parameter int unsigned PRB_DEPTH = 4096
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  job_t                         job,
  input  dims_t                        dims,
  input  logic [15:0]                  k_idx,
  output logic                         done,
  // partial result buffer read
  output logic [$clog2(PRB_DEPTH)-1:0] rd_addr,
  input  tile22_t [NUM_PE-1:0]         rd_data,
  // memory write
  output logic                         awvalid,
  input  logic                         awready,
  output logic [ADDR_W-1:0]            awaddr,
  output logic [7:0]                   awlen,
  output logic                         wvalid,
  input  logic                         wready,
  output fp32_t                        wdata,
  output logic                         wlast,
  input  logic                         bvalid,
  output logic                         bready
);

  localparam int unsigned OBW = 2 * TPR_MAX;
  localparam int unsigned OAW = $clog2(OBW);
  localparam int unsigned PAW = $clog2(PRB_DEPTH);

  typedef enum logic [2:0] {S_IDLE, S_GATHER, S_AW, S_W, S_B, S_DONE} state_t;
  state_t state;

  fp32_t       obuf [OBW];
  logic [11:0] y, g, x;
  logic [PAW-1:0] prow;        // (y/2)*G
  logic        cap_v;          // read data of cycle g_q arrives
  logic [11:0] g_q;
  logic        row_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      y     <= '0;
      g     <= '0;
      x     <= '0;
      prow  <= '0;
      cap_v <= 1'b0;
      g_q   <= '0;
      row_q <= 1'b0;
    end else begin
      done  <= 1'b0;
      cap_v <= (state == S_GATHER) && (g < dims.g);
      g_q   <= g;
      row_q <= y[0];
      unique case (state)
        S_IDLE: if (start) begin
          y     <= '0;
          g     <= '0;
          prow  <= '0;
          state <= S_GATHER;
        end
        S_GATHER: begin
          // issue G reads, then one more cycle for the last capture
          if (g == dims.g) begin
            state <= S_AW;
          end else begin
            g <= g + 12'd1;
          end
        end
        S_AW: if (awready) begin
          x     <= '0;
          state <= S_W;
        end
        S_W: if (wready) begin
          x <= x + 12'd1;
          if (wlast) state <= S_B;
        end
        S_B: if (bvalid) begin
          g <= '0;
          if (y + 12'd1 == dims.ho) begin
            state <= S_DONE;
          end else begin
            y <= y + 12'd1;
            if (y[0]) prow <= prow + PAW'(dims.g);
            state <= S_GATHER;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign rd_addr = prow + PAW'(g);

  always_ff @(posedge clk) begin
    if (cap_v) begin
      for (int i = 0; i < NUM_PE; i++)
        for (int j = 0; j < 2; j++)
          obuf[OAW'({g_q, 3'b000}) + OAW'(2*i + j)] <= rd_data[i][row_q][j];
    end
  end

  logic [47:0] oword;
  assign oword   = 48'(k_idx) * 48'(dims.kstr) + 48'(y) * 48'(dims.wo);
  assign awvalid = (state == S_AW);
  assign awaddr  = job.out_addr + ADDR_W'(oword << 2);
  assign awlen   = 8'(dims.wo - 12'd1);
  assign wvalid  = (state == S_W);
  assign wdata   = obuf[OAW'(x)];
  assign wlast   = (state == S_W) && (x + 12'd1 == dims.wo);
  assign bready  = (state == S_B);

  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    awvalid && !awready |=> awvalid && $stable(awaddr) && $stable(awlen));
  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
    wvalid && !wready |=> wvalid && $stable(wdata) && $stable(wlast));

endmodule
