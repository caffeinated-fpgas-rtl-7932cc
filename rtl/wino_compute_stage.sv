// wino_compute_stage: weight buffer, loop control and four processing elements.
//
// One run computes one output feature map k of a job:
//   1. burst-reads the C transformed 4x4 filters U[k][0..C-1] (16 fp32 each, stored
//      contiguously in memory by the host) into the weight buffer,
//   2. for c = 0..C-1, p = 0..P-1, g = 0..G-1 issues, one per cycle, a read of tiles
//      4g .. 4g+4 of tile row p of channel c from the tile buffer; processing element i
//      receives tiles 4g+i and 4g+i+1 and so computes output tile (p, 4g+i), which it
//      adds into its partial result buffer entry p*G + g,
//   3. waits DRAIN cycles for the pipelines to empty and pulses done.
// Step 2 takes exactly C*P*G cycles, where one processing element would need C*P*Q
// (Q = output tiles per row): the four replicas make the stage four times faster, as the
// paper describes. The weight load is not overlapped with the computation; that and the
// assignment of output tile columns to processing elements (q mod 4) are this design's
// choices. The partial result buffers are read by the output stage through rd_addr and
// rd_data (one cycle latency), all four at the same address.
module wino_compute_stage
  import wino_pkg::*;
#(
  parameter int unsigned MAX_C     = 1024,    // input channels the weight buffer holds
  parameter int unsigned TB_DEPTH  = 32768,  // tile buffer depth (tiles)
  parameter int unsigned PRB_DEPTH = 4096    // partial result buffer depth per PE
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  job_t                         job,
  input  dims_t                        dims,
  input  logic [15:0]                  k_idx,
  output logic                         done,
  output logic                         running,   // a tile read is issued this cycle
  // memory read (weights)
  output logic                         arvalid,
  input  logic                         arready,
  output logic [ADDR_W-1:0]            araddr,
  output logic [7:0]                   arlen,
  input  logic                         rvalid,
  output logic                         rready,
  input  fp32_t                        rdata,
  input  logic                         rlast,
  // tile buffer read port
  output logic                         tb_rd_en,
  output logic [$clog2(TB_DEPTH)-1:0]  tb_rd_base,
  input  tile42_t [4:0]                tb_rd_tile,
  // partial result read port for the output stage
  input  logic [$clog2(PRB_DEPTH)-1:0] rd_addr,
  output tile22_t [NUM_PE-1:0]         rd_data
);

  localparam int unsigned TAW   = $clog2(TB_DEPTH);
  localparam int unsigned PAW   = $clog2(PRB_DEPTH);
  localparam int unsigned CW    = $clog2(MAX_C);
  localparam int unsigned DRAIN = 7;   // tile read (1) + processing element (6)

  typedef enum logic [2:0] {S_IDLE, S_AR, S_RECV, S_RUN, S_DRAIN, S_DONE} state_t;
  state_t state;

  blk44_t      wbuf [MAX_C];
  logic [19:0] widx;        // weight words received
  logic [19:0] wtot;        // C*16
  logic [19:0] wreq;        // weight words requested
  logic [15:0] cc;
  logic [11:0] pp, gg;
  logic [TAW-1:0] rbase;    // tile address of tile 0 of (cc, pp)
  logic [PAW-1:0] pbase;    // partial result address of (pp, 0)
  logic [3:0]  dcnt;

  assign wtot = 20'(job.c) << 4;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      widx  <= '0;
      wreq  <= '0;
      cc    <= '0;
      pp    <= '0;
      gg    <= '0;
      rbase <= '0;
      pbase <= '0;
      dcnt  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          widx  <= '0;
          wreq  <= '0;
          state <= S_AR;
        end
        S_AR: if (arready) begin
          wreq  <= wreq + 20'(arlen) + 20'd1;
          state <= S_RECV;
        end
        S_RECV: if (rvalid) begin
          widx <= widx + 20'd1;
          if (rlast) begin
            if (wreq == wtot) begin
              cc    <= '0;
              pp    <= '0;
              gg    <= '0;
              rbase <= '0;
              pbase <= '0;
              state <= S_RUN;
            end else begin
              state <= S_AR;
            end
          end
        end
        S_RUN: begin
          if (gg + 12'd1 == dims.g) begin
            gg    <= '0;
            rbase <= rbase + TAW'(dims.tpr);
            if (pp + 12'd1 == dims.p) begin
              pp    <= '0;
              pbase <= '0;
              if (cc + 16'd1 == job.c) begin
                dcnt  <= '0;
                state <= S_DRAIN;
              end
              cc <= cc + 16'd1;
            end else begin
              pp    <= pp + 12'd1;
              pbase <= pbase + PAW'(dims.g);
            end
          end else begin
            gg <= gg + 12'd1;
          end
        end
        S_DRAIN: begin
          dcnt <= dcnt + 4'd1;
          if (dcnt + 4'd1 == 4'(DRAIN)) state <= S_DONE;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // weight load: bursts of up to 256 words (16 channels)
  logic [19:0] wleft;
  logic [47:0] wword;
  assign wleft   = wtot - wreq;
  assign wword   = 48'(k_idx) * 48'(wtot) + 48'(wreq);
  assign arvalid = (state == S_AR);
  assign araddr  = job.w_addr + ADDR_W'(wword << 2);
  assign arlen   = (wleft > 20'(MAX_BURST)) ? 8'(MAX_BURST - 1) : 8'(wleft - 20'd1);
  assign rready  = (state == S_RECV);

  // sixteen beats are collected into one 4x4 filter, then written as one word
  blk44_t wasm;
  always_ff @(posedge clk) begin
    if (state == S_RECV && rvalid) begin
      wasm[widx[3:2]][widx[1:0]] <= rdata;
      if (widx[3:0] == 4'd15) begin
        blk44_t wfull;
        wfull = wasm;
        wfull[3][3] = rdata;
        wbuf[CW'(widx >> 4)] <= wfull;
      end
    end
  end

  // issue: tile buffer read and weight read in the same cycle
  assign running    = (state == S_RUN);
  assign tb_rd_en   = running;
  assign tb_rd_base = rbase + TAW'({gg, 2'b00});

  logic           v_q, first_q;
  logic [PAW-1:0] addr_q;
  blk44_t         u_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_q <= 1'b0;
    else        v_q <= running;
  end
  always_ff @(posedge clk) begin
    addr_q  <= pbase + PAW'(gg);
    first_q <= (cc == '0);
    u_q     <= wbuf[CW'(cc)];
  end

  for (genvar i = 0; i < NUM_PE; i++) begin : g_pe
    wino_pe #(.DEPTH(PRB_DEPTH)) u_pe (
      .clk, .rst_n,
      .in_valid (v_q),
      .in_left  (tb_rd_tile[i]),
      .in_right (tb_rd_tile[i+1]),
      .in_u     (u_q),
      .in_addr  (addr_q),
      .in_first (first_q),
      .acc_valid(),
      .rd_addr,
      .rd_data  (rd_data[i])
    );
  end

  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    arvalid && !arready |=> arvalid && $stable(araddr) && $stable(arlen));

endmodule
