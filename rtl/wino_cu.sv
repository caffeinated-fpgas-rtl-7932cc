// wino_cu: one compute unit of the Winograd F(2x2,3x3) convolution engine.
//
// A compute unit runs one convolution job (one image of one 3x3, stride-1 layer, or the
// part of it that fits the on-chip buffers) described by the job_t kernel arguments:
//   1. input stage: all C input channels are read from memory and stored as
//      column-transformed 4x2 tiles in the tile buffer,
//   2. for each output feature map k = 0..K-1:
//        compute stage: load U[k][*], run the four processing elements over C*P*G
//        tile groups, accumulating into the partial result buffers,
//        output stage: gather the partial results row by row and burst-write them.
// The three stages run one after the other; their order follows the paper, the absence
// of overlap between them is this design's simplification. A job that does not fit the
// buffers, or that breaks the one-burst-per-row rule (W, Wo <= 256), is refused:
// done rises with error set and memory is not touched. `cycles` holds the length of the
// last job in clock cycles. The memory port is an AXI4-style master (AR, R, AW, W, B;
// one fp32 per beat, INCR bursts, byte addresses); the read channels are switched
// between the input stage and the compute stage according to the phase.
module wino_cu
  import wino_pkg::*;
#(
  parameter int unsigned TPR_MAX   = 120,    // max input tiles per row
  parameter int unsigned TB_DEPTH  = 32768,  // tile buffer depth (4x2 tiles)
  parameter int unsigned PRB_DEPTH = 4096,   // partial result entries per PE
  parameter int unsigned MAX_C     = 1024     // max input channels
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  job_t              job,
  output logic              busy,
  output logic              done,
  output logic              error,
  output logic [31:0]       cycles,
  // memory master
  output logic              m_arvalid,
  input  logic              m_arready,
  output logic [ADDR_W-1:0] m_araddr,
  output logic [7:0]        m_arlen,
  input  logic              m_rvalid,
  output logic              m_rready,
  input  fp32_t             m_rdata,
  input  logic              m_rlast,
  output logic              m_awvalid,
  input  logic              m_awready,
  output logic [ADDR_W-1:0] m_awaddr,
  output logic [7:0]        m_awlen,
  output logic              m_wvalid,
  input  logic              m_wready,
  output fp32_t             m_wdata,
  output logic              m_wlast,
  input  logic              m_bvalid,
  output logic              m_bready
);

  localparam int unsigned TAW = $clog2(TB_DEPTH);
  localparam int unsigned PAW = $clog2(PRB_DEPTH);

  typedef enum logic [2:0] {S_IDLE, S_CHECK, S_INPUT, S_COMP, S_OUT, S_DONE} state_t;
  state_t state;

  job_t        job_q;
  dims_t       dims;
  logic [15:0] k;
  logic        is_start, cs_start, os_start;
  logic        is_done, cs_done, os_done;

  assign dims = derive_dims(job_q);

  // does the job fit?
  logic fits;
  always_comb begin
    logic [47:0] tiles, prs;
    tiles = 48'(job_q.c) * 48'(dims.p) * 48'(dims.tpr);
    prs   = 48'(dims.p) * 48'(dims.g);
    fits  = (job_q.c != 0) && (job_q.k != 0) &&
            (job_q.c <= 16'(MAX_C)) &&
            (job_q.h + 12'(pad_top(job_q)) + 12'(pad_bot(job_q)) >= 12'd3) &&
            (job_q.w + (job_q.pad ? 12'd2 : 12'd0) >= 12'd3) &&
            (job_q.w <= 12'(MAX_BURST)) && (dims.wo <= 12'(MAX_BURST)) &&
            (dims.tpr <= 12'(TPR_MAX)) &&
            (tiles <= 48'(TB_DEPTH)) && (prs <= 48'(PRB_DEPTH));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      job_q    <= '0;
      k        <= '0;
      done     <= 1'b0;
      error    <= 1'b0;
      cycles   <= '0;
      is_start <= 1'b0;
      cs_start <= 1'b0;
      os_start <= 1'b0;
    end else begin
      done     <= 1'b0;
      is_start <= 1'b0;
      cs_start <= 1'b0;
      os_start <= 1'b0;
      if (state != S_IDLE) cycles <= cycles + 32'd1;
      unique case (state)
        S_IDLE: if (start) begin
          job_q  <= job;
          cycles <= '0;
          error  <= 1'b0;
          state  <= S_CHECK;
        end
        S_CHECK: begin
          if (fits) begin
            is_start <= 1'b1;
            state    <= S_INPUT;
          end else begin
            error <= 1'b1;
            state <= S_DONE;
          end
        end
        S_INPUT: if (is_done) begin
          k        <= '0;
          cs_start <= 1'b1;
          state    <= S_COMP;
        end
        S_COMP: if (cs_done) begin
          os_start <= 1'b1;
          state    <= S_OUT;
        end
        S_OUT: if (os_done) begin
          if (k + 16'd1 == job_q.k) begin
            state <= S_DONE;
          end else begin
            k        <= k + 16'd1;
            cs_start <= 1'b1;
            state    <= S_COMP;
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

  assign busy = (state != S_IDLE);

  // ---------------------------------------------------------------- tile buffer
  logic                 tb_wr_en, tb_rd_en;
  logic [TAW-1:0]       tb_wr_base, tb_rd_base;
  logic [3:0]           tb_wr_mask;
  tile42_t [3:0]        tb_wr_tile;
  tile42_t [4:0]        tb_rd_tile;

  wino_tile_buffer #(.DEPTH(TB_DEPTH)) u_tiles (
    .clk,
    .wr_en(tb_wr_en), .wr_base(tb_wr_base), .wr_mask(tb_wr_mask), .wr_tile(tb_wr_tile),
    .rd_en(tb_rd_en), .rd_base(tb_rd_base), .rd_tile(tb_rd_tile)
  );

  // ---------------------------------------------------------------- input stage
  logic              is_arvalid, is_rready;
  logic [ADDR_W-1:0] is_araddr;
  logic [7:0]        is_arlen;

  wino_input_stage #(.TPR_MAX(TPR_MAX), .TB_DEPTH(TB_DEPTH)) u_input (
    .clk, .rst_n,
    .start(is_start), .job(job_q), .dims, .done(is_done),
    .arvalid(is_arvalid), .arready(m_arready && state == S_INPUT),
    .araddr(is_araddr), .arlen(is_arlen),
    .rvalid(m_rvalid && state == S_INPUT), .rready(is_rready),
    .rdata(m_rdata), .rlast(m_rlast),
    .tb_wr_en, .tb_wr_base, .tb_wr_mask, .tb_wr_tile
  );

  // ---------------------------------------------------------------- compute stage
  logic              cs_arvalid, cs_rready;
  logic [ADDR_W-1:0] cs_araddr;
  logic [7:0]        cs_arlen;
  logic [PAW-1:0]    pr_addr;
  tile22_t [NUM_PE-1:0] pr_data;

  wino_compute_stage #(.MAX_C(MAX_C), .TB_DEPTH(TB_DEPTH), .PRB_DEPTH(PRB_DEPTH)) u_compute (
    .clk, .rst_n,
    .start(cs_start), .job(job_q), .dims, .k_idx(k), .done(cs_done), .running(),
    .arvalid(cs_arvalid), .arready(m_arready && state == S_COMP),
    .araddr(cs_araddr), .arlen(cs_arlen),
    .rvalid(m_rvalid && state == S_COMP), .rready(cs_rready),
    .rdata(m_rdata), .rlast(m_rlast),
    .tb_rd_en, .tb_rd_base, .tb_rd_tile,
    .rd_addr(pr_addr), .rd_data(pr_data)
  );

  // ---------------------------------------------------------------- output stage
  wino_output_stage #(.TPR_MAX(TPR_MAX), .PRB_DEPTH(PRB_DEPTH)) u_output (
    .clk, .rst_n,
    .start(os_start), .job(job_q), .dims, .k_idx(k), .done(os_done),
    .rd_addr(pr_addr), .rd_data(pr_data),
    .awvalid(m_awvalid), .awready(m_awready), .awaddr(m_awaddr), .awlen(m_awlen),
    .wvalid(m_wvalid), .wready(m_wready), .wdata(m_wdata), .wlast(m_wlast),
    .bvalid(m_bvalid), .bready(m_bready)
  );

  // ---------------------------------------------------------------- read channel switch
  always_comb begin
    if (state == S_COMP) begin
      m_arvalid = cs_arvalid;
      m_araddr  = cs_araddr;
      m_arlen   = cs_arlen;
      m_rready  = cs_rready;
    end else begin
      m_arvalid = is_arvalid && (state == S_INPUT);
      m_araddr  = is_araddr;
      m_arlen   = is_arlen;
      m_rready  = is_rready && (state == S_INPUT);
    end
  end

endmodule
