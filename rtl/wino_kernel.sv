// wino_kernel: the Winograd convolution kernel with NUM_CU replicated compute units.
//
// Each compute unit (wino_cu) has its own local memories (tile buffer, weight buffer,
// partial result buffers, row buffers), its own job arguments, start/done handshake and
// its own memory master port; all of them share the off-chip global memory, which sits
// outside this module together with the platform interconnect. The paper uses two
// compute units, each working on a separate image (coarse-grained data parallelism), so
// a batch of N images takes about N/NUM_CU job times. Ports are arrays indexed by
// compute unit.
module wino_kernel
  import wino_pkg::*;
#(
  parameter int unsigned NUM_CU    = 2,
  parameter int unsigned TPR_MAX   = 120,
  parameter int unsigned TB_DEPTH  = 32768,
  parameter int unsigned PRB_DEPTH = 4096,
  parameter int unsigned MAX_C     = 1024
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic  [NUM_CU-1:0]             start,
  input  job_t  [NUM_CU-1:0]             job,
  output logic  [NUM_CU-1:0]             busy,
  output logic  [NUM_CU-1:0]             done,
  output logic  [NUM_CU-1:0]             error,
  output logic  [NUM_CU-1:0][31:0]       cycles,
  output logic  [NUM_CU-1:0]             m_arvalid,
  input  logic  [NUM_CU-1:0]             m_arready,
  output logic  [NUM_CU-1:0][ADDR_W-1:0] m_araddr,
  output logic  [NUM_CU-1:0][7:0]        m_arlen,
  input  logic  [NUM_CU-1:0]             m_rvalid,
  output logic  [NUM_CU-1:0]             m_rready,
  input  fp32_t [NUM_CU-1:0]             m_rdata,
  input  logic  [NUM_CU-1:0]             m_rlast,
  output logic  [NUM_CU-1:0]             m_awvalid,
  input  logic  [NUM_CU-1:0]             m_awready,
  output logic  [NUM_CU-1:0][ADDR_W-1:0] m_awaddr,
  output logic  [NUM_CU-1:0][7:0]        m_awlen,
  output logic  [NUM_CU-1:0]             m_wvalid,
  input  logic  [NUM_CU-1:0]             m_wready,
  output fp32_t [NUM_CU-1:0]             m_wdata,
  output logic  [NUM_CU-1:0]             m_wlast,
  input  logic  [NUM_CU-1:0]             m_bvalid,
  output logic  [NUM_CU-1:0]             m_bready
);

  for (genvar i = 0; i < NUM_CU; i++) begin : g_cu
    wino_cu #(
      .TPR_MAX(TPR_MAX), .TB_DEPTH(TB_DEPTH), .PRB_DEPTH(PRB_DEPTH), .MAX_C(MAX_C)
    ) u_cu (
      .clk, .rst_n,
      .start(start[i]), .job(job[i]), .busy(busy[i]), .done(done[i]),
      .error(error[i]), .cycles(cycles[i]),
      .m_arvalid(m_arvalid[i]), .m_arready(m_arready[i]),
      .m_araddr(m_araddr[i]), .m_arlen(m_arlen[i]),
      .m_rvalid(m_rvalid[i]), .m_rready(m_rready[i]),
      .m_rdata(m_rdata[i]), .m_rlast(m_rlast[i]),
      .m_awvalid(m_awvalid[i]), .m_awready(m_awready[i]),
      .m_awaddr(m_awaddr[i]), .m_awlen(m_awlen[i]),
      .m_wvalid(m_wvalid[i]), .m_wready(m_wready[i]),
      .m_wdata(m_wdata[i]), .m_wlast(m_wlast[i]),
      .m_bvalid(m_bvalid[i]), .m_bready(m_bready[i])
    );
  end

endmodule
