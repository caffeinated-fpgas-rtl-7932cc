// axi_mem_model: behavioural model of the off-chip global memory for the testbenches.
//
// NP independent AXI4-style slave ports (AR/R, AW/W/B, one 32-bit word per beat, INCR
// bursts, byte addresses) onto one word array `mem` that a testbench fills and reads
// hierarchically. With STALL = 1 every handshake is delayed at random (ready and valid
// drop about one cycle in four), which exercises the masters' stall handling; the
// number of such stall cycles is counted. Addresses outside the array and protocol
// errors (burst length changing, write data without an address) are counted in errors.
module axi_mem_model #(
  parameter int NP    = 1,
  parameter int WORDS = 65536,
  parameter bit STALL = 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NP-1:0]          arvalid,
  output logic [NP-1:0]          arready,
  input  logic [NP-1:0][31:0]    araddr,
  input  logic [NP-1:0][7:0]     arlen,
  output logic [NP-1:0]          rvalid,
  input  logic [NP-1:0]          rready,
  output logic [NP-1:0][31:0]    rdata,
  output logic [NP-1:0]          rlast,
  input  logic [NP-1:0]          awvalid,
  output logic [NP-1:0]          awready,
  input  logic [NP-1:0][31:0]    awaddr,
  input  logic [NP-1:0][7:0]     awlen,
  input  logic [NP-1:0]          wvalid,
  output logic [NP-1:0]          wready,
  input  logic [NP-1:0][31:0]    wdata,
  input  logic [NP-1:0]          wlast,
  output logic [NP-1:0]          bvalid,
  input  logic [NP-1:0]          bready,
  output int                     stalls,
  output int                     rd_bursts,
  output int                     wr_bursts,
  output int                     errors
);

  logic [31:0] mem [WORDS];

  logic [NP-1:0]       rd_act, wr_act, rnd_r, rnd_a, rnd_w, rnd_aw;
  logic [NP-1:0][31:0] rd_ptr, wr_ptr;
  logic [NP-1:0][8:0]  rd_left, wr_left;

  for (genvar p = 0; p < NP; p++) begin : g_port
    assign arready[p] = !rd_act[p] && (!STALL || rnd_a[p]);
    assign rvalid[p]  = rd_act[p] && (!STALL || rnd_r[p]);
    assign rdata[p]   = mem[(rd_ptr[p] >> 2) % WORDS];
    assign rlast[p]   = (rd_left[p] == 9'd1);
    assign awready[p] = !wr_act[p] && !bvalid[p] && (!STALL || rnd_aw[p]);
    assign wready[p]  = wr_act[p] && (!STALL || rnd_w[p]);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rd_act[p] <= 1'b0;
        wr_act[p] <= 1'b0;
        bvalid[p] <= 1'b0;
        rd_left[p] <= '0;
        wr_left[p] <= '0;
        rd_ptr[p] <= '0;
        wr_ptr[p] <= '0;
        {rnd_r[p], rnd_a[p], rnd_w[p], rnd_aw[p]} <= '0;
      end else begin
        {rnd_r[p], rnd_a[p], rnd_w[p], rnd_aw[p]} <=
          {($urandom_range(3, 0) != 0), ($urandom_range(3, 0) != 0),
           ($urandom_range(3, 0) != 0), ($urandom_range(3, 0) != 0)};
        if (arvalid[p] && arready[p]) begin
          rd_act[p]  <= 1'b1;
          rd_ptr[p]  <= araddr[p];
          rd_left[p] <= 9'(arlen[p]) + 9'd1;
        end
        if (rvalid[p] && rready[p]) begin
          rd_ptr[p]  <= rd_ptr[p] + 32'd4;
          rd_left[p] <= rd_left[p] - 9'd1;
          if (rd_left[p] == 9'd1) rd_act[p] <= 1'b0;
        end
        if (awvalid[p] && awready[p]) begin
          wr_act[p]  <= 1'b1;
          wr_ptr[p]  <= awaddr[p];
          wr_left[p] <= 9'(awlen[p]) + 9'd1;
        end
        if (wvalid[p] && wready[p]) begin
          wr_ptr[p]  <= wr_ptr[p] + 32'd4;
          wr_left[p] <= wr_left[p] - 9'd1;
          if (wr_left[p] == 9'd1) begin
            wr_act[p] <= 1'b0;
            bvalid[p] <= 1'b1;
          end
        end
        if (bvalid[p] && bready[p]) bvalid[p] <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stalls <= 0;
      rd_bursts <= 0;
      wr_bursts <= 0;
      errors <= 0;
    end else begin
      for (int p = 0; p < NP; p++) begin
        if ((arvalid[p] && !arready[p]) || (rd_act[p] && rready[p] && !rvalid[p]) ||
            (awvalid[p] && !awready[p]) || (wvalid[p] && !wready[p] && wr_act[p]))
          stalls <= stalls + 1;
        if (arvalid[p] && arready[p]) begin
          rd_bursts <= rd_bursts + 1;
          if ((araddr[p] >> 2) + 32'(arlen[p]) >= 32'(WORDS)) errors <= errors + 1;
        end
        if (awvalid[p] && awready[p]) begin
          wr_bursts <= wr_bursts + 1;
          if ((awaddr[p] >> 2) + 32'(awlen[p]) >= 32'(WORDS)) errors <= errors + 1;
        end
        if (wvalid[p] && wready[p]) begin
          if ((wr_left[p] == 9'd1) != wlast[p]) errors <= errors + 1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NP; p++)
      if (wvalid[p] && wready[p]) mem[(wr_ptr[p] >> 2) % WORDS] <= wdata[p];
  end

endmodule
