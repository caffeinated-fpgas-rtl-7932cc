// tb_wino_cu: one compute unit end to end. A random 3-channel 6 x 9 input and three
// 3x3 filters (transformed to U here) are placed in the memory model; the unit runs the
// job with one pixel of padding under random memory stalls and every output pixel of the
// three maps is compared with a direct convolution computed in double precision. Then
// a job with too many channels must be refused (error, no memory traffic), and a second
// job without padding must again give correct results, and finally one layer is run as
// two row-band jobs whose results together must match the whole convolution.
module tb_wino_cu;
  import wino_pkg::*;
  import fp_ref_pkg::*;
  import conv_ref_pkg::*;

  localparam int IN = 32'h0, WB = 32'h2000, OB = 32'h3000;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  logic start = 0, busy, done, error;
  logic [31:0] cycles;
  job_t job;
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_rlast;
  logic m_awvalid, m_awready, m_wvalid, m_wready, m_wlast, m_bvalid, m_bready;
  logic [31:0] m_araddr, m_awaddr;
  logic [7:0] m_arlen, m_awlen;
  fp32_t m_rdata, m_wdata;
  int stalls, rd_bursts, wr_bursts, errors;
  int checks = 0, failures = 0;

  wino_cu dut (.*);

  axi_mem_model #(.NP(1), .WORDS(16384)) u_mem (
    .clk, .rst_n,
    .arvalid(m_arvalid), .arready(m_arready), .araddr(m_araddr), .arlen(m_arlen),
    .rvalid(m_rvalid), .rready(m_rready), .rdata(m_rdata), .rlast(m_rlast),
    .awvalid(m_awvalid), .awready(m_awready), .awaddr(m_awaddr), .awlen(m_awlen),
    .wvalid(m_wvalid), .wready(m_wready), .wdata(m_wdata), .wlast(m_wlast),
    .bvalid(m_bvalid), .bready(m_bready),
    .stalls, .rd_bursts, .wr_bursts, .errors
  );

  task automatic run_job(int c, int k, int h, int w, int pad);
    conv_job cj;
    int measured;
    cj = new(c, k, h, w, pad);
    foreach (cj.x[i]) u_mem.mem[IN / 4 + i] = r2f(cj.x[i]);
    for (int ko = 0; ko < k; ko++)
      for (int ci = 0; ci < c; ci++)
        for (int e = 0; e < 16; e++) u_mem.mem[WB / 4 + (ko * c + ci) * 16 + e] = cj.u(ko, ci, e / 4, e % 4);
    job = '0;
    job.in_addr = IN; job.w_addr = WB; job.out_addr = OB;
    job.c = 16'(c); job.k = 16'(k); job.h = 12'(h); job.w = 12'(w); job.pad = 1'(pad);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    measured = 1;
    while (!done) begin
      @(negedge clk);
      measured++;
    end
    checks++;
    if (error || cycles + 1 != 32'(measured)) begin
      failures++;
      $display("FAIL error %0b cycles %0d measured %0d", error, cycles, measured);
    end
    for (int ko = 0; ko < k; ko++)
      for (int y = 0; y < cj.ho; y++)
        for (int x = 0; x < cj.wo; x++) begin
          real e, sc, g;
          e = cj.out(ko, y, x, sc);
          g = f2r(u_mem.mem[OB / 4 + (ko * cj.ho + y) * cj.wo + x]);
          checks++;
          if (!close(g, e, sc)) begin
            failures++;
            if (failures < 10) $display("FAIL k%0d (%0d,%0d) %f vs %f", ko, y, x, g, e);
          end
        end
  endtask

  // One layer run as two row bands (jobs) that share a one-row halo: band 0 gives output
  // rows 0..3 (top padding only), band 1 rows 4..9 (bottom padding only).
  task automatic run_banded(int c, int k, int w);
    conv_job cj;
    int h, ho, r0 [2], nr [2], y0 [2];
    h = 10; ho = 10;
    r0 = '{0, 3}; nr = '{5, 7}; y0 = '{0, 4};
    cj = new(c, k, h, w, 1);
    foreach (cj.x[i]) u_mem.mem[IN / 4 + i] = r2f(cj.x[i]);
    for (int ko = 0; ko < k; ko++)
      for (int ci = 0; ci < c; ci++)
        for (int e = 0; e < 16; e++) u_mem.mem[WB / 4 + (ko * c + ci) * 16 + e] = cj.u(ko, ci, e / 4, e % 4);
    for (int b = 0; b < 2; b++) begin
      job = '0;
      job.in_addr = 32'(IN + 4 * r0[b] * w); job.w_addr = WB; job.out_addr = 32'(OB + 4 * y0[b] * w);
      job.c = 16'(c); job.k = 16'(k); job.h = 12'(nr[b]); job.w = 12'(w); job.pad = 1'b1;
      job.no_pad_top = (b == 1); job.no_pad_bot = (b == 0);
      job.in_cstride = 24'(h * w); job.out_kstride = 24'(ho * w);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      wait (done);
      @(negedge clk);
      checks++;
      if (error) begin
        failures++;
        $display("FAIL band %0d refused", b);
      end
    end
    for (int ko = 0; ko < k; ko++)
      for (int y = 0; y < ho; y++)
        for (int x = 0; x < w; x++) begin
          real e, sc, g;
          e = cj.out(ko, y, x, sc);
          g = f2r(u_mem.mem[OB / 4 + (ko * ho + y) * w + x]);
          checks++;
          if (!close(g, e, sc)) begin
            failures++;
            if (failures < 10) $display("FAIL banded k%0d (%0d,%0d) %f vs %f", ko, y, x, g, e);
          end
        end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int b;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_job(3, 3, 6, 9, 1);
    // refused job: more channels than the weight buffer holds
    b = rd_bursts + wr_bursts;
    job.c = 16'd2000;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (done);
    @(negedge clk);
    checks++;
    if (!error || rd_bursts + wr_bursts != b) begin
      failures++;
      $display("FAIL oversized job not refused");
    end
    run_job(5, 2, 8, 8, 0);
    run_banded(3, 2, 8);
    checks++;
    if (errors != 0 || stalls == 0) begin
      failures++;
      $display("FAIL memory errors %0d stalls %0d", errors, stalls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
