// tb_wino_workload: full-depth 3x3 layers of the four benchmark networks on the kernel.
//
// One 3x3 layer from each network is run with all of its input channels and spatial
// size, but only a few of its output maps (the maps are independent, each repeats the
// same work):
//   AlexNet  conv5      256 ch, 13 x 13, 8 of 256 maps   (compute unit 0)
//   Overfeat conv5     1024 ch, 12 x 12, 2 of 1024 maps  (compute unit 0)
//   GoogleNet 5b 3x3    192 ch,  7 x 7,  8 of 384 maps   (compute unit 1)
//   VGG A    conv5_x    512 ch, 14 x 14, 4 of 512 maps   (compute unit 1)
// Layer sizes are those of the published networks. A layer whose tiles exceed the tile
// buffer is split by this testbench, acting as the host, into row bands of at most
// floor(TB_DEPTH / (C*TPR)) tile rows that share a one-row halo. Both units run at the
// same time on the shared memory model. Every output is compared with a direct
// convolution in double precision, and each layer's cycle count is reported next to
// its compute-stage lower bound K*C*P*G.
// The choice of networks follows the benchmarks the engine was evaluated on; the layer
// sizes are those of the published models, and the map counts and banding are this
// testbench's choices.
module tb_wino_workload;
  import wino_pkg::*;
  import fp_ref_pkg::*;
  import conv_ref_pkg::*;

  localparam int NCU = 2, TBD = 32768, PRBD = 4096;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  logic [NCU-1:0] start = '0, busy, done, error;
  logic [NCU-1:0][31:0] cycles;
  job_t [NCU-1:0] job;
  logic [NCU-1:0] m_arvalid, m_arready, m_rvalid, m_rready, m_rlast;
  logic [NCU-1:0] m_awvalid, m_awready, m_wvalid, m_wready, m_wlast, m_bvalid, m_bready;
  logic [NCU-1:0][31:0] m_araddr, m_awaddr;
  logic [NCU-1:0][7:0] m_arlen, m_awlen;
  fp32_t [NCU-1:0] m_rdata, m_wdata;
  int stalls, rd_bursts, wr_bursts, errors;
  int checks = 0, failures = 0, banded = 0;

  wino_kernel dut (.*);

  axi_mem_model #(.NP(NCU), .WORDS(1 << 20)) u_mem (
    .clk, .rst_n,
    .arvalid(m_arvalid), .arready(m_arready), .araddr(m_araddr), .arlen(m_arlen),
    .rvalid(m_rvalid), .rready(m_rready), .rdata(m_rdata), .rlast(m_rlast),
    .awvalid(m_awvalid), .awready(m_awready), .awaddr(m_awaddr), .awlen(m_awlen),
    .wvalid(m_wvalid), .wready(m_wready), .wdata(m_wdata), .wlast(m_wlast),
    .bvalid(m_bvalid), .bready(m_bready),
    .stalls, .rd_bursts, .wr_bursts, .errors
  );

  task automatic run_layer(int u, string name, int c, int k, int hw);
    conv_job cj;
    job_t j;
    dims_t d;
    int base, wbase, obase, p, pb, nb, total, bound;
    base = u * 32'h20_0000; wbase = base + 32'h10_0000; obase = base + 32'h18_0000;
    cj = new(c, k, hw, hw, 1);
    foreach (cj.x[i]) u_mem.mem[base / 4 + i] = r2f(cj.x[i]);
    for (int ko = 0; ko < k; ko++)
      for (int ci = 0; ci < c; ci++)
        for (int e = 0; e < 16; e++) u_mem.mem[wbase / 4 + (ko * c + ci) * 16 + e] = cj.u(ko, ci, e / 4, e % 4);
    j = '0;
    j.c = 16'(c); j.k = 16'(k); j.h = 12'(hw); j.w = 12'(hw); j.pad = 1'b1;
    j.w_addr = 32'(wbase);
    d = derive_dims(j);
    p = int'(d.p);
    pb = TBD / (c * int'(d.tpr));
    if (pb > p) pb = p;
    if (pb > PRBD / int'(d.g)) pb = PRBD / int'(d.g);
    nb = (p + pb - 1) / pb;
    if (nb > 1) banded++;
    total = 0;
    bound = k * c * p * int'(d.g);
    for (int b = 0; b < nb; b++) begin
      int y0, y1, r0, r1;
      y0 = 2 * b * pb;
      y1 = 2 * (b + 1) * pb - 1;
      if (y1 > cj.ho - 1) y1 = cj.ho - 1;
      r0 = (b == 0) ? 0 : y0 - 1;
      r1 = (b == nb - 1) ? hw - 1 : y1 + 1;
      j.in_addr = 32'(base + 4 * r0 * hw);
      j.out_addr = 32'(obase + 4 * y0 * cj.wo);
      j.h = 12'(r1 - r0 + 1);
      j.no_pad_top = (b != 0);
      j.no_pad_bot = (b != nb - 1);
      j.in_cstride = 24'(hw * hw);
      j.out_kstride = 24'(cj.ho * cj.wo);
      job[u] = j;
      @(negedge clk) start[u] = 1'b1;
      @(negedge clk) start[u] = 1'b0;
      while (!done[u]) @(negedge clk);
      total += int'(cycles[u]);
      checks++;
      if (error[u]) begin
        failures++;
        $display("FAIL %s band %0d refused", name, b);
      end
    end
    $display("%-10s C=%0d %0dx%0d K=%0d: %0d band(s), %0d cycles, compute-stage bound %0d",
             name, c, hw, hw, k, nb, total, bound);
    for (int ko = 0; ko < k; ko++)
      for (int y = 0; y < cj.ho; y++)
        for (int x = 0; x < cj.wo; x++) begin
          real e, sc, g;
          e = cj.out(ko, y, x, sc);
          g = f2r(u_mem.mem[obase / 4 + (ko * cj.ho + y) * cj.wo + x]);
          checks++;
          if (!close(g, e, sc)) begin
            failures++;
            if (failures < 10) $display("FAIL %s k%0d (%0d,%0d) %f vs %f", name, ko, y, x, g, e);
          end
        end
  endtask

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      begin
        run_layer(0, "AlexNet", 256, 8, 13);
        run_layer(0, "Overfeat", 1024, 2, 12);
      end
      begin
        run_layer(1, "GoogleNet", 192, 8, 7);
        run_layer(1, "VGG A", 512, 4, 14);
      end
    join
    checks++;
    if (banded == 0 || errors != 0) begin
      failures++;
      $display("FAIL banded layers %0d, memory errors %0d", banded, errors);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
