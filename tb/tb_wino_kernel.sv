// tb_wino_kernel: the whole kernel, both compute units, at the default sizes.
//
// Compute unit 0 and compute unit 1 each get their own image (data parallelism across
// units) and run at the same time against one shared memory model with random stalls:
//   unit 0: 18 channels, 7 x 12 input, 2 output maps, one pixel of padding
//   unit 1:  4 channels, 10 x 10 input, 3 output maps, no padding
// followed by a job unit 1 must refuse (input rows wider than one burst). Every output
// pixel is compared with a direct convolution computed here in double precision. The
// testbench also counts how often each mechanism of the engine was exercised and fails
// if one never was: memory stalls, padding rows that are not read, tile-row padding to
// a multiple of eight tiles, weight loads split over several bursts, first-channel
// overwrite and accumulation in the processing elements, both units busy at once, and
// job refusal. Reports the cycles each unit needed.
module tb_wino_kernel;
  import wino_pkg::*;
  import fp_ref_pkg::*;
  import conv_ref_pkg::*;

  localparam int NCU = 2;
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
  int checks = 0, failures = 0;

  // mechanism counters
  int n_pad_rows = 0, n_first = 0, n_accum = 0, n_both = 0, n_refused = 0;
  int n_tile_pad = 0, n_multi_wburst = 0;

  wino_kernel dut (.*);

  axi_mem_model #(.NP(NCU), .WORDS(32768)) u_mem (
    .clk, .rst_n,
    .arvalid(m_arvalid), .arready(m_arready), .araddr(m_araddr), .arlen(m_arlen),
    .rvalid(m_rvalid), .rready(m_rready), .rdata(m_rdata), .rlast(m_rlast),
    .awvalid(m_awvalid), .awready(m_awready), .awaddr(m_awaddr), .awlen(m_awlen),
    .wvalid(m_wvalid), .wready(m_wready), .wdata(m_wdata), .wlast(m_wlast),
    .bvalid(m_bvalid), .bready(m_bready),
    .stalls, .rd_bursts, .wr_bursts, .errors
  );

  always @(posedge clk) begin
    if (&busy) n_both++;
    if (dut.g_cu[0].u_cu.u_input.state == 3'd1 /* S_ROW */ &&
        dut.g_cu[0].u_cu.u_input.ri != 3'd4 &&
        (dut.g_cu[0].u_cu.u_input.rimg < 0 ||
         dut.g_cu[0].u_cu.u_input.rimg >= $signed({2'b00, dut.g_cu[0].u_cu.u_input.job.h})))
      n_pad_rows++;
    if (dut.g_cu[0].u_cu.u_compute.v_q) begin
      if (dut.g_cu[0].u_cu.u_compute.first_q) n_first++;
      else n_accum++;
    end
    if (dut.g_cu[0].u_cu.u_compute.state == 3'd2 /* S_RECV */ &&
        dut.g_cu[0].u_cu.u_compute.wreq > 20'd256)
      n_multi_wburst = 1;
  end

  conv_job cj [NCU];
  int ib [NCU] = '{32'h0000, 32'h10000};

  task automatic setup(int u, int c, int k, int h, int w, int pad);
    int base;
    base = ib[u] / 4;
    cj[u] = new(c, k, h, w, pad);
    foreach (cj[u].x[i]) u_mem.mem[base + i] = r2f(cj[u].x[i]);
    for (int ko = 0; ko < k; ko++)
      for (int ci = 0; ci < c; ci++)
        for (int e = 0; e < 16; e++) u_mem.mem[base + 4096 + (ko * c + ci) * 16 + e] = cj[u].u(ko, ci, e / 4, e % 4);
    job[u] = '0;
    job[u].in_addr = 32'(ib[u]);
    job[u].w_addr = 32'(ib[u] + 16384);
    job[u].out_addr = 32'(ib[u] + 32768);
    job[u].c = 16'(c); job[u].k = 16'(k); job[u].h = 12'(h); job[u].w = 12'(w); job[u].pad = 1'(pad);
    if (int'(derive_dims(job[u]).tpr) * 2 > w + 2 * pad) n_tile_pad++;
  endtask

  task automatic compare(int u);
    for (int ko = 0; ko < cj[u].k; ko++)
      for (int y = 0; y < cj[u].ho; y++)
        for (int x = 0; x < cj[u].wo; x++) begin
          real e, sc, g;
          e = cj[u].out(ko, y, x, sc);
          g = f2r(u_mem.mem[(ib[u] + 32768) / 4 + (ko * cj[u].ho + y) * cj[u].wo + x]);
          checks++;
          if (!close(g, e, sc)) begin
            failures++;
            if (failures < 10) $display("FAIL cu%0d k%0d (%0d,%0d) %f vs %f", u, ko, y, x, g, e);
          end
        end
  endtask

  task automatic expect_seen(string what, int n);
    checks++;
    $display("mechanism %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [NCU-1:0] fin;
    repeat (3) @(negedge clk);
    rst_n = 1;
    setup(0, 18, 2, 7, 12, 1);
    setup(1, 4, 3, 10, 10, 0);
    @(negedge clk) start = '1;
    @(negedge clk) start = '0;
    fin = '0;
    while (fin != '1) begin
      @(negedge clk);
      fin |= done;
      for (int u = 0; u < NCU; u++) if (done[u]) begin
        checks++;
        if (error[u]) begin
          failures++;
          $display("FAIL cu%0d refused a valid job", u);
        end
        $display("cu%0d finished its image in %0d cycles", u, cycles[u]);
      end
    end
    compare(0);
    compare(1);
    // refused job: rows longer than one burst
    job[1].w = 12'd300;
    @(negedge clk) start[1] = 1'b1;
    @(negedge clk) start[1] = 1'b0;
    wait (done[1]);
    if (error[1]) n_refused++;
    @(negedge clk);
    expect_seen("memory stall cycles", stalls);
    expect_seen("padding rows not read", n_pad_rows);
    expect_seen("tile rows padded to 8 tiles", n_tile_pad);
    expect_seen("weights over several bursts", n_multi_wburst);
    expect_seen("first-channel overwrite", n_first);
    expect_seen("accumulation", n_accum);
    expect_seen("both units busy", n_both);
    expect_seen("job refused", n_refused);
    checks++;
    if (errors != 0) begin
      failures++;
      $display("FAIL memory protocol errors %0d", errors);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
