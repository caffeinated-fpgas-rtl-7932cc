// tb_wino_compute_stage: loads column-transformed tiles of a random input straight into
// a tile buffer, puts transformed filters in the memory model, runs the compute stage
// for one output map (k = 1 of 2, so the weight address offset is used; 20 channels, so
// the weights take two bursts) and reads the four partial result buffers back. Every
// output pixel is compared with a direct convolution computed here in double precision.
// Checks that the stage issues exactly C*P*G tile groups, one per cycle (the paper's
// C*P*Q cycles divided by four processing elements), and the pipeline fill time D.
module tb_wino_compute_stage;
  import wino_pkg::*;
  import fp_ref_pkg::*;
  import conv_ref_pkg::*;

  localparam int C = 20, K = 2, H = 4, W = 10, PAD = 1, KI = 1;
  localparam int WBASE = 32'h1000;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  logic start = 0, done, running;
  job_t job;
  dims_t dims;
  logic arvalid, arready, rvalid, rready, rlast;
  logic [31:0] araddr;
  logic [7:0] arlen;
  fp32_t rdata;
  logic tb_rd_en, wr_en = 0;
  logic [14:0] tb_rd_base, wr_base = '0;
  tile42_t [4:0] tb_rd_tile;
  tile42_t [3:0] wr_tile;
  logic [11:0] rd_addr = '0;
  tile22_t [3:0] rd_data;
  int stalls, rd_bursts, wr_bursts, errors;
  int checks = 0, failures = 0;
  int run_cycles = 0, span = 0;
  bit counting = 0;
  conv_job cj;

  assign dims = derive_dims(job);

  wino_compute_stage dut (
    .clk, .rst_n, .start, .job, .dims, .k_idx(16'(KI)), .done, .running,
    .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .tb_rd_en, .tb_rd_base, .tb_rd_tile, .rd_addr, .rd_data
  );

  wino_tile_buffer u_tiles (
    .clk, .wr_en, .wr_base, .wr_mask(4'hF), .wr_tile,
    .rd_en(tb_rd_en), .rd_base(tb_rd_base), .rd_tile(tb_rd_tile)
  );

  axi_mem_model #(.NP(1), .WORDS(8192)) u_mem (
    .clk, .rst_n,
    .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .awvalid(1'b0), .awready(), .awaddr('0), .awlen('0), .wvalid(1'b0), .wready(),
    .wdata('0), .wlast(1'b0), .bvalid(), .bready(1'b0),
    .stalls, .rd_bursts, .wr_bursts, .errors
  );

  always @(posedge clk) begin
    if (running) begin
      run_cycles++;
      counting = 1;
    end
    if (counting) span++;
    if (done) counting = 0;
  end

  function automatic fp32_t pix(int c, int r, int x);   // padded coordinates
    return r2f(cj.px(c, r - PAD, x - PAD));
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cj = new(C, K, H, W, PAD);
    job = '0;
    job.w_addr = 32'(WBASE);
    job.c = 16'(C); job.k = 16'(K); job.h = 12'(H); job.w = 12'(W); job.pad = 1'(PAD);
    for (int k = 0; k < K; k++)
      for (int c = 0; c < C; c++)
        for (int e = 0; e < 16; e++) u_mem.mem[WBASE / 4 + (k * C + c) * 16 + e] = cj.u(k, c, e / 4, e % 4);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // tiles: column transform of the padded input
    for (int c = 0; c < C; c++)
      for (int p = 0; p < int'(dims.p); p++)
        for (int t0 = 0; t0 < int'(dims.tpr); t0 += 4) begin
          @(negedge clk);
          wr_en = 1;
          wr_base = 15'((c * int'(dims.p) + p) * int'(dims.tpr) + t0);
          for (int i = 0; i < 4; i++)
            for (int j = 0; j < 2; j++) begin
              fp32_t d0, d1, d2, d3;
              int x;
              x = 2 * (t0 + i) + j;
              d0 = pix(c, 2 * p, x); d1 = pix(c, 2 * p + 1, x);
              d2 = pix(c, 2 * p + 2, x); d3 = pix(c, 2 * p + 3, x);
              wr_tile[i][0][j] = fsub(d0, d2);
              wr_tile[i][1][j] = fadd(d1, d2);
              wr_tile[i][2][j] = fsub(d2, d1);
              wr_tile[i][3][j] = fsub(d1, d3);
            end
        end
    @(negedge clk);
    wr_en = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    wait (done);
    @(negedge clk);
    checks++;
    if (run_cycles != C * int'(dims.p) * int'(dims.g)) begin
      failures++;
      $display("FAIL issue cycles %0d, expected %0d", run_cycles, C * int'(dims.p) * int'(dims.g));
    end
    checks++;
    if (span != run_cycles + 8) begin
      failures++;
      $display("FAIL first issue to done %0d cycles, expected %0d", span, run_cycles + 8);
    end
    // read back and compare
    for (int p = 0; p < int'(dims.p); p++)
      for (int g = 0; g < int'(dims.g); g++) begin
        @(negedge clk);
        rd_addr = 12'(p * int'(dims.g) + g);
        @(negedge clk);
        for (int i = 0; i < 4; i++)
          for (int r = 0; r < 2; r++)
            for (int j = 0; j < 2; j++) begin
              int y, x;
              real e, sc;
              y = 2 * p + r;
              x = 2 * (4 * g + i) + j;
              if (y < cj.ho && x < cj.wo) begin
                e = cj.out(KI, y, x, sc);
                checks++;
                if (!close(f2r(rd_data[i][r][j]), e, sc)) begin
                  failures++;
                  if (failures < 10) $display("FAIL out(%0d,%0d) = %f, expected %f", y, x, f2r(rd_data[i][r][j]), e);
                end
              end
            end
      end
    checks++;
    if (rd_bursts != 2 || errors != 0) begin
      failures++;
      $display("FAIL weight bursts %0d errors %0d", rd_bursts, errors);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
