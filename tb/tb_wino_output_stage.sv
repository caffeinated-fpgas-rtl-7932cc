// tb_wino_output_stage: fills a model of the four partial result buffers with random
// tiles, runs the output stage for output map k = 2 of an odd-sized (5 x 11) output
// with random memory stalls, and checks every word the memory model received against
// the tile and element it should come from, that the columns and rows beyond the output
// (tile padding) and the neighbouring maps are not written, and one burst per row.
module tb_wino_output_stage;
  import wino_pkg::*;

  localparam int KI = 2, OBASE = 32'h400;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  logic start = 0, done;
  job_t job;
  dims_t dims;
  logic [11:0] rd_addr;
  tile22_t [3:0] rd_data;
  logic awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [31:0] awaddr;
  logic [7:0] awlen;
  fp32_t wdata;
  int stalls, rd_bursts, wr_bursts, errors;
  int checks = 0, failures = 0;
  tile22_t prb [4][64];

  assign dims = derive_dims(job);

  wino_output_stage dut (.*, .k_idx(16'(KI)));

  always_ff @(posedge clk)
    for (int i = 0; i < 4; i++) rd_data[i] <= prb[i][rd_addr[5:0]];

  axi_mem_model #(.NP(1), .WORDS(4096)) u_mem (
    .clk, .rst_n,
    .arvalid(1'b0), .arready(), .araddr('0), .arlen('0), .rvalid(), .rready(1'b0),
    .rdata(), .rlast(),
    .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast, .bvalid, .bready,
    .stalls, .rd_bursts, .wr_bursts, .errors
  );

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ho, wo, base;
    job = '0;
    job.out_addr = 32'(OBASE);
    job.c = 16'd1; job.k = 16'd4; job.h = 12'd7; job.w = 12'd13; job.pad = 1'b0;
    for (int i = 0; i < 4; i++)
      for (int a = 0; a < 64; a++)
        for (int r = 0; r < 2; r++) for (int j = 0; j < 2; j++) prb[i][a][r][j] = $urandom;
    for (int a = 0; a < 4096; a++) u_mem.mem[a] = 32'hDEAD_BEEF;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (done);
    @(negedge clk);
    ho = int'(dims.ho); wo = int'(dims.wo);
    base = OBASE / 4 + KI * ho * wo;
    for (int y = 0; y < ho; y++)
      for (int x = 0; x < wo; x++) begin
        int q;
        fp32_t e;
        q = x / 2;
        e = prb[q % 4][(y / 2) * int'(dims.g) + q / 4][y % 2][x % 2];
        checks++;
        if (u_mem.mem[base + y * wo + x] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL (%0d,%0d) %h vs %h", y, x, u_mem.mem[base + y * wo + x], e);
        end
      end
    checks += 2;
    if (u_mem.mem[base - 1] !== 32'hDEAD_BEEF || u_mem.mem[base + ho * wo] !== 32'hDEAD_BEEF) begin
      failures++;
      $display("FAIL wrote outside the output map");
    end
    if (wr_bursts != ho || errors != 0) begin
      failures++;
      $display("FAIL bursts %0d errors %0d", wr_bursts, errors);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
