// tb_wino_input_stage: runs the input stage on random feature maps held in the memory
// model (random stalls on every channel), once with one pixel of zero padding and once
// without, and captures every tile written to the tile buffer. Each tile is compared bit
// for bit with the column-wise partial transform, computed here, of the 4x2 window of
// the zero-padded input it should hold. Also checks that tiling takes exactly TPR/4
// cycles per tile row (four tiles per cycle) and that every tile address is written.
module tb_wino_input_stage;
  import wino_pkg::*;
  import fp_ref_pkg::fadd, fp_ref_pkg::fsub, fp_ref_pkg::r2f, fp_ref_pkg::rand_val;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  logic start = 0, done;
  job_t job;
  dims_t dims;
  logic arvalid, arready, rvalid, rready, rlast;
  logic [31:0] araddr;
  logic [7:0] arlen;
  fp32_t rdata;
  logic tb_wr_en;
  logic [14:0] tb_wr_base;
  logic [3:0] tb_wr_mask;
  tile42_t [3:0] tb_wr_tile;
  int stalls, rd_bursts, wr_bursts, errors;
  int checks = 0, failures = 0;

  tile42_t got [int];
  int wr_cycles;

  assign dims = derive_dims(job);

  wino_input_stage dut (.*);

  axi_mem_model #(.NP(1), .WORDS(4096)) u_mem (
    .clk, .rst_n,
    .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .awvalid(1'b0), .awready(), .awaddr('0), .awlen('0), .wvalid(1'b0), .wready(),
    .wdata('0), .wlast(1'b0), .bvalid(), .bready(1'b0),
    .stalls, .rd_bursts, .wr_bursts, .errors
  );

  always @(posedge clk) begin
    if (tb_wr_en) begin
      wr_cycles++;
      for (int i = 0; i < 4; i++) if (tb_wr_mask[i]) got[int'(tb_wr_base) + i] = tb_wr_tile[i];
    end
  end

  function automatic fp32_t pix(int c, int r, int x);   // padded coordinates
    int rr, xx;
    rr = r - int'(job.pad);
    xx = x - int'(job.pad);
    if (rr < 0 || rr >= int'(job.h) || xx < 0 || xx >= int'(job.w)) return '0;
    return u_mem.mem[c * int'(job.h) * int'(job.w) + rr * int'(job.w) + xx];
  endfunction

  task automatic run(int c, int h, int w, bit pad);
    fp32_t d [4];
    fp32_t e;
    job = '0;
    job.in_addr = 32'h0;
    job.c = 16'(c); job.h = 12'(h); job.w = 12'(w); job.pad = pad; job.k = 16'd1;
    for (int i = 0; i < c * h * w; i++) u_mem.mem[i] = r2f(rand_val());
    got.delete();
    wr_cycles = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (done);
    @(negedge clk);
    checks++;
    if (wr_cycles != c * int'(dims.p) * int'(dims.tpr) / 4) begin
      failures++;
      $display("FAIL tiling cycles %0d", wr_cycles);
    end
    for (int cc = 0; cc < c; cc++)
      for (int p = 0; p < int'(dims.p); p++)
        for (int t = 0; t < int'(dims.tpr); t++) begin
          int a;
          a = (cc * int'(dims.p) + p) * int'(dims.tpr) + t;
          checks++;
          if (!got.exists(a)) begin
            failures++;
            $display("FAIL tile %0d never written", a);
          end else begin
            for (int j = 0; j < 2; j++) begin
              for (int r = 0; r < 4; r++) d[r] = pix(cc, 2 * p + r, 2 * t + j);
              for (int r = 0; r < 4; r++) begin
                case (r)
                  0: e = fsub(d[0], d[2]);
                  1: e = fadd(d[1], d[2]);
                  2: e = fsub(d[2], d[1]);
                  default: e = fsub(d[1], d[3]);
                endcase
                if (got[a][r][j] !== e) begin
                  failures++;
                  if (failures < 10)
                    $display("FAIL c%0d p%0d t%0d r%0d j%0d: %h vs %h", cc, p, t, r, j, got[a][r][j], e);
                end
              end
            end
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
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(2, 5, 7, 1'b1);
    run(3, 8, 18, 1'b0);
    run(1, 3, 3, 1'b1);
    checks++;
    if (errors != 0 || stalls == 0) begin
      failures++;
      $display("FAIL memory errors %0d stalls %0d", errors, stalls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
