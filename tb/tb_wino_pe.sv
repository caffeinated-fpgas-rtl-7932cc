// tb_wino_pe: drives the processing element with random column-transformed tile pairs
// and filters over several input channels, then reads the partial result buffer back
// and compares it bit for bit with a reference model of the same arithmetic (row
// partial transforms, element-wise product, A^T M A, accumulation; first channel
// overwrites). Also runs a phase where one buffer entry is updated on consecutive
// cycles, and checks that a result is written five cycles after it was accepted.
module tb_wino_pe;
  import wino_pkg::*;
  import fp_ref_pkg::fadd, fp_ref_pkg::fsub, fp_ref_pkg::fmul, fp_ref_pkg::rand_fp;

  localparam int unsigned DEPTH = 4096;
  localparam int NA = 12, NC = 4;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  logic                     in_valid = 0, in_first = 0, acc_valid;
  tile42_t                  in_left, in_right;
  blk44_t                   in_u;
  logic [$clog2(DEPTH)-1:0] in_addr = '0, rd_addr = '0;
  tile22_t                  rd_data;
  tile22_t                  model [NA];
  int checks = 0, failures = 0;
  int cyc = 0, last_in = -1, lat_checks = 0;

  wino_pe dut (.*);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid) last_in <= cyc;
    if (acc_valid && in_valid == 0 && last_in >= 0 && lat_checks == 0) begin
      // first write after a single isolated input: latency check
      checks++;
      lat_checks++;
      if (cyc - last_in != 5) begin
        failures++;
        $display("FAIL latency %0d", cyc - last_in);
      end
    end
  end

  function automatic tile22_t ref_y(tile42_t l, tile42_t r, blk44_t u);
    fp32_t [3:0][3:0] x, v, m;
    fp32_t [1:0][3:0] z;
    tile22_t y;
    for (int i = 0; i < 4; i++) x[i] = {r[i][1], r[i][0], l[i][1], l[i][0]};
    for (int i = 0; i < 4; i++) begin
      v[i][0] = fsub(x[i][0], x[i][2]);
      v[i][1] = fadd(x[i][1], x[i][2]);
      v[i][2] = fsub(x[i][2], x[i][1]);
      v[i][3] = fsub(x[i][1], x[i][3]);
    end
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) m[i][j] = fmul(u[i][j], v[i][j]);
    for (int j = 0; j < 4; j++) begin
      z[0][j] = fadd(fadd(m[0][j], m[1][j]), m[2][j]);
      z[1][j] = fsub(fsub(m[1][j], m[2][j]), m[3][j]);
    end
    for (int i = 0; i < 2; i++) begin
      y[i][0] = fadd(fadd(z[i][0], z[i][1]), z[i][2]);
      y[i][1] = fsub(fsub(z[i][1], z[i][2]), z[i][3]);
    end
    return y;
  endfunction

  task automatic push(int a, bit first);
    tile42_t l, r;
    blk44_t u;
    tile22_t y;
    for (int i = 0; i < 4; i++) for (int j = 0; j < 2; j++) begin
      l[i][j] = rand_fp(4);
      r[i][j] = rand_fp(4);
    end
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) u[i][j] = rand_fp(4);
    y = ref_y(l, r, u);
    model[a] = first ? y : {fadd(model[a][1][1], y[1][1]), fadd(model[a][1][0], y[1][0]),
                            fadd(model[a][0][1], y[0][1]), fadd(model[a][0][0], y[0][0])};
    @(negedge clk);
    in_valid = 1; in_first = first; in_addr = 12'(a);
    in_left = l; in_right = r; in_u = u;
  endtask

  task automatic idle(int n);
    repeat (n) begin
      @(negedge clk);
      in_valid = 0;
    end
  endtask

  task automatic check_all();
    for (int a = 0; a < NA; a++) begin
      @(negedge clk);
      rd_addr = 12'(a);
      @(negedge clk);
      checks++;
      if (rd_data !== model[a]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d got %h expected %h", a, rd_data, model[a]);
      end
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // isolated input for the latency check
    push(0, 1);
    idle(10);
    // channel-major accumulation, back to back
    for (int c = 0; c < NC; c++)
      for (int a = 0; a < NA; a++) push(a, c == 0);
    idle(8);
    check_all();
    // consecutive updates of one entry
    push(3, 1);
    for (int n = 0; n < 6; n++) push(3, 0);
    idle(8);
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
