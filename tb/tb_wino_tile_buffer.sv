// tb_wino_tile_buffer: writes random 4x2 tiles four at a time (random write masks) and
// reads them back five at a time at random bases, checking every tile against a plain
// array model and the one-cycle read latency.
module tb_wino_tile_buffer;
  import wino_pkg::*;

  localparam int unsigned DEPTH = 32768;
  localparam int unsigned N = 1024;          // tiles exercised
  logic clk = 0;
  always #5 clk = ~clk;

  logic                     wr_en = 0, rd_en = 0;
  logic [$clog2(DEPTH)-1:0] wr_base = '0, rd_base = '0;
  logic [3:0]               wr_mask = '0;
  tile42_t [3:0]            wr_tile;
  tile42_t [4:0]            rd_tile;
  tile42_t                  model [N + 8];
  int checks = 0, failures = 0;

  wino_tile_buffer dut (.*);

  function automatic tile42_t rand_tile();
    tile42_t t;
    for (int r = 0; r < 4; r++) for (int c = 0; c < 2; c++) t[r][c] = $urandom;
    return t;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill everything once
    for (int a = 0; a < N + 8; a += 4) begin
      @(negedge clk);
      wr_en = 1; wr_base = 15'(a); wr_mask = 4'hF;
      for (int i = 0; i < 4; i++) begin
        wr_tile[i] = rand_tile();
        model[a + i] = wr_tile[i];
      end
    end
    // random partial overwrites
    for (int n = 0; n < 300; n++) begin
      int a;
      @(negedge clk);
      a = 4 * int'($urandom_range(N / 4 - 1, 0));
      wr_en = 1; wr_base = 15'(a); wr_mask = 4'($urandom);
      for (int i = 0; i < 4; i++) begin
        wr_tile[i] = rand_tile();
        if (wr_mask[i]) model[a + i] = wr_tile[i];
      end
    end
    @(negedge clk);
    wr_en = 0;
    // reads
    for (int n = 0; n < 500; n++) begin
      int a;
      a = 4 * int'($urandom_range(N / 4 - 2, 0));
      @(negedge clk);
      rd_en = 1; rd_base = 15'(a);
      @(negedge clk);
      rd_en = 0;
      rd_base = rd_base + 15'd4;   // must not disturb the registered output
      for (int i = 0; i < 5; i++) begin
        checks++;
        if (rd_tile[i] !== model[a + i]) begin
          failures++;
          if (failures < 10) $display("FAIL base %0d tile %0d", a, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
