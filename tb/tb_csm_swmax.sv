// tb_csm_swmax: streams random maps into the sliding-window-maximum unit
// (row-major, 8 cells per packet, cell 1 in the top byte, padding in the last
// packet) with random gaps in the stream, captures its fine-map and
// coarse-map write ports into arrays, and compares them with the 6-bit
// quantised input and with brute-force w x w window maxima. Two maps of
// different sizes are sent back to back to check that the column cache does
// not leak between maps. The cycle count of each map must not exceed
// (W + w - 1) * (H + w - 1) + (packets) + a few, the unit's stated rate of one
// grid position per clock plus one cycle per packet load.
module tb_csm_swmax;
  import csm_pkg::*;
  localparam int MAXM = 64;
  logic clk = 0, rst_n = 0;
  logic start;
  logic [15:0] map_w, map_h;
  logic s_valid, s_ready;
  logic [63:0] s_data;
  logic fine_we, coarse_we, busy, done;
  logic [15:0] fine_x, fine_y, coarse_x, coarse_y;
  cell_t fine_d, coarse_d;
  byte unsigned src [MAXM][MAXM];
  int got_f [MAXM][MAXM];
  int got_c [MAXM][MAXM];
  int checks = 0, failures = 0;

  csm_swmax #(.MAXW(MAXM)) dut (.clk, .rst_n, .start, .map_w, .map_h, .s_valid, .s_data, .s_ready,
                 .fine_we, .fine_x, .fine_y, .fine_d, .coarse_we, .coarse_x, .coarse_y,
                 .coarse_d, .busy, .done);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (fine_we) got_f[fine_y][fine_x] <= int'(fine_d);
    if (coarse_we) got_c[coarse_y][coarse_x] <= int'(coarse_d);
  end

  task automatic run_map(input int w, input int h, input bit gaps);
    int ncell, npk, cyc, k;
    for (int y = 0; y < MAXM; y++)
      for (int x = 0; x < MAXM; x++) begin got_f[y][x] = -1; got_c[y][x] = -1; end
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) src[y][x] = byte'($urandom);
    ncell = w * h;
    npk = (ncell + 7) / 8;
    @(negedge clk); map_w = 16'(w); map_h = 16'(h); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    k = 0;
    fork
      begin
        for (int p = 0; p < npk; p++) begin
          logic [63:0] d;
          d = $urandom;
          for (int c = 0; c < 8; c++) begin
            int idx;
            idx = p * 8 + c;
            if (idx < ncell) d[63 - 8*c -: 8] = src[idx / w][idx % w];
          end
          while (gaps && $urandom_range(0, 3) == 0) @(negedge clk);  // random gaps
          s_valid = 1; s_data = d;
          @(posedge clk);
          while (!s_ready) @(posedge clk);
          @(negedge clk); s_valid = 0;
        end
      end
      begin
        while (!done) begin @(posedge clk); cyc++; end
      end
    join
    @(negedge clk);
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        int m;
        m = 0;
        for (int dy = 0; dy < WIN; dy++)
          for (int dx = 0; dx < WIN; dx++)
            if (x + dx < w && y + dy < h && int'(src[y+dy][x+dx]) / 4 > m) m = int'(src[y+dy][x+dx]) / 4;
        checks += 2;
        if (got_f[y][x] != int'(src[y][x]) / 4) begin
          failures++;
          if (failures < 10) $display("FAIL fine (%0d,%0d) got %0d exp %0d", x, y, got_f[y][x], src[y][x] / 4);
        end
        if (got_c[y][x] != m) begin
          failures++;
          if (failures < 10) $display("FAIL coarse (%0d,%0d) got %0d exp %0d", x, y, got_c[y][x], m);
        end
      end
    $display("map %0dx%0d: %0d cycles", w, h, cyc);
    if (!gaps) begin
      checks++;
      if (cyc > (w + WIN - 1) * (h + WIN - 1) + npk + 4) begin
        failures++;
        $display("FAIL rate: %0d cycles for %0dx%0d", cyc, w, h);
      end
    end
  endtask

  initial begin
    start = 0; map_w = 0; map_h = 0; s_valid = 0; s_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_map(37, 21, 0);
    run_map(64, 30, 1);
    run_map(9, 9, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
