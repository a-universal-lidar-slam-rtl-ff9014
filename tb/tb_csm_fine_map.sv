// tb_csm_fine_map: fills the banked fine-map buffer cell by cell with random
// 6-bit values, then reads random w x 2 blocks, some reaching outside the map
// or starting at negative coordinates, and compares every lane with a plain
// array (cells outside the map must read 0, although the buffer beyond the map
// extent holds nonzero data). Also checks the one-cycle read
// latency.
module tb_csm_fine_map;
  import csm_pkg::*;
  localparam int MW = 52, MH = 37;
  logic clk = 0;
  logic wr_en;
  logic [15:0] wr_x, wr_y, map_w, map_h;
  cell_t wr_data;
  idx_t rd_x0, rd_y0;
  cell_t rd_data [FINE_ROWS][WIN];
  cell_t ref_m [MH][MW];
  int checks = 0, failures = 0;

  csm_fine_map dut (.clk, .wr_en, .wr_x, .wr_y, .wr_data, .map_w, .map_h,
                    .rd_x0, .rd_y0, .rd_data);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic cell_t expv(input int x, input int y);
    if (x < 0 || y < 0 || x >= MW || y >= MH) return '0;
    return ref_m[y][x];
  endfunction

  initial begin
    map_w = MW; map_h = MH; wr_en = 0; wr_x = 0; wr_y = 0; wr_data = 0;
    rd_x0 = 0; rd_y0 = 0;
    for (int y = 0; y < MH + 4; y++)
      for (int x = 0; x < MW + 12; x++) begin
        @(negedge clk);
        wr_en = 1; wr_x = 16'(x); wr_y = 16'(y); wr_data = cell_t'($urandom_range(1, 63));
        if (x < MW && y < MH) ref_m[y][x] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 3000; t++) begin
      int x0, y0;
      x0 = $urandom_range(0, MW + 12) - 10;
      y0 = $urandom_range(0, MH + 4) - 3;
      @(negedge clk); rd_x0 = idx_t'(x0); rd_y0 = idx_t'(y0);
      @(posedge clk); #1;
      for (int j = 0; j < FINE_ROWS; j++)
        for (int i = 0; i < WIN; i++) begin
          checks++;
          if (rd_data[j][i] != expv(x0 + i, y0 + j)) begin
            failures++;
            if (failures < 10) $display("FAIL (%0d,%0d) got %0d exp %0d", x0 + i, y0 + j,
                                        rd_data[j][i], expv(x0 + i, y0 + j));
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
