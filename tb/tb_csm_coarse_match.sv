// tb_csm_coarse_match: fills a coarse-map buffer with random 6-bit values and
// an indices buffer with random cell indices (some outside the map), runs the
// coarse matching unit for random (n_x', n_y') and compares its eight scores
// with sums computed here: s'[i] = sum_k M'(i_k + n_x' + i*w, j_k + n_y'),
// cells outside the map counting 0. Also checks the rate of one scan point per
// clock: done N + 2 clock edges after the edge that takes start.
module tb_csm_coarse_match;
  import csm_pkg::*;
  localparam int MW = 120, MH = 90, N = 300;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  idx_t nx0, ny, cm_x0, cm_y;
  logic [PTR_W-1:0] num_points;
  logic [PTR_W-2:0] ix_raddr, ix_waddr;
  cell_idx_t ix_q, ix_wdata;
  logic ix_we, wr_en;
  logic [15:0] wr_x, wr_y, map_w, map_h;
  cell_t wr_data;
  cell_t cm_data [COARSE_PAR];
  score_t score [COARSE_PAR];
  int cm [MH][MW];
  int ii [N];
  int jj [N];
  int checks = 0, failures = 0;

  csm_sdp_ram #(.DEPTH(512), .WIDTH(32)) u_ix (.clk, .we(ix_we), .waddr(ix_waddr), .wdata(ix_wdata),
                                               .raddr(ix_raddr), .q(ix_q));
  csm_coarse_map u_cm (.clk, .wr_en, .wr_x, .wr_y, .wr_data, .map_w, .map_h,
                       .rd_x0(cm_x0), .rd_y(cm_y), .rd_data(cm_data));
  csm_coarse_match dut (.clk, .rst_n, .start, .nx0, .ny, .num_points, .ix_raddr, .ix_q,
                        .cm_x0, .cm_y, .cm_data, .score, .busy, .done);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int cv(input int x, input int y);
    if (x < 0 || y < 0 || x >= MW || y >= MH) return 0;
    return cm[y][x];
  endfunction

  initial begin
    start = 0; nx0 = 0; ny = 0; num_points = N; ix_we = 0; ix_waddr = 0; ix_wdata = 0;
    wr_en = 0; wr_x = 0; wr_y = 0; wr_data = 0; map_w = MW; map_h = MH;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int y = 0; y < MH; y++)
      for (int x = 0; x < MW; x++) begin
        @(negedge clk); wr_en = 1; wr_x = 16'(x); wr_y = 16'(y); wr_data = cell_t'($urandom);
        cm[y][x] = int'(wr_data);
      end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < N; k++) begin
      ii[k] = $urandom_range(0, MW + 20) - 10;
      jj[k] = $urandom_range(0, MH + 20) - 10;
      @(negedge clk); ix_we = 1; ix_waddr = 9'(k); ix_wdata.i = idx_t'(ii[k]); ix_wdata.j = idx_t'(jj[k]);
    end
    @(negedge clk); ix_we = 0;
    for (int t = 0; t < 20; t++) begin
      int bx, by, cyc;
      bx = $urandom_range(0, 100) - 60;
      by = $urandom_range(0, 60) - 30;
      @(negedge clk); nx0 = idx_t'(bx); ny = idx_t'(by); start = 1;
      @(negedge clk); start = 0;
      // start was taken at the edge before this negedge; count edges to done
      cyc = 0;
      do begin @(posedge clk); #1; cyc++; end while (!done);
      checks++;
      if (cyc != N + 2) begin failures++; $display("FAIL latency %0d exp %0d", cyc, N + 2); end
      for (int i = 0; i < COARSE_PAR; i++) begin
        int e;
        e = 0;
        for (int k = 0; k < N; k++) e += cv(ii[k] + bx + i * WIN, jj[k] + by);
        checks++;
        if (int'(score[i]) != e) begin
          failures++;
          $display("FAIL lane %0d nx0=%0d ny=%0d got %0d exp %0d", i, bx, by, score[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
