// tb_csm_fine_match: fills a fine-map buffer and an indices buffer (N = 360,
// the paper's example) with random data, runs the fine matching unit for
// random coarse candidates (n_x', n_y') and incoming bests s*, and compares
// its result with a sequential evaluation of the w x w fine scores in the
// order of Algorithm 1 (n_y outer, n_x inner, strict "greater than"). Cases
// with s* = -infinity, with s* too high to beat (no improvement) and with s*
// in between are covered. Latency: the paper reports 15 us at 100 MHz for
// w = 8, N = 360, i.e. 1500 cycles; done must come within that.
module tb_csm_fine_match;
  import csm_pkg::*;
  localparam int MW = 100, MH = 80, N = 360;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, improved, best_valid, best_valid_in;
  idx_t nx, ny, fm_x0, fm_y0, best_nx, best_ny;
  score_t best_score, best_score_in;
  logic [PTR_W-1:0] num_points;
  logic [PTR_W-2:0] ix_raddr, ix_waddr;
  cell_idx_t ix_q, ix_wdata;
  logic ix_we, wr_en;
  logic [15:0] wr_x, wr_y, map_w, map_h;
  cell_t wr_data;
  cell_t fm_data [FINE_ROWS][WIN];
  int fm [MH][MW];
  int ii [N];
  int jj [N];
  int checks = 0, failures = 0;

  csm_sdp_ram #(.DEPTH(512), .WIDTH(32)) u_ix (.clk, .we(ix_we), .waddr(ix_waddr), .wdata(ix_wdata),
                                               .raddr(ix_raddr), .q(ix_q));
  csm_fine_map u_fm (.clk, .wr_en, .wr_x, .wr_y, .wr_data, .map_w, .map_h,
                     .rd_x0(fm_x0), .rd_y0(fm_y0), .rd_data(fm_data));
  csm_fine_match dut (.clk, .rst_n, .start, .nx, .ny, .num_points, .best_valid_in, .best_score_in,
                      .ix_raddr, .ix_q, .fm_x0, .fm_y0, .fm_data, .best_valid, .best_score,
                      .best_nx, .best_ny, .improved, .busy, .done);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int fv(input int x, input int y);
    if (x < 0 || y < 0 || x >= MW || y >= MH) return 0;
    return fm[y][x];
  endfunction

  initial begin
    start = 0; nx = 0; ny = 0; num_points = N; ix_we = 0; ix_waddr = 0; ix_wdata = 0;
    best_valid_in = 0; best_score_in = 0;
    wr_en = 0; wr_x = 0; wr_y = 0; wr_data = 0; map_w = MW; map_h = MH;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int y = 0; y < MH; y++)
      for (int x = 0; x < MW; x++) begin
        @(negedge clk); wr_en = 1; wr_x = 16'(x); wr_y = 16'(y);
        // few distinct values so that ties occur
        wr_data = cell_t'($urandom_range(0, 3) * 21);
        fm[y][x] = int'(wr_data);
      end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < N; k++) begin
      ii[k] = $urandom_range(0, MW + 10) - 5;
      jj[k] = $urandom_range(0, MH + 10) - 5;
      @(negedge clk); ix_we = 1; ix_waddr = 9'(k); ix_wdata.i = idx_t'(ii[k]); ix_wdata.j = idx_t'(jj[k]);
    end
    @(negedge clk); ix_we = 0;
    for (int t = 0; t < 24; t++) begin
      int bx, by, cyc, es, ex, ey, bin;
      bit ev, eimp;
      bx = $urandom_range(0, 60) - 30;
      by = $urandom_range(0, 40) - 20;
      // reference: sequential scan of the block
      ev = (t % 3 != 0); bin = (t % 3 == 1) ? 32000 : $urandom_range(5000, 9000);
      es = ev ? bin : -1; ex = 0; ey = 0; eimp = 0;
      for (int yy = by; yy < by + int'(WIN); yy++)
        for (int xx = bx; xx < bx + int'(WIN); xx++) begin
          int s;
          s = 0;
          for (int k = 0; k < N; k++) s += fv(ii[k] + xx, jj[k] + yy);
          if (s > es) begin es = s; ex = xx; ey = yy; eimp = 1; end
        end
      @(negedge clk); nx = idx_t'(bx); ny = idx_t'(by); start = 1;
      best_valid_in = ev; best_score_in = score_t'(bin);
      @(negedge clk); start = 0;
      cyc = 0;
      do begin @(posedge clk); #1; cyc++; end while (!done);
      checks += 3;
      if (cyc > 1500) begin failures++; $display("FAIL latency %0d cycles > 1500", cyc); end
      if (improved != eimp) begin failures++; $display("FAIL improved %0d exp %0d", improved, eimp); end
      if (int'(best_score) != es ||
          (eimp && (int'(best_nx) != ex || int'(best_ny) != ey))) begin
        failures++;
        $display("FAIL t=%0d got s=%0d (%0d,%0d) exp s=%0d (%0d,%0d)", t, best_score, best_nx, best_ny, es, ex, ey);
      end
      if (t == 0) $display("fine matching, N=%0d: %0d cycles", N, cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
