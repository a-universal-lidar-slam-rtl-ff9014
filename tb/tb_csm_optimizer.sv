// tb_csm_optimizer: checks the coarse-to-fine search sequencing of the
// optimizer against a sequential model of the paper's Algorithm 1.
//
// The discretisation, coarse matching and fine matching units are replaced by
// behavioural models that answer after random delays: for each n_theta the
// model uses a random set of cell indices, and coarse / fine scores are
// computed from a random map held in csm_ref_pkg (coarse map = brute-force
// window maximum). The reference runs Algorithm 1 on the same data
// (initial s* = -infinity, prune if s' <= s*, strict "greater than" update).
// Checked: the two result beats (score, n_x*, n_y*, n_theta*, last flag), the
// number of pruned and refined coarse candidates, that no coarse candidate
// outside the window is evaluated, and correct behaviour under random
// output backpressure. Windows cover w^_x < 8, = 8 and > 8 (two lane groups).
module tb_csm_optimizer;
  import csm_pkg::*;
  import csm_ref_pkg::*;
  localparam int N = 40, NT_MAX = 8;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  csm_cfg_t cfg;
  logic disc_start, disc_done, cm_start, cm_done, fm_start, fm_done;
  logic fm_best_valid, fm_improved, ev_prune, ev_refine;
  idx_t disc_nt, cm_nx0, cm_ny, fm_nx, fm_ny, fm_res_nx, fm_res_ny;
  score_t cm_score [COARSE_PAR];
  score_t fm_best_score, fm_score;
  logic m_valid, m_last, m_ready;
  logic [63:0] m_data;
  int idx_i [2*NT_MAX][N];
  int idx_j [2*NT_MAX][N];
  int cmap [MAXW][MAXW];
  int cur_nt;
  int checks = 0, failures = 0;
  int n_prune_hw, n_refine_hw;

  csm_optimizer dut (.clk, .rst_n, .start, .cfg, .busy, .done,
    .disc_start, .disc_nt, .disc_done,
    .cm_start, .cm_nx0, .cm_ny, .cm_done, .cm_score,
    .fm_start, .fm_nx, .fm_ny, .fm_best_valid, .fm_best_score,
    .fm_done, .fm_improved, .fm_score, .fm_res_nx, .fm_res_ny,
    .m_valid, .m_data, .m_last, .m_ready, .ev_prune, .ev_refine);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int cs(input int nt, input int nx, input int ny);
    int s = 0;
    for (int k = 0; k < N; k++) begin
      int x = idx_i[nt + NT_MAX][k] + nx, y = idx_j[nt + NT_MAX][k] + ny;
      if (x >= 0 && y >= 0 && x < P[0].map_w && y < P[0].map_h) s += cmap[y][x];
    end
    return s;
  endfunction

  function automatic int fs(input int nt, input int nx, input int ny);
    int s = 0;
    for (int k = 0; k < N; k++) s += m6(0, idx_i[nt + NT_MAX][k] + nx, idx_j[nt + NT_MAX][k] + ny);
    return s;
  endfunction

  // ---------------------------------------------------------- unit models
  always @(posedge clk) begin
    if (disc_start) begin
      cur_nt <= int'(disc_nt);
      fork begin
        repeat ($urandom_range(1, 20)) @(posedge clk);
        disc_done <= 1'b1; @(posedge clk); disc_done <= 1'b0;
      end join_none
    end
    if (cm_start) begin
      automatic int nx0 = int'(cm_nx0), ny = int'(cm_ny);
      for (int i = 0; i < int'(COARSE_PAR); i++) begin
        automatic int nx = nx0 + i * int'(WIN);
        // lanes the optimizer will look at must lie in the window
        if (nx < P[0].win_x) cm_score[i] <= score_t'(cs(cur_nt, nx, ny));
        else                 cm_score[i] <= score_t'($urandom);
      end
      checks++;
      if (ny < -P[0].win_y || ny >= P[0].win_y || nx0 < -P[0].win_x || nx0 >= P[0].win_x) begin
        failures++; $display("FAIL coarse candidate (%0d,%0d) outside window", nx0, ny);
      end
      fork begin
        repeat ($urandom_range(1, 10)) @(posedge clk);
        cm_done <= 1'b1; @(posedge clk); cm_done <= 1'b0;
      end join_none
    end
    if (fm_start) begin
      automatic int bs = fm_best_valid ? int'(fm_best_score) : -1;
      automatic int bx = int'(fm_res_nx), by = int'(fm_res_ny);
      automatic bit imp = 0;
      for (int y = int'(fm_ny); y < int'(fm_ny) + int'(WIN); y++)
        for (int x = int'(fm_nx); x < int'(fm_nx) + int'(WIN); x++) begin
          automatic int f = fs(cur_nt, x, y);
          if (f > bs) begin bs = f; bx = x; by = y; imp = 1; end
        end
      fork begin
        repeat ($urandom_range(1, 10)) @(posedge clk);
        fm_score <= score_t'(bs); fm_res_nx <= idx_t'(bx); fm_res_ny <= idx_t'(by);
        fm_improved <= imp; fm_done <= 1'b1;
        @(posedge clk); fm_done <= 1'b0;
      end join_none
    end
  end

  always @(posedge clk) begin
    if (ev_prune)  n_prune_hw++;
    if (ev_refine) n_refine_hw++;
  end

  task automatic run_case(input int wx, input int wy, input int wt);
    int es, ex, ey, et, npr, nrf;
    logic [63:0] b0, b1;
    logic l0, l1;
    P[0].win_x = wx; P[0].win_y = wy; P[0].win_t = wt;
    for (int nt = -wt; nt < wt; nt++)
      for (int k = 0; k < N; k++) begin
        idx_i[nt + NT_MAX][k] = $urandom_range(0, P[0].map_w - 1);
        idx_j[nt + NT_MAX][k] = $urandom_range(0, P[0].map_h - 1);
      end
    // reference: Algorithm 1
    es = -1; ex = -wx; ey = -wy; et = -wt; npr = 0; nrf = 0;
    for (int nt = -wt; nt < wt; nt++)
      for (int hy = 0; hy < 2 * wy / W; hy++)
        for (int hx = 0; hx < 2 * wx / W; hx++) begin
          int nxc = -wx + hx * W, nyc = -wy + hy * W;
          if (cs(nt, nxc, nyc) <= es) begin npr++; continue; end
          nrf++;
          for (int y = nyc; y < nyc + W; y++)
            for (int x = nxc; x < nxc + W; x++)
              if (fs(nt, x, y) > es) begin es = fs(nt, x, y); ex = x; ey = y; et = nt; end
        end
    cfg = '0;
    cfg.num_points = PTR_W'(N); cfg.map_w = 16'(P[0].map_w); cfg.map_h = 16'(P[0].map_h);
    cfg.win_x = idx_t'(wx); cfg.win_y = idx_t'(wy); cfg.win_t = idx_t'(wt);
    n_prune_hw = 0; n_refine_hw = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    // collect two beats with random backpressure
    for (int b = 0; b < 2; b++) begin
      bit acc;
      do begin
        @(negedge clk); m_ready = 1'($urandom_range(0, 2) != 0);
        #1 acc = m_valid && m_ready;
        if (acc) begin
          if (b == 0) begin b0 = m_data; l0 = m_last; end else begin b1 = m_data; l1 = m_last; end
        end
        @(posedge clk);
      end while (!acc);
    end
    @(negedge clk); m_ready = 0;
    checks += 4;
    if (n_prune_hw != npr || n_refine_hw != nrf) begin
      failures++; $display("FAIL counts prune %0d/%0d refine %0d/%0d", n_prune_hw, npr, n_refine_hw, nrf);
    end
    if (l0 !== 1'b0 || l1 !== 1'b1) begin failures++; $display("FAIL last flags %b %b", l0, l1); end
    if (int'(b0[63:32]) != es || int'(signed'(b0[31:0])) != ex) begin
      failures++; $display("FAIL beat0 s=%0d nx=%0d exp %0d %0d", b0[63:32], signed'(b0[31:0]), es, ex);
    end
    if (int'(signed'(b1[63:32])) != ey || int'(signed'(b1[31:0])) != et) begin
      failures++; $display("FAIL beat1 ny=%0d nt=%0d exp %0d %0d", signed'(b1[63:32]), signed'(b1[31:0]), ey, et);
    end
    $display("case w=(%0d,%0d,%0d): s=%0d at (%0d,%0d,%0d), pruned %0d refined %0d", wx, wy, wt, es, ex, ey, et, npr, nrf);
  endtask

  initial begin
    start = 0; cfg = '0; m_ready = 0; disc_done = 0; cm_done = 0; fm_done = 0;
    fm_improved = 0; fm_score = 0; fm_res_nx = 0; fm_res_ny = 0;
    for (int i = 0; i < int'(COARSE_PAR); i++) cm_score[i] = 0;
    P[0].map_w = 60; P[0].map_h = 50;
    make_map(0);
    for (int y = 0; y < P[0].map_h; y++)
      for (int x = 0; x < P[0].map_w; x++) cmap[y][x] = coarse(0, x, y);
    repeat (2) @(posedge clk); rst_n = 1;
    run_case(8, 8, 2);
    run_case(16, 12, 3);
    run_case(32, 8, 1);    // w^_x = 8: one full lane group
    run_case(40, 16, 2);   // w^_x = 10: two groups, second partly used
    run_case(24, 24, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
