// tb_csm_discretize: loads a random scan into a scan buffer, runs the
// discretisation unit for several rotation steps n_theta (with pose angles
// and steps chosen so that the total angle wraps past +-pi) and compares
// every written (i_k, j_k) with floor((r cos(phi) + x0) / r_cell) computed in
// double precision with $cos/$sin. The scan is drawn so that no point is
// within 0.02 cell of a cell boundary, where the fixed-point and the real
// results could legitimately differ. Also checks one point per clock: done
// must come at most N + 26 cycles after start.
module tb_csm_discretize;
  import csm_pkg::*;
  import csm_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  idx_t n_t;
  csm_cfg_t cfg;
  logic [PTR_W-2:0] sb_raddr, sb_waddr, ix_waddr;
  scan_pt_t sb_q, sb_wdata;
  logic sb_we, ix_we;
  cell_idx_t ix_wdata;
  int got_i [MAXN];
  int got_j [MAXN];
  int checks = 0, failures = 0;

  csm_sdp_ram #(.DEPTH(512), .WIDTH(64)) u_sb (.clk, .we(sb_we), .waddr(sb_waddr), .wdata(sb_wdata),
                                                .raddr(sb_raddr), .q(sb_q));
  csm_discretize dut (.clk, .rst_n, .start, .n_t, .cfg, .sb_raddr, .sb_q,
                      .ix_we, .ix_waddr, .ix_wdata, .busy, .done);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (ix_we) begin
    got_i[ix_waddr] <= int'(ix_wdata.i);
    got_j[ix_waddr] <= int'(ix_wdata.j);
  end

  task automatic run_case(input int n, input real px, input real py, input real pt,
                          input real st, input int wt);
    P[0].n = n; P[0].win_t = wt;
    P[0].pose_x = to_q16(px); P[0].pose_y = to_q16(py); P[0].pose_t = to_q16(pt);
    P[0].step_t = to_q16(st); P[0].inv_res = to_q16(20.0);
    make_scan(0, 0.1, 5.6);
    for (int k = 0; k < n; k++) begin
      @(negedge clk); sb_we = 1; sb_waddr = 9'(k);
      sb_wdata.range = rng[0][k]; sb_wdata.angle = ang[0][k];
    end
    @(negedge clk); sb_we = 0;
    cfg = '0;
    cfg.num_points = PTR_W'(n);
    cfg.pose_x = P[0].pose_x; cfg.pose_y = P[0].pose_y; cfg.pose_t = P[0].pose_t;
    cfg.step_t = P[0].step_t; cfg.inv_res = P[0].inv_res;
    for (int nt = -wt; nt < wt; nt++) begin
      int cyc;
      @(negedge clk); n_t = idx_t'(nt); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(posedge clk); cyc++; end
      @(negedge clk);
      checks++;
      if (cyc > n + 26) begin failures++; $display("FAIL latency %0d for N=%0d", cyc, n); end
      discretise(0, nt);
      for (int k = 0; k < n; k++) begin
        checks += 2;
        if (got_i[k] != ci[k] || got_j[k] != cj[k]) begin
          failures++;
          if (failures < 10)
            $display("FAIL nt=%0d k=%0d got (%0d,%0d) exp (%0d,%0d)", nt, k, got_i[k], got_j[k], ci[k], cj[k]);
        end
      end
    end
  endtask

  initial begin
    start = 0; n_t = 0; cfg = '0; sb_we = 0; sb_waddr = 0; sb_wdata = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    run_case(360, 8.0, 8.0, 0.0, 0.0125, 4);
    run_case(512, 3.3, 12.7, 2.9, 0.05, 6);      // phi wraps past +pi
    run_case(100, 9.1, 4.2, -3.0, 0.1, 3);       // phi wraps past -pi
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
