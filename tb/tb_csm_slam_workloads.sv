// tb_csm_slam_workloads: the scan-matching workloads of the SLAM systems the
// accelerator was evaluated with, run end to end on the two-core top at its
// default size (no parameter of csm_system is overridden).
//
// Sizes that follow the published evaluation: 5 cm cells, w = 8, the search
// windows (0.25 m, 0.25 m, 0.25 rad) for particle-filter and Hector SLAM
// scan matching and (5.0 m, 5.0 m, 0.75 rad) / (2.5 m, 2.5 m, 0.5 rad) for
// loop detection, one core per thread, scan reuse across particles and map
// reuse across loop-detection scans. This test's own choices: 180 scan points
// (the beam count of the public indoor logs), angle steps of 1 degree (PF)
// and about 2 degrees (loop detection), which the evaluation does not state,
// translational windows rounded to a multiple of w/2 cells (5 -> 4, 50 -> 48)
// so that 2 w_x is a multiple of w, random sparse maps with walls, and scans
// drawn so that most points hit a wall from the pose.
//   core 0: particle-filter SLAM, one scan against the 160 x 160 maps of four
//           particles (scan sent once, then reused).
//   core 1: loop detection on a 320 x 320 submap with a 200 x 200 cell
//           window, then a second scan with the smaller window (map reused).
// Both cores run at the same time. Every result, and the numbers of pruned
// and refined coarse candidates, is compared with the sequential reference
// of Algorithm 1 (csm_ref_pkg). Map reuse, scan reuse, pruning, refinement,
// points outside the map, backpressure, input stalls and overlap of the two
// cores must each occur.
module tb_csm_slam_workloads;
  import csm_pkg::*;
  import csm_ref_pkg::*;
  localparam int NC = 2;
  logic clk = 0, rst_n = 0;
  logic [63:0] s_tdata [NC], m_tdata [NC];
  logic s_tvalid [NC], s_tlast [NC], s_tready [NC], m_tvalid [NC], m_tlast [NC], m_tready [NC];
  logic [7:0] awaddr [NC], araddr [NC];
  logic awvalid [NC], awready [NC], wvalid [NC], wready [NC], bvalid [NC], bready [NC];
  logic arvalid [NC], arready [NC], rvalid [NC], rready [NC];
  logic [31:0] wdata [NC], rdata [NC];
  logic [3:0] wstrb [NC];
  logic [1:0] bresp [NC], rresp [NC];
  logic ev_map_reuse [NC], ev_scan_reuse [NC], ev_prune [NC], ev_refine [NC];
  int checks = 0, failures = 0;
  int n_prune [NC], n_refine [NC];
  int c_map_reuse = 0, c_scan_reuse = 0, c_prune = 0, c_refine = 0, c_outside = 0;
  int c_backpressure = 0, c_in_stall = 0, c_both_busy = 0;

  csm_system dut (.clk, .rst_n,
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tlast(s_tlast), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tlast(m_tlast), .m_axis_tready(m_tready),
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .ev_map_reuse, .ev_scan_reuse, .ev_prune, .ev_refine);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    for (int c = 0; c < NC; c++) begin
      if (ev_prune[c])      begin n_prune[c]++;  c_prune++;  end
      if (ev_refine[c])     begin n_refine[c]++; c_refine++; end
      if (ev_map_reuse[c])  c_map_reuse++;
      if (ev_scan_reuse[c]) c_scan_reuse++;
      if (m_tvalid[c] && !m_tready[c]) c_backpressure++;
      if (!s_tvalid[c] && s_tready[c]) c_in_stall++;
    end
    if (!dut.g_core[0].u_core.idle && !dut.g_core[1].u_core.idle) c_both_busy++;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic reg_write(input int c, input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); awaddr[c] = a; wdata[c] = d; awvalid[c] = 1; wvalid[c] = 1;
    #1 while (!(awready[c] && wready[c])) begin @(negedge clk); #1; end
    @(negedge clk); awvalid[c] = 0; wvalid[c] = 0; bready[c] = 1;
    #1 while (!bvalid[c]) begin @(negedge clk); #1; end
    @(negedge clk); bready[c] = 0;
  endtask

  task automatic reg_read(input int c, input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); araddr[c] = a; arvalid[c] = 1;
    #1 while (!arready[c]) begin @(negedge clk); #1; end
    @(negedge clk); arvalid[c] = 0; rready[c] = 1;
    #1 while (!rvalid[c]) begin @(negedge clk); #1; end
    d = rdata[c];
    @(negedge clk); rready[c] = 0;
  endtask

  task automatic send(input int c, input logic [63:0] d, input bit last);
    @(negedge clk);
    while ($urandom_range(0, 7) == 0) begin s_tvalid[c] = 0; @(negedge clk); end
    s_tvalid[c] = 1; s_tdata[c] = d; s_tlast[c] = last;
    #1 while (!s_tready[c]) begin @(negedge clk); #1; end
    @(posedge clk); #1; s_tvalid[c] = 0;
  endtask

  task automatic send_map(input int c);
    int n = P[c].map_w * P[c].map_h;
    logic [63:0] b = '0;
    for (int k = 0; k < n; k++) begin
      b[63 - 8 * (k % 8) -: 8] = mapb[c][k / P[c].map_w][k % P[c].map_w];
      if (k % 8 == 7 || k == n - 1) begin send(c, b, k == n - 1); b = '0; end
    end
  endtask

  function automatic int outside(input int s);
    int o = 0;
    discretise(s, 0);
    for (int k = 0; k < P[s].n; k++)
      if (ci[k] < 0 || cj[k] < 0 || ci[k] >= P[s].map_w || cj[k] >= P[s].map_h) o++;
    return o;
  endfunction

  // one query on core c, with problem slot c
  task automatic run_query(input int c, input bit new_map, input bit new_scan, input string what);
    int es, ex, ey, et, npr, nrf, t0;
    logic [63:0] b0, b1;
    logic l0, l1;
    logic [31:0] d;
    solve_ref(c, es, ex, ey, et, npr, nrf);
    c_outside += outside(c);
    reg_write(c, REG_NUM_POINTS, 32'(P[c].n));
    reg_write(c, REG_MAP_W, 32'(P[c].map_w));
    reg_write(c, REG_MAP_H, 32'(P[c].map_h));
    reg_write(c, REG_WIN_X, 32'(P[c].win_x));
    reg_write(c, REG_WIN_Y, 32'(P[c].win_y));
    reg_write(c, REG_WIN_T, 32'(P[c].win_t));
    reg_write(c, REG_POSE_X, 32'(P[c].pose_x));
    reg_write(c, REG_POSE_Y, 32'(P[c].pose_y));
    reg_write(c, REG_POSE_T, 32'(P[c].pose_t));
    reg_write(c, REG_STEP_T, 32'(P[c].step_t));
    reg_write(c, REG_INV_RES, 32'(P[c].inv_res));
    n_prune[c] = 0; n_refine[c] = 0;
    reg_write(c, REG_CTRL, 32'h1);
    t0 = int'($time / 10);
    send(c, {63'd0, new_map}, 1'b1);
    if (new_map) send_map(c);
    send(c, {63'd0, new_scan}, 1'b1);
    if (new_scan)
      for (int k = 0; k < P[c].n; k++) send(c, {rng_f[c][k], ang_f[c][k]}, k == P[c].n - 1);
    for (int b = 0; b < 2; b++) begin
      bit acc;
      do begin
        @(negedge clk); m_tready[c] = 1'($urandom_range(0, 2) != 0);
        #1 acc = m_tvalid[c] && m_tready[c];
        if (acc) begin
          if (b == 0) begin b0 = m_tdata[c]; l0 = m_tlast[c]; end else begin b1 = m_tdata[c]; l1 = m_tlast[c]; end
        end
        @(posedge clk);
      end while (!acc);
    end
    @(negedge clk); m_tready[c] = 0;
    repeat (3) @(posedge clk);
    reg_read(c, REG_CTRL, d);
    checks += 5;
    if (d[1] !== 1'b1) begin failures++; $display("FAIL core %0d: done bit not set", c); end
    if (l0 !== 1'b0 || l1 !== 1'b1) begin failures++; $display("FAIL core %0d: tlast", c); end
    if (int'(b0[63:32]) != es || int'(signed'(b0[31:0])) != ex ||
        int'(signed'(b1[63:32])) != ey || int'(signed'(b1[31:0])) != et) begin
      failures++;
      $display("FAIL core %0d %s: got s=%0d (%0d,%0d,%0d) exp s=%0d (%0d,%0d,%0d)", c, what, b0[63:32],
               signed'(b0[31:0]), signed'(b1[63:32]), signed'(b1[31:0]), es, ex, ey, et);
    end
    if (n_prune[c] != npr) begin failures++; $display("FAIL core %0d: pruned %0d exp %0d", c, n_prune[c], npr); end
    if (n_refine[c] != nrf) begin failures++; $display("FAIL core %0d: refined %0d exp %0d", c, n_refine[c], nrf); end
    $display("core %0d %s: s=%0d at (%0d,%0d,%0d), pruned %0d, refined %0d, %0d cycles",
             c, what, es, ex, ey, et, npr, nrf, int'($time / 10) - t0);
  endtask

  initial begin
    for (int c = 0; c < NC; c++) begin
      s_tdata[c] = 0; s_tvalid[c] = 0; s_tlast[c] = 0; m_tready[c] = 0;
      awaddr[c] = 0; araddr[c] = 0; awvalid[c] = 0; wvalid[c] = 0; wdata[c] = 0; wstrb[c] = 4'hF;
      bready[c] = 0; arvalid[c] = 0; rready[c] = 0; n_prune[c] = 0; n_refine[c] = 0;
    end
    // core 0: PF-SLAM. One scan of 180 points is matched against the maps of
    // four particles; the scan is sent once and reused for the others.
    P[0].map_w = 160; P[0].map_h = 160; P[0].n = 180;
    P[0].win_x = 4; P[0].win_y = 4; P[0].win_t = 14;
    P[0].pose_x = to_q16(4.03); P[0].pose_y = to_q16(3.96); P[0].pose_t = to_q16(0.3);
    P[0].step_t = to_q16(0.0175); P[0].inv_res = to_q16(20.0);
    make_map(0, 1);
    make_scan_on_map(0, 80, 0.3, 5.5);
    // core 1: loop detection. A 320 x 320 submap is searched with the ACES
    // window (5 m, 5 m, 0.75 rad), then with a new scan and the Intel /
    // MIT-CSAIL window (2.5 m rounded to 2.4 m, 0.5 rad), reusing the map.
    P[1].map_w = 320; P[1].map_h = 320; P[1].n = 180;
    P[1].win_x = 100; P[1].win_y = 100; P[1].win_t = 21;
    P[1].pose_x = to_q16(8.02); P[1].pose_y = to_q16(7.97); P[1].pose_t = to_q16(1.1);
    P[1].step_t = to_q16(0.0357); P[1].inv_res = to_q16(20.0);
    make_map(1, 1);
    make_scan_on_map(1, 70, 0.5, 7.5);
    repeat (3) @(posedge clk); rst_n = 1;
    fork
      begin
        run_query(0, 1, 1, "particle 1, new map, new scan");
        for (int p = 2; p <= 4; p++) begin
          make_map(0, 1);
          run_query(0, 1, 0, $sformatf("particle %0d, new map, scan reused", p));
        end
      end
      begin
        run_query(1, 1, 1, "ACES loop window, new map, new scan");
        P[1].win_x = 48; P[1].win_y = 48; P[1].win_t = 14;
        P[1].pose_x = to_q16(7.61); P[1].pose_y = to_q16(8.42); P[1].pose_t = to_q16(-0.4);
        make_scan_on_map(1, 70, 0.5, 7.5);
        run_query(1, 0, 1, "Intel/MIT loop window, map reused, new scan");
      end
    join
    $display("mechanisms: map reuse %0d, scan reuse %0d, pruned %0d, refined %0d, points outside map %0d,",
             c_map_reuse, c_scan_reuse, c_prune, c_refine, c_outside);
    $display("            output backpressure cycles %0d, input stall cycles %0d, both cores busy cycles %0d",
             c_backpressure, c_in_stall, c_both_busy);
    checks += 8;
    if (c_map_reuse == 0)    begin failures++; $display("FAIL map reuse never happened"); end
    if (c_scan_reuse == 0)   begin failures++; $display("FAIL scan reuse never happened"); end
    if (c_prune == 0)        begin failures++; $display("FAIL pruning never happened"); end
    if (c_refine == 0)       begin failures++; $display("FAIL refinement never happened"); end
    if (c_outside == 0)      begin failures++; $display("FAIL no point outside the map"); end
    if (c_backpressure == 0) begin failures++; $display("FAIL no output backpressure"); end
    if (c_in_stall == 0)     begin failures++; $display("FAIL no input stall"); end
    if (c_both_busy == 0)    begin failures++; $display("FAIL cores never busy together"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
