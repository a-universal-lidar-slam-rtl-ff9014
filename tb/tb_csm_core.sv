// tb_csm_core: end-to-end test of one CSM core through its AXI interfaces.
//
// A random map with walls (csm_ref_pkg::make_map) and a random scan are sent
// exactly as the host would: registers over AXI4-Lite, then on the input
// stream a map flag packet, the map packets (8 cells per packet, row-major,
// cell 1 in the top byte), a scan flag packet and the scan packets ({range,
// angle} as single-precision floats). The two result beats are compared with
// the sequential reference of Algorithm 1 (real-valued trigonometry; scan
// points whose index lies within 0.02 cell of a cell edge are redrawn, so the
// reference is exact). Five queries cover: new map and scan; reuse of the map
// with a new scan; a new map with the scan reused; reuse of both with a
// different search window; a sparse map with a scan
// drawn mostly on its walls and a large window, where pruning occurs. Input TVALID has random gaps, output TREADY random
// backpressure. Some scan points fall outside the map. The CTRL done bit is
// checked, and the numbers of pruned and refined coarse candidates are
// compared with the reference.
module tb_csm_core;
  import csm_pkg::*;
  import csm_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [63:0] s_tdata, m_tdata;
  logic s_tvalid, s_tlast, s_tready, m_tvalid, m_tlast, m_tready;
  logic [7:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [1:0] bresp, rresp;
  logic ev_map_reuse, ev_scan_reuse, ev_prune, ev_refine;
  int checks = 0, failures = 0;
  int n_prune, n_refine, n_mr, n_sr;

  csm_core dut (.clk, .rst_n,
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tlast(s_tlast), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tlast(m_tlast), .m_axis_tready(m_tready),
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(4'hF), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .ev_map_reuse, .ev_scan_reuse, .ev_prune, .ev_refine);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (ev_prune) n_prune++;
    if (ev_refine) n_refine++;
    if (ev_map_reuse) n_mr++;
    if (ev_scan_reuse) n_sr++;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic reg_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    #1 while (!(awready && wready)) begin @(negedge clk); #1; end
    @(negedge clk); awvalid = 0; wvalid = 0; bready = 1;
    #1 while (!bvalid) begin @(negedge clk); #1; end
    @(negedge clk); bready = 0;
  endtask

  task automatic reg_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); araddr = a; arvalid = 1;
    #1 while (!arready) begin @(negedge clk); #1; end
    @(negedge clk); arvalid = 0; rready = 1;
    #1 while (!rvalid) begin @(negedge clk); #1; end
    d = rdata;
    @(negedge clk); rready = 0;
  endtask

  task automatic send(input logic [63:0] d, input bit last);
    @(negedge clk);
    while ($urandom_range(0, 3) == 0) begin s_tvalid = 0; @(negedge clk); end
    s_tvalid = 1; s_tdata = d; s_tlast = last;
    #1 while (!s_tready) begin @(negedge clk); #1; end
    @(posedge clk); #1; s_tvalid = 0;
  endtask

  task automatic send_map(input int s);
    int n = P[s].map_w * P[s].map_h;
    logic [63:0] b = '0;
    for (int c = 0; c < n; c++) begin
      b[63 - 8 * (c % 8) -: 8] = mapb[s][c / P[s].map_w][c % P[s].map_w];
      if (c % 8 == 7 || c == n - 1) begin send(b, c == n - 1); b = '0; end
    end
  endtask

  task automatic run_query(input int s, input bit new_map, input bit new_scan, input string what);
    int es, ex, ey, et, npr, nrf, mr0, sr0;
    logic [63:0] b0, b1;
    logic l0, l1;
    logic [31:0] d;
    solve_ref(s, es, ex, ey, et, npr, nrf);
    reg_write(REG_NUM_POINTS, 32'(P[s].n));
    reg_write(REG_MAP_W, 32'(P[s].map_w));
    reg_write(REG_MAP_H, 32'(P[s].map_h));
    reg_write(REG_WIN_X, 32'(P[s].win_x));
    reg_write(REG_WIN_Y, 32'(P[s].win_y));
    reg_write(REG_WIN_T, 32'(P[s].win_t));
    reg_write(REG_POSE_X, 32'(P[s].pose_x));
    reg_write(REG_POSE_Y, 32'(P[s].pose_y));
    reg_write(REG_POSE_T, 32'(P[s].pose_t));
    reg_write(REG_STEP_T, 32'(P[s].step_t));
    reg_write(REG_INV_RES, 32'(P[s].inv_res));
    n_prune = 0; n_refine = 0; mr0 = n_mr; sr0 = n_sr;
    reg_write(REG_CTRL, 32'h1);
    send({63'd0, new_map}, 1'b1);
    if (new_map) send_map(s);
    send({63'd0, new_scan}, 1'b1);
    if (new_scan)
      for (int k = 0; k < P[s].n; k++) send({rng_f[s][k], ang_f[s][k]}, k == P[s].n - 1);
    for (int b = 0; b < 2; b++) begin
      bit acc;
      do begin
        @(negedge clk); m_tready = 1'($urandom_range(0, 2) != 0);
        #1 acc = m_tvalid && m_tready;
        if (acc) begin
          if (b == 0) begin b0 = m_tdata; l0 = m_tlast; end else begin b1 = m_tdata; l1 = m_tlast; end
        end
        @(posedge clk);
      end while (!acc);
    end
    @(negedge clk); m_tready = 0;
    repeat (3) @(posedge clk);
    reg_read(REG_CTRL, d);
    checks += 6;
    if (d[1] !== 1'b1 || d[2] !== 1'b1) begin failures++; $display("FAIL CTRL after query %h", d); end
    if (l0 !== 1'b0 || l1 !== 1'b1) begin failures++; $display("FAIL tlast %b %b", l0, l1); end
    if (int'(b0[63:32]) != es || int'(signed'(b0[31:0])) != ex ||
        int'(signed'(b1[63:32])) != ey || int'(signed'(b1[31:0])) != et) begin
      failures++;
      $display("FAIL %s: got s=%0d (%0d,%0d,%0d) exp s=%0d (%0d,%0d,%0d)", what, b0[63:32],
               signed'(b0[31:0]), signed'(b1[63:32]), signed'(b1[31:0]), es, ex, ey, et);
    end
    if (n_prune != npr || n_refine != nrf) begin
      failures++; $display("FAIL %s: pruned %0d/%0d refined %0d/%0d", what, n_prune, npr, n_refine, nrf);
    end
    if (n_mr - mr0 != int'(!new_map)) begin failures++; $display("FAIL map reuse strobe"); end
    if (n_sr - sr0 != int'(!new_scan)) begin failures++; $display("FAIL scan reuse strobe"); end
    $display("%s: s=%0d at (%0d,%0d,%0d), pruned %0d refined %0d", what, es, ex, ey, et, npr, nrf);
  endtask

  function automatic int outside(input int s);
    int o = 0;
    discretise(s, 0);
    for (int k = 0; k < P[s].n; k++)
      if (ci[k] < 0 || cj[k] < 0 || ci[k] >= P[s].map_w || cj[k] >= P[s].map_h) o++;
    return o;
  endfunction

  initial begin
    s_tdata = 0; s_tvalid = 0; s_tlast = 0; m_tready = 0;
    awaddr = 0; araddr = 0; awvalid = 0; wvalid = 0; wdata = 0; bready = 0; arvalid = 0; rready = 0;
    n_mr = 0; n_sr = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // 64 x 48 cells of 5 cm, sensor near the middle
    P[0].map_w = 64; P[0].map_h = 48; P[0].n = 120;
    P[0].win_x = 8; P[0].win_y = 8; P[0].win_t = 2;
    P[0].pose_x = to_q16(1.55); P[0].pose_y = to_q16(1.23); P[0].pose_t = to_q16(0.3);
    P[0].step_t = to_q16(0.02); P[0].inv_res = to_q16(20.0);
    make_map(0);
    make_scan(0, 0.2, 2.2);
    checks++;
    if (outside(0) == 0) begin failures++; $display("FAIL no point outside the map"); end
    $display("%0d of %0d points outside the map", outside(0), P[0].n);
    run_query(0, 1, 1, "new map, new scan");
    P[0].pose_x = to_q16(1.40); P[0].pose_y = to_q16(1.10); P[0].pose_t = to_q16(-0.5);
    make_scan(0, 0.2, 1.5);
    run_query(0, 0, 1, "map reused, new scan");
    make_map(0);
    run_query(0, 1, 0, "new map, scan reused");
    P[0].win_x = 16; P[0].win_y = 12;
    run_query(0, 0, 0, "both reused, window (16,12,2)");
    make_map(0, 1);
    P[0].win_x = 24; P[0].win_y = 24;
    make_scan_on_map(0, 80, 0.2, 2.2);
    run_query(0, 1, 1, "sparse map, scan on its walls, window (24,24,2)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
