// csm_core: one correlative-scan-matching (CSM) IP core.
//
// Given a grid map M (up to 320 x 320 cells, 8-bit values of which the high
// 6 bits are kept), a LiDAR scan of up to 512 points and an initial pose
// xi^0, the core finds the discrete pose offset (n_x*, n_y*, n_theta*) inside
// the search window [-w_x, w_x) x [-w_y, w_y) x [-w_theta, w_theta) that
// maximises the score s = sum_k M(h(xi, z_k)), and returns it with the score.
// The host turns the offsets into a pose: xi* = xi^0 + (r n_x*, r n_y*,
// delta_theta n_theta*).
//
// Structure (the paper's block diagram of the core): the main controller
// reads the input stream; the sliding-window-maximum unit writes the fine and
// coarse map buffers; the float-to-fixed unit fills the scan buffer; the
// optimizer drives the discretisation unit (scan -> indices buffer), the
// coarse matching unit (8 coarse scores per cycle) and the fine matching unit
// (16 fine scores per cycle), and sends the result on the output stream. The
// indices buffer has one read port, shared by coarse and fine matching, which
// never run at the same time.
//
// Interfaces: AXI4-Stream slave (64-bit, input packets), AXI4-Stream master
// (64-bit, two result beats, tlast on the second), AXI4-Lite slave (control
// registers, see csm_pkg). Single clock, active-low asynchronous reset.
// Packet boundaries follow from the registers (map size, number of points)
// and the flag packets, so the input TLAST is not needed; the lint warning
// that it is unused stands for that reason. The busy outputs of the units
// (and the float-to-fixed unit's constant in_ready and the fine unit's
// best_valid) are left open, because the controllers sequence the units by
// their done pulses; lint notes the open pins.
module csm_core
  import csm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Stream input
  input  logic [63:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  input  logic        s_axis_tlast,
  output logic        s_axis_tready,
  // AXI4-Stream output
  output logic [63:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  output logic        m_axis_tlast,
  input  logic        m_axis_tready,
  // AXI4-Lite control
  input  logic [7:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [7:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // observation strobes
  output logic        ev_map_reuse,
  output logic        ev_scan_reuse,
  output logic        ev_prune,
  output logic        ev_refine
);

  csm_cfg_t cfg;
  logic     start, idle, done;

  // ------------------------------------------------ control registers
  csm_ctrl_regs u_regs (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .cfg, .start, .core_idle(idle), .core_done(done)
  );

  // ------------------------------------------------ main controller
  logic swm_start, swm_valid, swm_ready, swm_done;
  logic f2f_clear, f2f_valid;
  logic opt_start, opt_done;

  csm_main_ctrl u_main (
    .clk, .rst_n, .start, .cfg, .idle, .done,
    .s_valid(s_axis_tvalid), .s_data(s_axis_tdata), .s_ready(s_axis_tready),
    .swm_start, .swm_valid, .swm_ready, .swm_done,
    .f2f_clear, .f2f_valid,
    .opt_start, .opt_done,
    .ev_map_reuse, .ev_scan_reuse
  );

  // ------------------------------------------------ sliding window maximum
  logic        fine_we, coarse_we;
  logic [15:0] fine_x, fine_y, coarse_x, coarse_y;
  cell_t       fine_d, coarse_d;

  csm_swmax u_swmax (
    .clk, .rst_n, .start(swm_start), .map_w(cfg.map_w), .map_h(cfg.map_h),
    .s_valid(swm_valid), .s_data(s_axis_tdata), .s_ready(swm_ready),
    .fine_we, .fine_x, .fine_y, .fine_d,
    .coarse_we, .coarse_x, .coarse_y, .coarse_d,
    .busy(), .done(swm_done)
  );

  // ------------------------------------------------ float to fixed + scan buffer
  logic             sb_we;
  logic [PTR_W-2:0] sb_waddr, sb_raddr;
  scan_pt_t         sb_wdata, sb_q;

  csm_f2fix u_f2fix (
    .clk, .rst_n, .clear(f2f_clear),
    .in_valid(f2f_valid), .in_data(s_axis_tdata), .in_ready(),
    .wr_en(sb_we), .wr_addr(sb_waddr), .wr_data(sb_wdata)
  );

  csm_sdp_ram #(.DEPTH(MAX_POINTS), .WIDTH($bits(scan_pt_t))) u_scan_buf (
    .clk, .we(sb_we), .waddr(sb_waddr), .wdata(sb_wdata), .raddr(sb_raddr), .q(sb_q)
  );

  // ------------------------------------------------ map buffers
  idx_t  fm_x0, fm_y0, cm_x0, cm_y;
  cell_t fm_data [FINE_ROWS][WIN];
  cell_t cm_data [COARSE_PAR];

  csm_fine_map u_fine_map (
    .clk, .wr_en(fine_we), .wr_x(fine_x), .wr_y(fine_y), .wr_data(fine_d),
    .map_w(cfg.map_w), .map_h(cfg.map_h),
    .rd_x0(fm_x0), .rd_y0(fm_y0), .rd_data(fm_data)
  );

  csm_coarse_map u_coarse_map (
    .clk, .wr_en(coarse_we), .wr_x(coarse_x), .wr_y(coarse_y), .wr_data(coarse_d),
    .map_w(cfg.map_w), .map_h(cfg.map_h),
    .rd_x0(cm_x0), .rd_y(cm_y), .rd_data(cm_data)
  );

  // ------------------------------------------------ discretisation + indices buffer
  logic             disc_start, disc_done;
  idx_t             disc_nt;
  logic             ix_we;
  logic [PTR_W-2:0] ix_waddr, ix_raddr, cm_ix_raddr, fm_ix_raddr;
  cell_idx_t        ix_wdata, ix_q;

  csm_discretize u_disc (
    .clk, .rst_n, .start(disc_start), .n_t(disc_nt), .cfg,
    .sb_raddr, .sb_q,
    .ix_we, .ix_waddr, .ix_wdata,
    .busy(), .done(disc_done)
  );

  csm_sdp_ram #(.DEPTH(MAX_POINTS), .WIDTH($bits(cell_idx_t))) u_idx_buf (
    .clk, .we(ix_we), .waddr(ix_waddr), .wdata(ix_wdata), .raddr(ix_raddr), .q(ix_q)
  );

  // ------------------------------------------------ matching units
  logic   cm_start, cm_done;
  idx_t   cm_nx0, cm_ny;
  score_t cm_score [COARSE_PAR];

  csm_coarse_match u_coarse (
    .clk, .rst_n, .start(cm_start), .nx0(cm_nx0), .ny(cm_ny),
    .num_points(cfg.num_points),
    .ix_raddr(cm_ix_raddr), .ix_q,
    .cm_x0, .cm_y, .cm_data,
    .score(cm_score), .busy(), .done(cm_done)
  );

  logic   fm_start, fm_done, fm_busy, fm_improved, fm_best_valid;
  idx_t   fm_nx, fm_ny, fm_res_nx, fm_res_ny;
  score_t fm_best_score, fm_score;

  csm_fine_match u_fine (
    .clk, .rst_n, .start(fm_start), .nx(fm_nx), .ny(fm_ny),
    .num_points(cfg.num_points),
    .best_valid_in(fm_best_valid), .best_score_in(fm_best_score),
    .ix_raddr(fm_ix_raddr), .ix_q,
    .fm_x0, .fm_y0, .fm_data,
    .best_valid(), .best_score(fm_score),
    .best_nx(fm_res_nx), .best_ny(fm_res_ny),
    .improved(fm_improved), .busy(fm_busy), .done(fm_done)
  );

  assign ix_raddr = fm_busy ? fm_ix_raddr : cm_ix_raddr;

  // ------------------------------------------------ optimizer
  csm_optimizer u_opt (
    .clk, .rst_n, .start(opt_start), .cfg, .busy(), .done(opt_done),
    .disc_start, .disc_nt, .disc_done,
    .cm_start, .cm_nx0, .cm_ny, .cm_done, .cm_score,
    .fm_start, .fm_nx, .fm_ny, .fm_best_valid, .fm_best_score,
    .fm_done, .fm_improved, .fm_score, .fm_res_nx, .fm_res_ny,
    .m_valid(m_axis_tvalid), .m_data(m_axis_tdata), .m_last(m_axis_tlast),
    .m_ready(m_axis_tready),
    .ev_prune, .ev_refine
  );

endmodule
