// csm_ctrl_regs: AXI4-Lite control registers of one CSM core.
//
// The paper says the core has memory-mapped registers for its algorithmic
// parameters (grid map size, search window (w_x, w_y, w_theta), search step
// (r, delta_theta), number of scan points) and is started through them; the
// register layout is this design's (see csm_pkg): the initial pose xi^0 is a
// register set too, and the cell size r is given as its reciprocal 1/r.
// CTRL bit 0 (start) is written 1 to start a query and reads back 1 until the
// core has taken it; bit 1 (done) is set when a query ends and cleared by a
// read of CTRL; bit 2 (idle) mirrors the core.
//
// AXI4-Lite, 32-bit data, 8-bit addresses, no wait states beyond the
// handshake: a write is taken when AWVALID and WVALID are both high and no
// response is pending (WSTRB is ignored: registers are written whole); a read
// is taken when ARVALID is high and no read data is pending. Responses are
// always OKAY (so BRESP and RRESP are constant outputs); unknown addresses
// read 0. The lint warning that WSTRB is unused stands for the reason above.
// The two protocol assertions use the reset synchronously (disable iff),
// which is why lint reports rst_n as used both ways; the flops use it
// asynchronously only.
module csm_ctrl_regs
  import csm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
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
  // core side
  output csm_cfg_t    cfg,
  output logic        start,          // one-cycle pulse when the core takes a start
  input  logic        core_idle,
  input  logic        core_done       // one-cycle pulse at the end of a query
);

  logic start_req, done_bit;
  logic wr_fire, rd_fire;

  assign wr_fire        = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr_fire;
  assign s_axil_wready  = wr_fire;
  assign s_axil_bresp   = 2'b00;
  assign rd_fire        = s_axil_arvalid && !s_axil_rvalid;
  assign s_axil_arready = rd_fire;
  assign s_axil_rresp   = 2'b00;
  assign start          = start_req && core_idle;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg           <= '0;
      start_req     <= 1'b0;
      done_bit      <= 1'b0;
      s_axil_bvalid <= 1'b0;
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else begin
      if (start) start_req <= 1'b0;
      if (core_done) done_bit <= 1'b1;
      // write channel
      if (wr_fire) begin
        s_axil_bvalid <= 1'b1;
        unique case (s_axil_awaddr)
          REG_CTRL:       if (s_axil_wdata[0]) start_req <= 1'b1;
          REG_NUM_POINTS: cfg.num_points <= PTR_W'(s_axil_wdata);
          REG_MAP_W:      cfg.map_w      <= s_axil_wdata[15:0];
          REG_MAP_H:      cfg.map_h      <= s_axil_wdata[15:0];
          REG_WIN_X:      cfg.win_x      <= idx_t'(s_axil_wdata[15:0]);
          REG_WIN_Y:      cfg.win_y      <= idx_t'(s_axil_wdata[15:0]);
          REG_WIN_T:      cfg.win_t      <= idx_t'(s_axil_wdata[15:0]);
          REG_POSE_X:     cfg.pose_x     <= fix_t'(s_axil_wdata);
          REG_POSE_Y:     cfg.pose_y     <= fix_t'(s_axil_wdata);
          REG_POSE_T:     cfg.pose_t     <= fix_t'(s_axil_wdata);
          REG_STEP_T:     cfg.step_t     <= fix_t'(s_axil_wdata);
          REG_INV_RES:    cfg.inv_res    <= fix_t'(s_axil_wdata);
          default: ;
        endcase
      end else if (s_axil_bvalid && s_axil_bready) begin
        s_axil_bvalid <= 1'b0;
      end
      // read channel
      if (rd_fire) begin
        s_axil_rvalid <= 1'b1;
        unique case (s_axil_araddr)
          REG_CTRL: begin
            s_axil_rdata <= {29'd0, core_idle, done_bit, start_req};
            if (!core_done) done_bit <= 1'b0;
          end
          REG_NUM_POINTS: s_axil_rdata <= 32'(cfg.num_points);
          REG_MAP_W:      s_axil_rdata <= 32'(cfg.map_w);
          REG_MAP_H:      s_axil_rdata <= 32'(cfg.map_h);
          REG_WIN_X:      s_axil_rdata <= 32'(signed'(cfg.win_x));
          REG_WIN_Y:      s_axil_rdata <= 32'(signed'(cfg.win_y));
          REG_WIN_T:      s_axil_rdata <= 32'(signed'(cfg.win_t));
          REG_POSE_X:     s_axil_rdata <= cfg.pose_x;
          REG_POSE_Y:     s_axil_rdata <= cfg.pose_y;
          REG_POSE_T:     s_axil_rdata <= cfg.pose_t;
          REG_STEP_T:     s_axil_rdata <= cfg.step_t;
          REG_INV_RES:    s_axil_rdata <= cfg.inv_res;
          default:        s_axil_rdata <= '0;
        endcase
      end else if (s_axil_rvalid && s_axil_rready) begin
        s_axil_rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a valid response stays valid until it is accepted
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));

endmodule
