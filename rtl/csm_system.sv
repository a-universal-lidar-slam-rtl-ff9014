// csm_system: programmable-logic part of the LiDAR scan-matching accelerator.
//
// Two CSM cores work side by side and independently; software can give them
// different jobs at the same time (two halves of a particle set, or frontend
// scan matching and backend loop detection). In the paper's board design each
// core is fed by its own DMA controller over a 64-bit AXI4-Stream link and is
// configured over AXI4-Lite from the processor's general-purpose port. The DMA
// controllers, AXI interconnects and the processor are vendor parts and are
// not part of this RTL: every core's two stream links and its AXI4-Lite port
// are ports of this module, as arrays indexed by core number.
//
// Timing and protocol are those of csm_core; cores share clock and reset.
module csm_system
  import csm_pkg::*;
#(
  parameter int unsigned NUM_CORES = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Stream input of each core (from its DMA controller)
  input  logic [63:0] s_axis_tdata  [NUM_CORES],
  input  logic        s_axis_tvalid [NUM_CORES],
  input  logic        s_axis_tlast  [NUM_CORES],
  output logic        s_axis_tready [NUM_CORES],
  // AXI4-Stream output of each core (to its DMA controller)
  output logic [63:0] m_axis_tdata  [NUM_CORES],
  output logic        m_axis_tvalid [NUM_CORES],
  output logic        m_axis_tlast  [NUM_CORES],
  input  logic        m_axis_tready [NUM_CORES],
  // AXI4-Lite port of each core (from the interconnect)
  input  logic [7:0]  s_axil_awaddr  [NUM_CORES],
  input  logic        s_axil_awvalid [NUM_CORES],
  output logic        s_axil_awready [NUM_CORES],
  input  logic [31:0] s_axil_wdata   [NUM_CORES],
  input  logic [3:0]  s_axil_wstrb   [NUM_CORES],
  input  logic        s_axil_wvalid  [NUM_CORES],
  output logic        s_axil_wready  [NUM_CORES],
  output logic [1:0]  s_axil_bresp   [NUM_CORES],
  output logic        s_axil_bvalid  [NUM_CORES],
  input  logic        s_axil_bready  [NUM_CORES],
  input  logic [7:0]  s_axil_araddr  [NUM_CORES],
  input  logic        s_axil_arvalid [NUM_CORES],
  output logic        s_axil_arready [NUM_CORES],
  output logic [31:0] s_axil_rdata   [NUM_CORES],
  output logic [1:0]  s_axil_rresp   [NUM_CORES],
  output logic        s_axil_rvalid  [NUM_CORES],
  input  logic        s_axil_rready  [NUM_CORES],
  // observation strobes per core
  output logic        ev_map_reuse   [NUM_CORES],
  output logic        ev_scan_reuse  [NUM_CORES],
  output logic        ev_prune       [NUM_CORES],
  output logic        ev_refine      [NUM_CORES]
);

  for (genvar c = 0; c < int'(NUM_CORES); c++) begin : g_core
    csm_core u_core (
      .clk, .rst_n,
      .s_axis_tdata(s_axis_tdata[c]), .s_axis_tvalid(s_axis_tvalid[c]),
      .s_axis_tlast(s_axis_tlast[c]), .s_axis_tready(s_axis_tready[c]),
      .m_axis_tdata(m_axis_tdata[c]), .m_axis_tvalid(m_axis_tvalid[c]),
      .m_axis_tlast(m_axis_tlast[c]), .m_axis_tready(m_axis_tready[c]),
      .s_axil_awaddr(s_axil_awaddr[c]), .s_axil_awvalid(s_axil_awvalid[c]),
      .s_axil_awready(s_axil_awready[c]),
      .s_axil_wdata(s_axil_wdata[c]), .s_axil_wstrb(s_axil_wstrb[c]),
      .s_axil_wvalid(s_axil_wvalid[c]), .s_axil_wready(s_axil_wready[c]),
      .s_axil_bresp(s_axil_bresp[c]), .s_axil_bvalid(s_axil_bvalid[c]),
      .s_axil_bready(s_axil_bready[c]),
      .s_axil_araddr(s_axil_araddr[c]), .s_axil_arvalid(s_axil_arvalid[c]),
      .s_axil_arready(s_axil_arready[c]),
      .s_axil_rdata(s_axil_rdata[c]), .s_axil_rresp(s_axil_rresp[c]),
      .s_axil_rvalid(s_axil_rvalid[c]), .s_axil_rready(s_axil_rready[c]),
      .ev_map_reuse(ev_map_reuse[c]), .ev_scan_reuse(ev_scan_reuse[c]),
      .ev_prune(ev_prune[c]), .ev_refine(ev_refine[c])
    );
  end

endmodule
