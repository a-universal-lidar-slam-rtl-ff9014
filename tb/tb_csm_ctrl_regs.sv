// tb_csm_ctrl_regs: checks the AXI4-Lite control registers of a core.
//
// A master task writes and reads registers with random valid delays, with the
// address and data channels arriving in either order, and with random
// BREADY/RREADY backpressure. A model of the register file is compared with
// every read and with the cfg outputs. The start bit is checked to give
// exactly one start pulse, held back while the core is busy and taken when it
// becomes idle; the done bit is checked to be set by core_done and cleared by
// a read of CTRL. Each transaction must complete within 20 cycles.
module tb_csm_ctrl_regs;
  import csm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  csm_cfg_t    cfg;
  logic        start, core_idle, core_done;
  int          checks = 0, failures = 0, n_start = 0;
  logic [31:0] model [12];
  logic [7:0]  addrs [11] = '{REG_NUM_POINTS, REG_MAP_W, REG_MAP_H, REG_WIN_X, REG_WIN_Y, REG_WIN_T,
                              REG_POSE_X, REG_POSE_Y, REG_POSE_T, REG_STEP_T, REG_INV_RES};

  csm_ctrl_regs dut (.clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .cfg, .start, .core_idle, .core_done);

  always #5 clk = ~clk;
  always @(posedge clk) if (start) n_start++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // value a register reads back after writing v
  function automatic logic [31:0] rb(input logic [7:0] a, input logic [31:0] v);
    case (a)
      REG_NUM_POINTS: return 32'(v[PTR_W-1:0]);
      REG_MAP_W, REG_MAP_H: return 32'(v[15:0]);
      REG_WIN_X, REG_WIN_Y, REG_WIN_T: return 32'(signed'(v[15:0]));
      default: return v;
    endcase
  endfunction

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    int t = 0;
    bit aw_done = 0, w_done = 0;
    int daw = $urandom_range(0, 3), dw = $urandom_range(0, 3);
    @(negedge clk);
    awaddr = a; wdata = d; wstrb = 4'hF;
    while (!(aw_done && w_done)) begin
      awvalid = !aw_done && (t >= daw);
      wvalid  = !w_done && (t >= dw);
      @(posedge clk);
      if (awvalid && awready) aw_done = 1;
      if (wvalid && wready) w_done = 1;
      #1; t++;
      if (t > 20) begin failures++; $display("FAIL write timeout"); return; end
    end
    awvalid = 0; wvalid = 0;
    forever begin
      @(negedge clk); bready = 1'($urandom_range(0, 1)); t++;
      if (bvalid && bready) begin @(posedge clk); #1; break; end
      if (t >= 40) break;
    end
    checks++;
    if (t >= 40 || bresp != 2'b00) begin failures++; $display("FAIL write response"); end
    bready = 0;
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    int t = 0;
    @(negedge clk);
    araddr = a; arvalid = 1;
    do begin @(posedge clk); #1; t++; end while (!arready_q && t < 20);
    arvalid = 0;
    forever begin
      @(negedge clk); rready = 1'($urandom_range(0, 1));
      if (rvalid && rready) begin d = rdata; @(posedge clk); #1; break; end
      @(posedge clk); t++;
      if (t > 40) begin failures++; $display("FAIL read timeout"); break; end
    end
    rready = 0;
    checks++;
    if (rresp != 2'b00) begin failures++; $display("FAIL rresp"); end
  endtask

  // arready is combinational; remember it at the edge
  logic arready_q;
  always @(posedge clk) arready_q <= arvalid && arready;

  initial begin
    logic [31:0] d;
    awaddr = 0; araddr = 0; awvalid = 0; wvalid = 0; arvalid = 0; wdata = 0; wstrb = 0;
    bready = 0; rready = 0; core_idle = 0; core_done = 0;
    foreach (model[i]) model[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // random register traffic
    for (int it = 0; it < 300; it++) begin
      automatic int r = $urandom_range(0, 10);
      if ($urandom_range(0, 1)) begin
        automatic logic [31:0] v = $urandom;
        axi_write(addrs[r], v);
        model[r] = rb(addrs[r], v);
      end else begin
        axi_read(addrs[r], d);
        checks++;
        if (d !== model[r]) begin failures++; $display("FAIL read %h got %h exp %h", addrs[r], d, model[r]); end
      end
    end
    // cfg outputs
    checks += 11;
    if (32'(cfg.num_points) != model[0]) failures++;
    if (32'(cfg.map_w) != model[1]) failures++;
    if (32'(cfg.map_h) != model[2]) failures++;
    if (32'(signed'(cfg.win_x)) != model[3]) failures++;
    if (32'(signed'(cfg.win_y)) != model[4]) failures++;
    if (32'(signed'(cfg.win_t)) != model[5]) failures++;
    if (cfg.pose_x != model[6] || cfg.pose_y != model[7] || cfg.pose_t != model[8]) failures++;
    if (cfg.step_t != model[9]) failures++;
    if (cfg.inv_res != model[10]) failures++;
    // unknown address reads 0
    axi_read(8'hF0, d); checks++; if (d != 0) failures++;
    // start held while busy, one pulse when idle
    n_start = 0;
    axi_write(REG_CTRL, 32'h1);
    repeat (10) @(posedge clk);
    axi_read(REG_CTRL, d);
    checks += 2;
    if (n_start != 0) begin failures++; $display("FAIL start while busy"); end
    if (d[0] !== 1'b1 || d[2] !== 1'b0) begin failures++; $display("FAIL ctrl pending %h", d); end
    @(negedge clk); core_idle = 1;
    repeat (5) @(posedge clk); #1;
    checks++;
    if (n_start != 1) begin failures++; $display("FAIL start pulses %0d", n_start); end
    @(negedge clk); core_idle = 0;
    // done bit
    @(negedge clk); core_done = 1; @(negedge clk); core_done = 0;
    axi_read(REG_CTRL, d); checks++;
    if (d[1] !== 1'b1 || d[0] !== 1'b0) begin failures++; $display("FAIL done bit %h", d); end
    axi_read(REG_CTRL, d); checks++;
    if (d[1] !== 1'b0) begin failures++; $display("FAIL done not cleared %h", d); end
    // a write of 0 to CTRL starts nothing
    n_start = 0; core_idle = 1;
    axi_write(REG_CTRL, 32'h0); repeat (5) @(posedge clk);
    checks++; if (n_start != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
