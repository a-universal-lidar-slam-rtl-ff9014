// csm_fine_map: BRAM buffer for the fine (full-resolution) grid map M.
//
// Fine matching reads a block of w x 2 cells, M(x0+i, y0+j) for i < w and
// j < 2, in every cycle. As in the paper the map is cyclically partitioned
// along x (factor w) and along y (factor 2): cell (x, y) lives in bank
// (x mod w, y mod 2) at address (y div 2) * (MAP_MAX / w) + (x div w). The w x 2
// cells of any block then fall in w*2 different banks, so one read of every
// bank serves the whole block; a crossbar routes bank outputs back to lanes.
//
// Interface: one write port (one cell per cycle, from the sliding-window-
// maximum unit) and one block read port. Read timing: rd_x0/rd_y0 are
// presented in one cycle, rd_data arrives in the next. Lanes outside the map
// (x or y negative, x >= map_w, y >= map_h) read as 0, which is how the paper's
// "points outside the trimmed map are ignored" is realised.
module csm_fine_map
  import csm_pkg::*;
#(
  parameter int unsigned MAXW  = MAP_MAX,
  parameter int unsigned LX    = WIN,        // lanes along x (w)
  parameter int unsigned LY    = FINE_ROWS   // lanes along y
) (
  input  logic                clk,
  // write port
  input  logic                wr_en,
  input  logic [15:0]         wr_x,
  input  logic [15:0]         wr_y,
  input  cell_t               wr_data,
  // map extent for the validity test
  input  logic [15:0]         map_w,
  input  logic [15:0]         map_h,
  // block read port
  input  idx_t                rd_x0,
  input  idx_t                rd_y0,
  output cell_t               rd_data [LY][LX]
);

  localparam int unsigned NB    = LX * LY;
  localparam int unsigned ROWW  = (MAXW + LX - 1) / LX;          // words per bank row
  localparam int unsigned DEPTH = ROWW * ((MAXW + LY - 1) / LY);
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned BW    = $clog2(NB);


  // bank and address of a cell
  function automatic logic [BW-1:0] bank_of(input logic [15:0] x, input logic [15:0] y);
    return BW'((32'(y) % LY) * LX + (32'(x) % LX));
  endfunction
  function automatic logic [AW-1:0] addr_of(input logic [15:0] x, input logic [15:0] y);
    return AW'((32'(y) / LY) * ROWW + (32'(x) / LX));
  endfunction


  // --- read: lane coordinates, validity, bank and address per lane
  logic [BW-1:0] lane_bank [LY][LX];
  logic [AW-1:0] lane_addr [LY][LX];
  logic          lane_ok   [LY][LX];
  logic [AW-1:0] bank_addr [NB];

  always_comb begin
    for (int j = 0; j < int'(LY); j++) begin
      for (int i = 0; i < int'(LX); i++) begin
        logic signed [IDX_W:0] x, y;
        x = (IDX_W+1)'(signed'(rd_x0)) + (IDX_W+1)'(i);
        y = (IDX_W+1)'(signed'(rd_y0)) + (IDX_W+1)'(j);
        lane_ok[j][i]   = (x >= 0) && (y >= 0) &&
                          (x < $signed((IDX_W+1)'(MAXW))) && (y < $signed((IDX_W+1)'(MAXW))) &&
                          (x < $signed({1'b0, map_w})) && (y < $signed({1'b0, map_h}));
        lane_bank[j][i] = bank_of(16'(x), 16'(y));
        lane_addr[j][i] = addr_of(16'(x), 16'(y));
      end
    end
    // every bank is addressed by exactly one lane
    for (int b = 0; b < int'(NB); b++) bank_addr[b] = '0;
    for (int j = 0; j < int'(LY); j++)
      for (int i = 0; i < int'(LX); i++)
        bank_addr[lane_bank[j][i]] = lane_addr[j][i];
  end

  cell_t         bank_q     [NB];
  logic [BW-1:0] lane_bank_q [LY][LX];
  logic          lane_ok_q   [LY][LX];

  // one simple dual-port BRAM per bank: the write port serves the
  // sliding-window-maximum unit, the read port the block read
  for (genvar b = 0; b < int'(NB); b++) begin : g_bank
    csm_sdp_ram #(.DEPTH(DEPTH), .WIDTH(CELL_W)) u_bank (
      .clk,
      .we(wr_en && (bank_of(wr_x, wr_y) == BW'(b))),
      .waddr(addr_of(wr_x, wr_y)),
      .wdata(wr_data),
      .raddr(bank_addr[b]),
      .q(bank_q[b])
    );
  end

  always_ff @(posedge clk) begin
    lane_bank_q <= lane_bank;
    lane_ok_q   <= lane_ok;
  end

  always_comb begin
    for (int j = 0; j < int'(LY); j++)
      for (int i = 0; i < int'(LX); i++)
        rd_data[j][i] = lane_ok_q[j][i] ? bank_q[lane_bank_q[j][i]] : '0;
  end

endmodule
