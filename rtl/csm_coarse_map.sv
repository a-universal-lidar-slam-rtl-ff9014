// csm_coarse_map: BRAM buffer for the coarse map M' (sliding-window maxima).
//
// Coarse matching reads, for one scan point, the 8 cells M'(x0 + i*w, y) for
// i = 0..7: a stride-w access along x. Following the paper (its Fig. 8), the
// columns of every row are stored in a rearranged order: all columns with
// x mod w = 0 first (0, w, 2w, ...), then those with x mod w = 1, and so on.
// The rearranged position of column x is
//     a(x) = (x mod w) * (MAP_MAX / w) + (x div w)
// so the 8 strided cells sit at 8 consecutive positions a(x0) .. a(x0)+7. The
// row is then cyclically partitioned over 8 banks (bank = a mod 8, address =
// y * (MAP_MAX / 8) + a div 8), and the 8 cells are read in one cycle.
//
// Interface: one write port (one cell per cycle, column x in natural order;
// the rearrangement happens here) and one 8-lane read port. Read timing:
// rd_x0/rd_y presented in one cycle, rd_data valid in the next. Lanes outside
// the map read as 0.
module csm_coarse_map
  import csm_pkg::*;
#(
  parameter int unsigned MAXW  = MAP_MAX,
  parameter int unsigned W     = WIN,         // stride between lanes (w)
  parameter int unsigned LANES = COARSE_PAR
) (
  input  logic         clk,
  input  logic         wr_en,
  input  logic [15:0]  wr_x,
  input  logic [15:0]  wr_y,
  input  cell_t        wr_data,
  input  logic [15:0]  map_w,
  input  logic [15:0]  map_h,
  input  idx_t         rd_x0,
  input  idx_t         rd_y,
  output cell_t        rd_data [LANES]
);

  localparam int unsigned COLS_PER_RES = MAXW / W;      // columns per residue class
  localparam int unsigned ROWW  = MAXW / LANES;         // words per bank per row
  localparam int unsigned DEPTH = ROWW * MAXW;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned BW    = $clog2(LANES);


  // rearranged position of column x (Fig. 8)
  function automatic logic [15:0] rearr(input logic [15:0] x);
    return 16'((32'(x) % W) * COLS_PER_RES + (32'(x) / W));
  endfunction

  logic [15:0] wa;
  assign wa = rearr(wr_x);


  // --- read
  logic [BW-1:0] lane_bank [LANES];
  logic          lane_ok   [LANES];
  logic [AW-1:0] bank_addr [LANES];

  always_comb begin
    logic signed [IDX_W:0] x0, y;
    x0 = (IDX_W+1)'(signed'(rd_x0));
    y  = (IDX_W+1)'(signed'(rd_y));
    for (int b = 0; b < int'(LANES); b++) bank_addr[b] = '0;
    // x0 mod w is the same for all lanes, so the lanes occupy consecutive
    // rearranged positions and hence 8 different banks.
    for (int i = 0; i < int'(LANES); i++) begin
      logic signed [IDX_W:0] x;
      logic [15:0] a;
      x = x0 + (IDX_W+1)'(i * int'(W));
      a = rearr(16'(x));
      lane_ok[i]   = (x >= 0) && (y >= 0) && (x < $signed((IDX_W+1)'(MAXW))) && (y < $signed((IDX_W+1)'(MAXW))) &&
                     (x < $signed({1'b0, map_w})) && (y < $signed({1'b0, map_h}));
      lane_bank[i] = BW'(a % LANES);
      bank_addr[BW'(a % LANES)] = AW'(32'(16'(y)) * ROWW + 32'(a / LANES));
    end
  end

  cell_t         bank_q      [LANES];
  logic [BW-1:0] lane_bank_q [LANES];
  logic          lane_ok_q   [LANES];

  // one simple dual-port BRAM per bank
  for (genvar b = 0; b < int'(LANES); b++) begin : g_bank
    csm_sdp_ram #(.DEPTH(DEPTH), .WIDTH(CELL_W)) u_bank (
      .clk,
      .we(wr_en && (BW'(wa % LANES) == BW'(b))),
      .waddr(AW'(32'(wr_y) * ROWW + 32'(wa / LANES))),
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
    for (int i = 0; i < int'(LANES); i++)
      rd_data[i] = lane_ok_q[i] ? bank_q[lane_bank_q[i]] : '0;
  end

endmodule
