// csm_swmax: sliding-window-maximum unit (module (ii) of the CSM core).
//
// It takes the grid map from the input stream, row by row (y outer, x inner),
// eight 8-bit cells per 64-bit packet, keeps the high 6 bits of each value,
// writes them to the fine map and at the same time builds the coarse map
//     M'(x, y) = max over 0 <= dx, dy < w of M(x + dx, y + dy)
// in two separable steps, as the paper describes:
//   * column maxima M''(x, y) = max_dy M(x, y + dy) come from a cache of
//     MAP_MAX columns x w rows (one w-cell word per column, the slot of row y
//     being y mod w), updated and reduced as each cell arrives;
//   * row maxima M'(x, y) = max_dx M''(x + dx, y) come from a shift register of
//     the last w-1 column maxima.
// Because the window reaches w-1 cells beyond the current cell, the unit
// walks an extended grid of (W + w - 1) x (H + w - 1) positions: the extra
// positions at the end of every row and the w-1 extra rows at the end read as
// zero (cells outside the map contribute nothing to a maximum of values >= 0).
// M'(x, y) is written when position (x + w - 1, y + w - 1) is visited.
//
// Packet format (the figure orders cells 1..8 left to right; this design
// takes left as most significant): cell 1 is tdata[63:56], cell 8 is
// tdata[7:0]. Cells run on across packets in row-major order; cells of the
// last packet beyond W*H are discarded.
//
// Timing (this design's choice; the paper gives no rate): one grid position
// per clock, so a packet is accepted at most every 8 cycles and a map takes
// (W + w - 1) * (H + w - 1) cycles plus stream stalls. start (one cycle) begins
// a map; done pulses for one cycle after the last coarse cell is written.
module csm_swmax
  import csm_pkg::*;
#(
  parameter int unsigned MAXW = MAP_MAX,
  parameter int unsigned W    = WIN
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [15:0]  map_w,
  input  logic [15:0]  map_h,
  // map packets
  input  logic         s_valid,
  input  logic [63:0]  s_data,
  output logic         s_ready,
  // fine map write port
  output logic         fine_we,
  output logic [15:0]  fine_x,
  output logic [15:0]  fine_y,
  output cell_t        fine_d,
  // coarse map write port
  output logic         coarse_we,
  output logic [15:0]  coarse_x,
  output logic [15:0]  coarse_y,
  output cell_t        coarse_d,
  output logic         busy,
  output logic         done
);

  localparam int unsigned XW = $clog2(MAXW);

  // ---------------------------------------------------------------- state
  logic        run;
  logic [15:0] xe, ye;             // position in the extended grid
  logic [63:0] beat;               // current packet, next cell in [63:56]
  logic [3:0]  nleft;              // cells left in beat
  logic [31:0] cells_left;         // real cells still to consume
  cell_t       cache [MAXW][W];    // column-maximum cache
  cell_t       shreg [W-1];        // last w-1 column maxima of this row

  logic        real_cell, have_cell, step, load, last_x, last_y;
  cell_t       v, colmax, rowmax;

  assign real_cell = (xe < map_w) && (ye < map_h);
  assign have_cell = (nleft != 0);
  assign step      = run && (!real_cell || have_cell);
  assign s_ready   = run && !have_cell && (cells_left != 0);
  assign load      = s_valid && s_ready;
  assign last_x    = (xe == map_w + 16'(W) - 16'd2);
  assign last_y    = (ye == map_h + 16'(W) - 16'd2);
  assign busy      = run;

  assign v = real_cell ? quantise(beat[63:56]) : '0;

  // column maximum over the rows ye-w+1 .. ye (rows below 0 are masked)
  cell_t colv [W];

  always_comb begin
    for (int s = 0; s < int'(W); s++) begin
      if (32'(s) == 32'(ye) % W)       colv[s] = v;
      else if (32'(s) > 32'(ye))       colv[s] = '0;   // slot not yet filled
      else                             colv[s] = cache[XW'(xe)][s];
    end
    colmax = '0;
    if (xe < map_w) begin
      for (int s = 0; s < int'(W); s++)
        if (colv[s] > colmax) colmax = colv[s];
    end
    rowmax = colmax;
    for (int s = 0; s < int'(W) - 1; s++)
      if (shreg[s] > rowmax) rowmax = shreg[s];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run        <= 1'b0;
      xe         <= '0;
      ye         <= '0;
      beat       <= '0;
      nleft      <= '0;
      cells_left <= '0;
      done       <= 1'b0;
      for (int s = 0; s < int'(W) - 1; s++) shreg[s] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        run        <= 1'b1;
        xe         <= '0;
        ye         <= '0;
        nleft      <= '0;
        cells_left <= 32'(map_w) * 32'(map_h);
        for (int s = 0; s < int'(W) - 1; s++) shreg[s] <= '0;
      end else if (load) begin
        beat  <= s_data;
        nleft <= 4'd8;
      end else if (step) begin
        if (real_cell) begin
          beat       <= {beat[55:0], 8'h00};
          // the rest of the last packet is padding
          nleft      <= (cells_left == 1) ? 4'd0 : nleft - 4'd1;
          cells_left <= cells_left - 1;
        end
        // shift register of column maxima, cleared at the start of each row
        if (last_x) begin
          for (int s = 0; s < int'(W) - 1; s++) shreg[s] <= '0;
        end else begin
          shreg[0] <= colmax;
          for (int s = 1; s < int'(W) - 1; s++) shreg[s] <= shreg[s-1];
        end
        if (last_x) begin
          xe <= '0;
          if (last_y) begin
            run  <= 1'b0;
            done <= 1'b1;
          end else begin
            ye <= ye + 16'd1;
          end
        end else begin
          xe <= xe + 16'd1;
        end
      end
    end
  end

  // cache update (no reset needed: unfilled slots are masked above)
  always_ff @(posedge clk) begin
    if (step && (xe < map_w)) cache[XW'(xe)][32'(ye) % W] <= v;
  end

  // write ports
  assign fine_we   = step && real_cell;
  assign fine_x    = xe;
  assign fine_y    = ye;
  assign fine_d    = v;
  assign coarse_we = step && (xe >= 16'(W - 1)) && (ye >= 16'(W - 1));
  assign coarse_x  = xe - 16'(W - 1);
  assign coarse_y  = ye - 16'(W - 1);
  assign coarse_d  = rowmax;

endmodule
