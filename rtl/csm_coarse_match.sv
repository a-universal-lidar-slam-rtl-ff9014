// csm_coarse_match: coarse matching unit (module (vi) of the CSM core).
//
// Implements the inner loop of the paper's parallelised coarse matching
// (its Algorithm 3): for one coarse row n_y' and a group of eight coarse
// columns starting at n_x', it accumulates over all scan points k
//     s'[i] += M'(i_k + n_x' + i*w, j_k + n_y'),   i = 0..7
// i.e. the coarse scores of eight neighbouring coarse candidates at once. The
// eight cells are one read of the rearranged, 8-bank coarse map buffer.
// Cells outside the map read as 0, so points projected outside the trimmed
// map do not contribute.
//
// Timing: start (one cycle) latches n_x', n_y'. One scan point is processed
// per clock: the indices buffer is read in the first cycle, the coarse map in
// the second, the sum is updated in the third. done rises N + 2 cycles
// after start, with the eight scores valid from then until the next start.
module csm_coarse_match
  import csm_pkg::*;
#(
  parameter int unsigned LANES = COARSE_PAR
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  idx_t             nx0,          // n_x' of lane 0
  input  idx_t             ny,           // n_y'
  input  logic [PTR_W-1:0] num_points,
  // indices buffer read port
  output logic [PTR_W-2:0] ix_raddr,
  input  cell_idx_t        ix_q,
  // coarse map read port
  output idx_t             cm_x0,
  output idx_t             cm_y,
  input  cell_t            cm_data [LANES],
  output score_t           score [LANES],
  output logic             busy,
  output logic             done
);

  logic             run;
  logic [PTR_W-1:0] k;
  idx_t             nx0_q, ny_q;
  logic             v1, v2;

  assign ix_raddr = k[PTR_W-2:0];
  assign cm_x0    = ix_q.i + nx0_q;
  assign cm_y     = ix_q.j + ny_q;
  assign busy     = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run   <= 1'b0;
      k     <= '0;
      nx0_q <= '0;
      ny_q  <= '0;
      v1    <= 1'b0;
      v2    <= 1'b0;
      done  <= 1'b0;
      for (int i = 0; i < int'(LANES); i++) score[i] <= '0;
    end else begin
      done <= 1'b0;
      v1   <= run && (k < num_points);
      v2   <= v1;
      if (start && !run) begin
        run   <= 1'b1;
        k     <= '0;
        nx0_q <= nx0;
        ny_q  <= ny;
        for (int i = 0; i < int'(LANES); i++) score[i] <= '0;
      end else if (run) begin
        if (k < num_points) k <= k + 1'b1;
        if (v2) begin
          for (int i = 0; i < int'(LANES); i++) score[i] <= score[i] + score_t'(cm_data[i]);
        end
        if (k == num_points && !v1 && v2) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
