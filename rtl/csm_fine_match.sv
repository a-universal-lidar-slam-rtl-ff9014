// csm_fine_match: fine matching unit (module (vii) of the CSM core).
//
// Implements the paper's parallelised fine matching (its Algorithm 2) for one
// coarse candidate (n_x', n_y'): the w x w fine candidates (n_x' + i, n_y + j)
// are evaluated in w/2 passes, n_y = n_y', n_y' + 2, ..., n_y' + w - 2. In each
// pass the loops over k and n_x are interchanged and n_x is fully unrolled, so
// that one w x 2 block of fine-map cells is read per scan point and 2w scores
// are summed in parallel:
//     s[j][i] += M(i_k + n_x' + i, j_k + n_y + j),   i < w, j < 2.
// At the end of a pass the best of the 2w scores is compared with the running
// best s*; it replaces s* only if strictly larger. Ties inside a pass go to the
// candidate met first in the paper's sequential order (n_y outer, n_x inner),
// so the result equals that of the sequential loop of Algorithm 1.
//
// Interface: start latches n_x', n_y' and the current best (best_valid = 0
// stands for s* = -infinity). After done, best_score/best_nx/best_ny hold the
// updated best and improved tells whether any candidate beat the input.
//
// Timing: per pass, N cycles of streaming plus 3 cycles of pipeline and
// comparison; done pulses w/2 * (N + 3) cycles after the clock edge that takes
// start. For the paper's w = 8, N = 360 that is 1452 cycles, 14.5 us at
// 100 MHz (the paper reports 15 us).
module csm_fine_match
  import csm_pkg::*;
#(
  parameter int unsigned LX = WIN,
  parameter int unsigned LY = FINE_ROWS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  idx_t             nx,           // n_x'
  input  idx_t             ny,           // n_y'
  input  logic [PTR_W-1:0] num_points,
  input  logic             best_valid_in,
  input  score_t           best_score_in,
  // indices buffer read port
  output logic [PTR_W-2:0] ix_raddr,
  input  cell_idx_t        ix_q,
  // fine map read port
  output idx_t             fm_x0,
  output idx_t             fm_y0,
  input  cell_t            fm_data [LY][LX],
  // result
  output logic             best_valid,
  output score_t           best_score,
  output idx_t             best_nx,
  output idx_t             best_ny,
  output logic             improved,
  output logic             busy,
  output logic             done
);

  localparam int unsigned PASSES = LX / LY;

  typedef enum logic [1:0] {S_IDLE, S_STREAM, S_CMP} state_t;
  state_t           state;
  logic [PTR_W-1:0] k;
  logic [7:0]       pass;
  idx_t             nx_q, ny_pass;
  logic             v1, v2;
  score_t           s [LY][LX];

  assign ix_raddr = k[PTR_W-2:0];
  assign fm_x0    = ix_q.i + nx_q;
  assign fm_y0    = ix_q.j + ny_pass;
  assign busy     = (state != S_IDLE);

  // best of the pass, in sequential order, strict comparison
  score_t pmax;
  idx_t   pi_, pj_;
  always_comb begin
    pmax = s[0][0];
    pi_  = '0;
    pj_  = '0;
    for (int j = 0; j < int'(LY); j++)
      for (int i = 0; i < int'(LX); i++)
        if (s[j][i] > pmax) begin
          pmax = s[j][i];
          pi_  = idx_t'(i);
          pj_  = idx_t'(j);
        end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      k          <= '0;
      pass       <= '0;
      nx_q       <= '0;
      ny_pass    <= '0;
      v1         <= 1'b0;
      v2         <= 1'b0;
      best_valid <= 1'b0;
      best_score <= '0;
      best_nx    <= '0;
      best_ny    <= '0;
      improved   <= 1'b0;
      done       <= 1'b0;
      for (int j = 0; j < int'(LY); j++)
        for (int i = 0; i < int'(LX); i++) s[j][i] <= '0;
    end else begin
      done <= 1'b0;
      v1   <= (state == S_STREAM) && (k < num_points);
      v2   <= v1;
      case (state)
        S_IDLE: if (start) begin
          state      <= S_STREAM;
          k          <= '0;
          pass       <= '0;
          nx_q       <= nx;
          ny_pass    <= ny;
          best_valid <= best_valid_in;
          best_score <= best_score_in;
          improved   <= 1'b0;
          for (int j = 0; j < int'(LY); j++)
            for (int i = 0; i < int'(LX); i++) s[j][i] <= '0;
        end
        S_STREAM: begin
          if (k < num_points) k <= k + 1'b1;
          if (v2) begin
            for (int j = 0; j < int'(LY); j++)
              for (int i = 0; i < int'(LX); i++) s[j][i] <= s[j][i] + score_t'(fm_data[j][i]);
          end
          if (k == num_points && !v1 && v2) state <= S_CMP;
        end
        S_CMP: begin
          if (!best_valid || pmax > best_score) begin
            best_valid <= 1'b1;
            best_score <= pmax;
            best_nx    <= nx_q + pi_;
            best_ny    <= ny_pass + pj_;
            improved   <= 1'b1;
          end
          for (int j = 0; j < int'(LY); j++)
            for (int i = 0; i < int'(LX); i++) s[j][i] <= '0;
          k <= '0;
          if (pass == 8'(PASSES - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            pass    <= pass + 8'd1;
            ny_pass <= ny_pass + idx_t'(LY);
            state   <= S_STREAM;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
