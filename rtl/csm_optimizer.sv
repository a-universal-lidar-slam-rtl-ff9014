// csm_optimizer: coarse-to-fine search controller (module (iv) of the CSM
// core).
//
// It runs the branch-and-bound style search of the paper's Algorithm 1 in the
// parallelised form of its Algorithm 3:
//   for n_theta = -w_theta .. w_theta-1:
//     discretise the scan for n_theta                       (csm_discretize)
//     for each coarse row n_y' = -w_y + m*w, m < w^_y:
//       for each group of 8 coarse columns n_x' = -w_x + (8g + i)*w:
//         compute the 8 coarse scores s'[i]                  (csm_coarse_match)
//         for i = 0..7 (lanes beyond w^_x are skipped):
//           if s'[i] > s*: fine-match the w x w block       (csm_fine_match)
// with w^_x = 2 w_x / w and w^_y = 2 w_y / w. The pruning test uses the s*
// updated by the fine matches of the lanes before it, exactly as the
// sequential algorithm does. s* starts at "-infinity" (best_valid = 0), so the
// first coarse candidate is always refined; the initial solution is
// (-w_x, -w_y, -w_theta), as in Algorithm 1.
//
// The result leaves on the output stream as two 64-bit beats (the paper's
// packet figure, left half taken as the upper 32 bits):
//   beat 0: {score s* (zero-extended to 32 bits), n_x* (sign-extended)}
//   beat 1: {n_y* (sign-extended), n_theta* (sign-extended)}, with last = 1.
// done pulses when beat 1 has been accepted.
//
// The optimizer only sequences; the three units and the buffers are wired to
// it in csm_core. w^_x, w^_y are computed with shifts, so w must be a power of
// two (the paper's w = 8). cfg is the whole register set; only the window
// fields are used here, so lint reports the other fields as unused. The
// assertion at the end uses the reset synchronously (disable iff), so lint
// reports rst_n as used both ways; the flops use it asynchronously only.
module csm_optimizer
  import csm_pkg::*;
#(
  parameter int unsigned W     = WIN,
  parameter int unsigned LANES = COARSE_PAR
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  csm_cfg_t     cfg,
  output logic         busy,
  output logic         done,
  // discretisation unit
  output logic         disc_start,
  output idx_t         disc_nt,
  input  logic         disc_done,
  // coarse matching unit
  output logic         cm_start,
  output idx_t         cm_nx0,
  output idx_t         cm_ny,
  input  logic         cm_done,
  input  score_t       cm_score [LANES],
  // fine matching unit
  output logic         fm_start,
  output idx_t         fm_nx,
  output idx_t         fm_ny,
  output logic         fm_best_valid,
  output score_t       fm_best_score,
  input  logic         fm_done,
  input  logic         fm_improved,
  input  score_t       fm_score,
  input  idx_t         fm_res_nx,
  input  idx_t         fm_res_ny,
  // result stream
  output logic         m_valid,
  output logic [63:0]  m_data,
  output logic         m_last,
  input  logic         m_ready,
  // event strobes (one cycle each), for observation
  output logic         ev_prune,     // a coarse candidate was pruned
  output logic         ev_refine     // a coarse candidate was refined
);

  localparam int unsigned LOG2W = $clog2(W);
  localparam int unsigned LOG2L = $clog2(LANES);

  typedef enum logic [3:0] {
    S_IDLE, S_DISC, S_DISC_WAIT, S_COARSE, S_COARSE_WAIT, S_CHECK,
    S_FINE_WAIT, S_NEXT, S_OUT0, S_OUT1
  } state_t;
  state_t state;

  idx_t   nt, hny, grp, lane;
  idx_t   hat_wx, hat_wy;
  logic   best_valid;
  score_t best_score;
  idx_t   best_nx, best_ny, best_nt;

  idx_t   hnx;        // coarse column index of the current lane: 8g + lane
  idx_t   ny_c;       // n_y' of the current coarse row
  idx_t   nx0_c;      // n_x' of lane 0 of the current group
  logic   lane_in;    // current lane lies inside the window
  logic   refine;

  assign hnx     = (grp <<< LOG2L) + lane;
  assign ny_c    = -cfg.win_y + (hny <<< LOG2W);
  assign nx0_c   = -cfg.win_x + ((grp <<< LOG2L) <<< LOG2W);
  assign lane_in = (hnx < hat_wx);
  assign refine  = lane_in && (!best_valid || (cm_score[lane[LOG2L-1:0]] > best_score));

  assign busy          = (state != S_IDLE);
  assign disc_start    = (state == S_DISC);
  assign disc_nt       = nt;
  assign cm_start      = (state == S_COARSE);
  assign cm_nx0        = nx0_c;
  assign cm_ny         = ny_c;
  assign fm_start      = (state == S_CHECK) && refine;
  assign fm_nx         = nx0_c + (lane <<< LOG2W);
  assign fm_ny         = ny_c;
  assign fm_best_valid = best_valid;
  assign fm_best_score = best_score;
  assign ev_prune      = (state == S_CHECK) && lane_in && !refine;
  assign ev_refine     = fm_start;

  assign m_valid = (state == S_OUT0) || (state == S_OUT1);
  assign m_last  = (state == S_OUT1);
  assign m_data  = (state == S_OUT0) ? {32'(best_score), 32'(signed'(best_nx))}
                                     : {32'(signed'(best_ny)), 32'(signed'(best_nt))};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      nt         <= '0;
      hny        <= '0;
      grp        <= '0;
      lane       <= '0;
      hat_wx     <= '0;
      hat_wy     <= '0;
      best_valid <= 1'b0;
      best_score <= '0;
      best_nx    <= '0;
      best_ny    <= '0;
      best_nt    <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          nt         <= -cfg.win_t;
          hat_wx     <= (cfg.win_x <<< 1) >>> LOG2W;
          hat_wy     <= (cfg.win_y <<< 1) >>> LOG2W;
          best_valid <= 1'b0;
          best_score <= '0;
          best_nx    <= -cfg.win_x;
          best_ny    <= -cfg.win_y;
          best_nt    <= -cfg.win_t;
          state      <= S_DISC;
        end
        S_DISC:       state <= S_DISC_WAIT;
        S_DISC_WAIT:  if (disc_done) begin
          hny   <= '0;
          grp   <= '0;
          state <= S_COARSE;
        end
        S_COARSE:      state <= S_COARSE_WAIT;
        S_COARSE_WAIT: if (cm_done) begin
          lane  <= '0;
          state <= S_CHECK;
        end
        S_CHECK: state <= refine ? S_FINE_WAIT : S_NEXT;
        S_FINE_WAIT: if (fm_done) begin
          if (fm_improved) begin
            best_valid <= 1'b1;
            best_score <= fm_score;
            best_nx    <= fm_res_nx;
            best_ny    <= fm_res_ny;
            best_nt    <= nt;
          end
          state <= S_NEXT;
        end
        S_NEXT: begin
          if (lane != idx_t'(LANES - 1) && (hnx + idx_t'(1) < hat_wx)) begin
            lane  <= lane + idx_t'(1);
            state <= S_CHECK;
          end else if (((grp + idx_t'(1)) <<< LOG2L) < hat_wx) begin
            grp   <= grp + idx_t'(1);
            state <= S_COARSE;
          end else if (hny + idx_t'(1) < hat_wy) begin
            grp   <= '0;
            hny   <= hny + idx_t'(1);
            state <= S_COARSE;
          end else if (nt + idx_t'(1) < cfg.win_t) begin
            nt    <= nt + idx_t'(1);
            state <= S_DISC;
          end else begin
            state <= S_OUT0;
          end
        end
        S_OUT0: if (m_ready) state <= S_OUT1;
        S_OUT1: if (m_ready) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a started search always ends with the two result beats in order
  property p_last_after_first;
    @(posedge clk) disable iff (!rst_n) (state == S_OUT0 && m_ready) |=> (state == S_OUT1);
  endproperty
  a_last_after_first: assert property (p_last_after_first);

endmodule
