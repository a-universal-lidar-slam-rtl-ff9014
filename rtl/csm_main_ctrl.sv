// csm_main_ctrl: main controller of a CSM core (module (i)).
//
// It reads the input stream and steers each query through the core:
//   1. a flag packet for the map; if its flag F is 1 the map packets follow
//      and are handed to the sliding-window-maximum unit until it reports
//      the fine and coarse maps written; if F is 0 the maps already in BRAM
//      are reused (no map packets are sent);
//   2. a flag packet for the scan; if F is 1, N scan packets follow and go to
//      the float-to-fixed unit, which fills the scan buffer from address 0;
//      if F is 0 the scan already in the buffer is reused;
//   3. the optimizer is started and the controller waits for it to send the
//      result.
// The paper names flag packets as the way to skip a transfer and reuse data
// on BRAM (one-to-many matching); the order map-then-scan and the meaning of
// F are this design's choice. The flag is bit 0 of the flag packet.
//
// Timing: one flag packet per cycle; map packets at the rate the
// sliding-window-maximum unit accepts them; scan packets one per cycle. start
// comes from the control registers and is taken only while idle; done pulses
// with the optimizer's done.
// cfg is the whole register set; only num_points is used here, so lint
// reports the other bits as unused.
module csm_main_ctrl
  import csm_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  csm_cfg_t         cfg,
  output logic             idle,
  output logic             done,
  // input stream
  input  logic             s_valid,
  input  logic [63:0]      s_data,
  output logic             s_ready,
  // sliding-window-maximum unit
  output logic             swm_start,
  output logic             swm_valid,
  input  logic             swm_ready,
  input  logic             swm_done,
  // float-to-fixed unit
  output logic             f2f_clear,
  output logic             f2f_valid,
  // optimizer
  output logic             opt_start,
  input  logic             opt_done,
  // observation: one-cycle strobes when a transfer is skipped
  output logic             ev_map_reuse,
  output logic             ev_scan_reuse
);

  typedef enum logic [2:0] {
    S_IDLE, S_MAP_FLAG, S_MAP, S_SCAN_FLAG, S_SCAN, S_OPT, S_OPT_WAIT
  } state_t;
  state_t state;

  logic [PTR_W-1:0] cnt;
  logic             flag;

  assign flag      = s_data[FLAG_BIT];
  assign idle      = (state == S_IDLE);
  assign swm_valid = (state == S_MAP) && s_valid;
  assign f2f_valid = (state == S_SCAN) && s_valid;
  assign opt_start = (state == S_OPT);

  always_comb begin
    unique case (state)
      S_MAP_FLAG, S_SCAN_FLAG: s_ready = 1'b1;
      S_MAP:                   s_ready = swm_ready;
      S_SCAN:                  s_ready = 1'b1;
      default:                 s_ready = 1'b0;
    endcase
  end

  assign swm_start     = (state == S_MAP_FLAG) && s_valid && flag;
  assign f2f_clear     = (state == S_SCAN_FLAG) && s_valid && flag;
  assign ev_map_reuse  = (state == S_MAP_FLAG) && s_valid && !flag;
  assign ev_scan_reuse = (state == S_SCAN_FLAG) && s_valid && !flag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:      if (start) state <= S_MAP_FLAG;
        S_MAP_FLAG:  if (s_valid) state <= flag ? S_MAP : S_SCAN_FLAG;
        S_MAP:       if (swm_done) state <= S_SCAN_FLAG;
        S_SCAN_FLAG: if (s_valid) begin
          cnt   <= '0;
          state <= flag ? S_SCAN : S_OPT;
        end
        S_SCAN: if (s_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 == cfg.num_points) state <= S_OPT;
        end
        S_OPT:      state <= S_OPT_WAIT;
        S_OPT_WAIT: if (opt_done) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
