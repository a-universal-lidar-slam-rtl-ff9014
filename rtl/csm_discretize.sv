// csm_discretize: scan discretisation unit (module (v) of the CSM core).
//
// For one rotation step n_theta it projects every scan point z_k = (r_k,
// theta_k) onto the grid with the paper's Eq. 3, taken relative to the
// search-window centre xi^0:
//     phi  = theta_k + xi^0_theta + delta_theta * n_theta
//     i_k  = floor((r_k cos(phi) + xi^0_x) / r)
//     j_k  = floor((r_k sin(phi) + xi^0_y) / r)
// and writes (i_k, j_k) to the indices buffer at address k.
//
// The paper gives the formula but not the circuit. This design computes
// (r cos phi, r sin phi) with a pipelined CORDIC in rotation mode (20 stages,
// 24 fraction bits inside, gain pre-compensated by scaling r with 1/K), after
// folding phi into [-pi/2, pi/2] (one wrap by 2*pi, then a rotation by pi that
// negates the result). Division by the cell size r is a multiplication by the
// inv_res register (1/r in Q16.16); the floor is an arithmetic shift. Indices
// saturate to the 16-bit signed range. phi is assumed to lie within +-3*pi,
// which holds for scan angles and pose in [-pi, pi] and |delta_theta *
// n_theta| <= pi.
//
// Timing: start (one cycle) begins; one scan point enters per clock; the scan
// buffer is read with one cycle of latency; done pulses one cycle after the
// last index is written, N + 24 cycles after start.
// cfg is the whole register set; the window and map fields are not used
// here, so lint reports those bits as unused.
module csm_discretize
  import csm_pkg::*;
#(
  parameter int unsigned ITER = 20
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  idx_t             n_t,
  input  csm_cfg_t         cfg,
  // scan buffer read port
  output logic [PTR_W-2:0] sb_raddr,
  input  scan_pt_t         sb_q,
  // indices buffer write port
  output logic             ix_we,
  output logic [PTR_W-2:0] ix_waddr,
  output cell_idx_t        ix_wdata,
  output logic             busy,
  output logic             done
);

  localparam int unsigned IW = 48;                 // internal width, 24 fraction bits
  typedef logic signed [IW-1:0] ifix_t;
  localparam ifix_t PI      = 48'sd52707179;
  localparam ifix_t HALF_PI = 48'sd26353589;
  localparam ifix_t TWO_PI  = 48'sd105414357;
  localparam ifix_t INV_K   = 48'sd10188014;       // 2^24 / prod sqrt(1 + 2^-2i)
  // atan(2^-i) * 2^24
  localparam ifix_t ATAN [20] = '{
    48'd13176795, 48'd7778716, 48'd4110060, 48'd2086331, 48'd1047214,
    48'd524117,   48'd262123,  48'd131069,  48'd65536,   48'd32768,
    48'd16384,    48'd8192,    48'd4096,    48'd2048,    48'd1024,
    48'd512,      48'd256,     48'd128,     48'd64,      48'd32};

  // ------------------------------------------------------------ issue
  logic             run;
  logic [PTR_W-1:0] k;
  fix_t             phi0;
  logic             v1;
  logic [PTR_W-2:0] k1;

  assign sb_raddr = k[PTR_W-2:0];

  // ----------------------------------------------------- CORDIC pipeline
  ifix_t            cx [ITER+1];
  ifix_t            cy [ITER+1];
  ifix_t            cz [ITER+1];
  logic             cneg [ITER+1];
  logic             cv [ITER+1];
  logic [PTR_W-2:0] ck [ITER+1];

  // stage 0: angle reduction and gain pre-compensation
  ifix_t z0, r0;
  logic  neg0;

  always_comb begin
    z0 = (ifix_t'(sb_q.angle) + ifix_t'(phi0)) <<< 8;
    if (z0 > PI)       z0 = z0 - TWO_PI;
    else if (z0 < -PI) z0 = z0 + TWO_PI;
    neg0 = 1'b0;
    if (z0 > HALF_PI)       begin z0 = z0 - PI; neg0 = 1'b1; end
    else if (z0 < -HALF_PI) begin z0 = z0 + PI; neg0 = 1'b1; end
    r0 = (ifix_t'(sb_q.range) * INV_K) >>> 16;   // Q16.24 of r / K
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cv[0] <= 1'b0;
    end else begin
      cv[0]   <= v1;
      ck[0]   <= k1;
      cx[0]   <= r0;
      cy[0]   <= '0;
      cz[0]   <= z0;
      cneg[0] <= neg0;
    end
  end

  for (genvar s = 0; s < int'(ITER); s++) begin : g_cordic
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cv[s+1] <= 1'b0;
      end else begin
        cv[s+1]   <= cv[s];
        ck[s+1]   <= ck[s];
        cneg[s+1] <= cneg[s];
        if (cz[s] >= 0) begin
          cx[s+1] <= cx[s] - (cy[s] >>> s);
          cy[s+1] <= cy[s] + (cx[s] >>> s);
          cz[s+1] <= cz[s] - ATAN[s];
        end else begin
          cx[s+1] <= cx[s] + (cy[s] >>> s);
          cy[s+1] <= cy[s] - (cx[s] >>> s);
          cz[s+1] <= cz[s] + ATAN[s];
        end
      end
    end
  end

  // ------------------------------------------ translate, scale, floor
  function automatic idx_t to_index(input ifix_t c, input logic neg, input fix_t pose, input fix_t inv_res);
    logic signed [IW-1:0] p;    // metres, Q.24
    logic signed [95:0]   q;    // cells, Q.40
    logic signed [95:0]   fl;
    p  = (neg ? -c : c) + (ifix_t'(pose) <<< 8);
    q  = 96'(p) * 96'(inv_res);
    fl = q >>> 40;
    if (fl > 96'sd32767)       return idx_t'(16'sh7FFF);
    else if (fl < -96'sd32768) return idx_t'(16'sh8000);
    else                       return idx_t'(fl[15:0]);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ix_we    <= 1'b0;
      ix_waddr <= '0;
      ix_wdata <= '0;
    end else begin
      ix_we      <= cv[ITER];
      ix_waddr   <= ck[ITER];
      ix_wdata.i <= to_index(cx[ITER], cneg[ITER], cfg.pose_x, cfg.inv_res);
      ix_wdata.j <= to_index(cy[ITER], cneg[ITER], cfg.pose_y, cfg.inv_res);
    end
  end

  // ------------------------------------------------------------ control
  logic last_out;
  assign last_out = ix_we && ({1'b0, ix_waddr} == PTR_W'(cfg.num_points - 1'b1));
  assign busy     = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= 1'b0;
      k    <= '0;
      phi0 <= '0;
      v1   <= 1'b0;
      k1   <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      v1   <= 1'b0;
      if (start && !run) begin
        run  <= 1'b1;
        k    <= '0;
        phi0 <= cfg.pose_t + fix_t'(cfg.step_t * fix_t'(n_t));
      end else if (run) begin
        if (k < cfg.num_points) begin
          v1 <= 1'b1;
          k1 <= k[PTR_W-2:0];
          k  <= k + 1'b1;
        end
        if (last_out) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
