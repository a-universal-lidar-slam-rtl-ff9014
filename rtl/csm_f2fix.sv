// csm_f2fix: floating-point to fixed-point unit (module (iii) of the CSM core).
//
// A scan packet carries one scan point as two IEEE-754 single-precision
// values: the range r_k (metres) and the angle theta_k (radians). The paper's
// packet figure puts the range on the left; this design takes left as the
// upper half, so range = tdata[63:32] and angle = tdata[31:0]. Each value is
// converted to signed Q16.16 and the pair is written to the scan buffer at
// the next free address (0, 1, 2, ... after clear).
//
// Conversion (this design's choice of rounding): truncation toward zero;
// magnitudes below 2^-16, zeros, denormals and negative zero give 0; values
// of 2^15 or more in magnitude, infinities and NaNs saturate to the largest
// Q16.16 value of the same sign.
//
// Timing: one packet per cycle (in_ready is always 1); the scan buffer write
// happens in the cycle after the packet is accepted.
module csm_f2fix
  import csm_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,        // next point goes to address 0
  input  logic             in_valid,
  input  logic [63:0]      in_data,
  output logic             in_ready,
  output logic             wr_en,
  output logic [PTR_W-2:0] wr_addr,
  output scan_pt_t         wr_data
);

  // single precision to Q16.16
  function automatic fix_t to_fix(input logic [31:0] f);
    logic        sgn;
    logic [7:0]  e;
    logic [23:0] mant;
    logic [47:0] mag;
    int          sh;
    fix_t        res;
    sgn  = f[31];
    e    = f[30:23];
    mant = {1'b1, f[22:0]};
    // value = mant * 2^(e - 127 - 23); in Q16.16 units: mant * 2^(e - 134)
    sh   = int'(e) - 134;
    if (e == 8'd0) begin
      res = '0;
    end else if (e == 8'hFF || sh > 7) begin
      res = sgn ? fix_t'(32'sh8000_0001) : fix_t'(32'sh7FFF_FFFF);
    end else begin
      if (sh >= 0) mag = 48'(mant) << sh;
      else if (sh > -24) mag = 48'(mant) >> (-sh);
      else mag = '0;
      if (mag > 48'h7FFF_FFFF) mag = 48'h7FFF_FFFF;
      res = sgn ? -fix_t'(mag[31:0]) : fix_t'(mag[31:0]);
    end
    return res;
  endfunction

  assign in_ready = 1'b1;

  logic [PTR_W-2:0] ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr     <= '0;
      wr_en   <= 1'b0;
      wr_addr <= '0;
      wr_data <= '0;
    end else begin
      wr_en <= 1'b0;
      if (clear) begin
        ptr <= '0;
      end else if (in_valid) begin
        wr_en         <= 1'b1;
        wr_addr       <= ptr;
        wr_data.range <= to_fix(in_data[63:32]);
        wr_data.angle <= to_fix(in_data[31:0]);
        ptr           <= ptr + 1'b1;
      end
    end
  end

endmodule
