// csm_sdp_ram: simple dual-port block RAM, one write port and one read port
// on the same clock. The CSM core uses two of them: the scan buffer (512
// range/angle pairs, 64 bits each) and the indices buffer (512 discretised
// cell indices, 32 bits each), both sized as in the paper (N <= 512).
//
// Timing: a write takes effect at the clock edge where we is high; a read
// returns q one cycle after raddr is presented (registered output, as a
// block RAM does). Reading and writing the same address in one cycle returns
// the old data. The memory has no reset; the core never reads an entry it
// has not written.
module csm_sdp_ram #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] q
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    q <= mem[raddr];
  end

endmodule
