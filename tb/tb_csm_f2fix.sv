// tb_csm_f2fix: sends scan packets of two single-precision values to the
// float-to-fixed unit and checks the Q16.16 pairs it writes to the scan
// buffer and their addresses. Expected values are computed from the float's
// real value (truncation toward zero, saturation beyond +-2^15), using the
// simulator's own bit-to-real conversion, independent of the unit. Covers
// zero, negative values, tiny values that truncate to 0, large values that
// saturate, infinities, and random values; checks that clear restarts the
// address at 0 and that every write comes one cycle after its packet.
module tb_csm_f2fix;
  import csm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic clear, in_valid, in_ready, wr_en;
  logic [63:0] in_data;
  logic [PTR_W-2:0] wr_addr;
  scan_pt_t wr_data;
  int checks = 0, failures = 0;

  csm_f2fix dut (.clk, .rst_n, .clear, .in_valid, .in_data, .in_ready, .wr_en, .wr_addr, .wr_data);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // real value of single-precision bits, decoded here field by field
  function automatic real f2r(input logic [31:0] f);
    real m;
    int e;
    e = int'(f[30:23]);
    if (e == 0) return 0.0;
    if (e == 255) return f[31] ? -1.0e30 : 1.0e30;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    m = m * (2.0 ** (e - 127));
    return f[31] ? -m : m;
  endfunction

  function automatic int expect_fix(input logic [31:0] f);
    real v;
    v = f2r(f) * 65536.0;
    if (v >= 2147483647.0) return 32'h7FFF_FFFF;
    if (v <= -2147483647.0) return 32'h8000_0001;
    return int'($rtoi(v));
  endfunction

  logic [31:0] fa, fb;
  int exp_addr;

  task automatic send(input logic [31:0] a, input logic [31:0] b);
    @(negedge clk);
    in_valid = 1; in_data = {a, b};
    @(negedge clk);
    in_valid = 0;
    checks += 4;
    if (!wr_en) begin failures++; $display("FAIL no write"); end
    if (int'(wr_addr) != exp_addr) begin failures++; $display("FAIL addr %0d exp %0d", wr_addr, exp_addr); end
    if (wr_data.range != expect_fix(a)) begin
      failures++; $display("FAIL range %h -> %h exp %h", a, wr_data.range, expect_fix(a));
    end
    if (wr_data.angle != expect_fix(b)) begin
      failures++; $display("FAIL angle %h -> %h exp %h", b, wr_data.angle, expect_fix(b));
    end
    exp_addr++;
  endtask

  initial begin
    clear = 0; in_valid = 0; in_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    exp_addr = 0;
    send(32'h0000_0000, 32'h8000_0000);   // +0, -0
    send(32'h3F80_0000, 32'hBF80_0000);   // 1.0, -1.0
    send(32'h4049_0FDB, 32'hC049_0FDB);   // pi, -pi
    send(32'h3380_0000, 32'hB380_0000);   // 2^-24: below resolution
    send(32'h4700_0000, 32'hC700_0000);   // 32768: saturates
    send(32'h7F80_0000, 32'hFF80_0000);   // +inf, -inf
    send(32'h46FF_FE00, 32'h3DCC_CCCD);   // 32767, 0.1
    for (int t = 0; t < 400; t++) begin
      fa = {1'b0, 8'($urandom_range(110, 141)), 23'($urandom)};
      fb = {1'($urandom), 8'($urandom_range(100, 128)), 23'($urandom)};
      send(fa, fb);
    end
    // clear restarts the buffer at address 0
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    exp_addr = 0;
    send(32'h4120_0000, 32'h3F00_0000);   // 10.0, 0.5
    checks++;
    if (!in_ready) begin failures++; $display("FAIL in_ready low"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
