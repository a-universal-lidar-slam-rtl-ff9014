// tb_csm_sdp_ram: writes random words to the simple dual-port RAM, reads
// them back and checks the data and the one-cycle read latency, including a
// read of an address written in the same cycle (old data is returned).
module tb_csm_sdp_ram;
  localparam int DEPTH = 512, WIDTH = 64;
  logic clk = 0;
  logic we;
  logic [8:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, q;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  csm_sdp_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.clk, .we, .waddr, .wdata, .raddr, .q);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 9'(a); wdata = {$urandom, $urandom};
      ref_mem[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 2000; t++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      @(negedge clk); raddr = 9'(a);
      // same-cycle write to the same address: read must return old data
      if (t % 7 == 0) begin we = 1; waddr = 9'(a); wdata = {$urandom, $urandom}; end
      else we = 0;
      @(posedge clk); #1;
      checks++;
      if (q !== ref_mem[a]) begin
        failures++;
        $display("FAIL addr %0d got %h exp %h", a, q, ref_mem[a]);
      end
      if (we) ref_mem[a] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
