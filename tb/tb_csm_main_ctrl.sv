// tb_csm_main_ctrl: checks how the main controller steers the input stream.
//
// Queries with every combination of map flag and scan flag (send / reuse) are
// sent with random gaps in TVALID. A stub sliding-window-maximum unit accepts
// map packets with random readiness and reports done a few cycles after the
// last one; a stub optimizer reports done after a random delay. Checked: every
// map packet reaches the map unit and every scan packet the float-to-fixed
// unit, in order and with nothing else; the buffer clear and map start come
// once per sent map / scan; reuse strobes come once per reused map / scan;
// the optimizer is started once per query; done comes once per query; the
// stream is not read while idle.
module tb_csm_main_ctrl;
  import csm_pkg::*;
  localparam int NP = 37, MP = 23;
  logic clk = 0, rst_n = 0;
  logic start, idle, done, s_valid, s_ready;
  logic [63:0] s_data;
  csm_cfg_t cfg;
  logic swm_start, swm_valid, swm_ready, swm_done, f2f_clear, f2f_valid, opt_start, opt_done;
  logic ev_map_reuse, ev_scan_reuse;
  int checks = 0, failures = 0;
  int n_swm_start, n_clear, n_opt, n_done, n_mr, n_sr, map_got, scan_got, swm_left;
  logic [63:0] exp_q [$];

  csm_main_ctrl dut (.clk, .rst_n, .start, .cfg, .idle, .done, .s_valid, .s_data, .s_ready,
    .swm_start, .swm_valid, .swm_ready, .swm_done, .f2f_clear, .f2f_valid,
    .opt_start, .opt_done, .ev_map_reuse, .ev_scan_reuse);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stubs and monitors
  always @(posedge clk) begin
    if (swm_start) begin n_swm_start++; swm_left = MP; end
    if (f2f_clear) n_clear++;
    if (opt_start) begin
      n_opt++;
      fork begin repeat ($urandom_range(1, 30)) @(posedge clk); opt_done <= 1; @(posedge clk); opt_done <= 0; end join_none
    end
    if (done) n_done++;
    if (ev_map_reuse) n_mr++;
    if (ev_scan_reuse) n_sr++;
    if (s_valid && s_ready && (swm_valid || f2f_valid)) begin
      automatic logic [63:0] e = exp_q.pop_front();
      checks++;
      if (s_data !== e) begin failures++; $display("FAIL data %h exp %h", s_data, e); end
      if (swm_valid) begin
        map_got++;
        swm_left--;
        if (swm_left == 0)
          fork begin repeat (5) @(posedge clk); swm_done <= 1; @(posedge clk); swm_done <= 0; end join_none
      end
      if (f2f_valid) scan_got++;
    end
    if (s_ready && idle) begin failures++; $display("FAIL stream read while idle"); end
    swm_ready <= (swm_left > 0) && ($urandom_range(0, 3) == 0);
  end

  task automatic send(input logic [63:0] d);
    @(negedge clk);
    while ($urandom_range(0, 2) == 0) begin s_valid = 0; @(negedge clk); end
    s_valid = 1; s_data = d;
    @(posedge clk); #1;
    while (!s_ready_q) begin @(posedge clk); #1; end
    @(negedge clk); s_valid = 0;
  endtask
  logic s_ready_q;
  always @(posedge clk) s_ready_q <= s_valid && s_ready;

  initial begin
    start = 0; s_valid = 0; s_data = 0; cfg = '0; cfg.num_points = PTR_W'(NP);
    swm_ready = 0; swm_done = 0; opt_done = 0; swm_left = 0;
    {n_swm_start, n_clear, n_opt, n_done, n_mr, n_sr, map_got, scan_got} = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int q = 0; q < 12; q++) begin
      automatic bit fm = q[0], fs = q[1];
      automatic int b_swm = n_swm_start, b_clr = n_clear, b_opt = n_opt, b_done = n_done, b_mr = n_mr, b_sr = n_sr;
      automatic int b_map = map_got, b_scan = scan_got;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      send({$urandom, 31'($urandom), fm});
      if (fm) for (int k = 0; k < MP; k++) begin automatic logic [63:0] d = {$urandom, $urandom}; exp_q.push_back(d); send(d); end
      send({$urandom, 31'($urandom), fs});
      if (fs) for (int k = 0; k < NP; k++) begin automatic logic [63:0] d = {$urandom, $urandom}; exp_q.push_back(d); send(d); end
      while (n_done == b_done) @(posedge clk);
      repeat (3) @(posedge clk);
      checks += 7;
      if (n_swm_start - b_swm != int'(fm)) begin failures++; $display("FAIL map start q=%0d", q); end
      if (n_mr - b_mr != int'(!fm)) begin failures++; $display("FAIL map reuse q=%0d", q); end
      if (n_clear - b_clr != int'(fs)) begin failures++; $display("FAIL scan clear q=%0d", q); end
      if (n_sr - b_sr != int'(!fs)) begin failures++; $display("FAIL scan reuse q=%0d", q); end
      if (map_got - b_map != (fm ? MP : 0) || scan_got - b_scan != (fs ? NP : 0)) begin
        failures++; $display("FAIL packet counts q=%0d %0d %0d", q, map_got - b_map, scan_got - b_scan);
      end
      if (n_opt - b_opt != 1 || n_done - b_done != 1) begin failures++; $display("FAIL opt/done q=%0d", q); end
      if (!idle) begin failures++; $display("FAIL not idle after query"); end
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d packets not delivered", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
