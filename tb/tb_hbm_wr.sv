// tb_hbm_wr -- test of the streaming write engine against the HBM model.
//
// A producer offers a numbered stream of beats, with random gaps, while the
// memory drops wr_ready at random. After `done` the memory must hold exactly
// the requested beats at consecutive addresses from base, nothing beyond
// them, and the producer must have been held off after the last one. With
// no stalls the engine must write one beat per cycle.
module tb_hbm_wr;
  import serpens_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int stall_pct = 0;

  logic        start, busy, done, in_valid, in_ready, wr_ready;
  logic [31:0] base, num_beats;
  beat_t       in_data;
  wr_req_t     wr_req;
  rd_req_t     no_rd;
  logic        unused_r, unused_v;
  beat_t       unused_d;
  assign no_rd = '0;

  hbm_wr dut (.*);
  hbm_model u_mem (.clk, .rst_n, .stall_pct, .rd_req(no_rd), .rd_req_ready(unused_r),
                   .rd_resp_valid(unused_v), .rd_resp_data(unused_d), .wr_req, .wr_ready);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int sent = 0;
  bit gaps = 0;
  bit took = 0;
  always @(posedge clk) begin
    took = rst_n && in_valid && in_ready;
    if (took) sent++;
  end
  // a valid beat is held until it is taken (the engine asserts this rule)
  always @(negedge clk) begin
    if (!in_valid || took || !rst_n) in_valid = !gaps || ($urandom % 3 != 0);
    in_data = {16{32'(sent + 7)}};
  end

  task automatic run(input int b, input int n, input int stall, input bit g, input bit timed);
    int t = 0, s0;
    s0 = sent; base = b; num_beats = n; stall_pct = stall; gaps = g;
    u_mem.mem.delete();
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done && t < 20000) begin @(negedge clk); t++; end
    repeat (5) @(negedge clk);
    check(sent - s0 == n, $sformatf("accepted %0d of %0d", sent - s0, n));
    check(u_mem.mem.size() == n, "beats written");
    for (int i = 0; i < n; i++)
      check(u_mem.mem.exists(b + i) && u_mem.mem[b + i] == {16{32'(s0 + i + 7)}}, $sformatf("beat %0d", i));
    if (timed) check(t <= n + 3, $sformatf("%0d beats took %0d cycles", n, t));
  endtask

  initial begin
    start = 0; base = 0; num_beats = 0; in_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    run(100, 200, 0, 0, 1);
    run(3, 300, 30, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
