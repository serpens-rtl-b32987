// tb_hbm_rd -- test of the streaming read engine against the HBM model.
//
// Run 1: no stalls, consumer always ready: 300 beats from base 1000 must
// all arrive in order, at one per cycle once the memory latency has passed
// (checked: total time <= beats + latency + 4). Run 2: random request
// stalls and a consumer that is ready only half the time. Each beat is
// compared with the memory content, and `done` must pulse exactly once
// per run, after the last beat.
module tb_hbm_rd;
  import serpens_pkg::*;
  localparam int LAT = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int stall_pct = 0;

  logic        start, busy, done, rd_req_ready, rd_resp_valid, out_valid, out_ready;
  logic [31:0] base, num_beats;
  rd_req_t     rd_req;
  beat_t       rd_resp_data, out_data;
  wr_req_t     no_wr;
  assign no_wr = '0;

  hbm_rd #(.FIFO_D(16)) dut (.*);
  hbm_model #(.LAT(LAT)) u_mem (.clk, .rst_n, .stall_pct, .rd_req, .rd_req_ready,
                                .rd_resp_valid, .rd_resp_data, .wr_req(no_wr), .wr_ready());

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int got = 0, n_done = 0;
  logic random_ready = 0;
  always @(posedge clk) if (rst_n) begin
    if (done) n_done++;
    if (out_valid && out_ready) begin
      check(out_data == {16{32'(base + got)}}, $sformatf("beat %0d", got));
      got++;
    end
  end
  always @(negedge clk) out_ready = random_ready ? ($urandom % 2 == 1) : 1'b1;

  task automatic run(input int b, input int n, input int stall, input bit rnd, input bit timed);
    int t = 0;
    base = b; num_beats = n; got = 0; n_done = 0; stall_pct = stall; random_ready = rnd;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!(n_done > 0) && t < 20000) begin @(negedge clk); t++; end
    repeat (5) @(negedge clk);
    check(got == n, $sformatf("received %0d of %0d", got, n));
    check(n_done == 1, "done count");
    if (timed) check(t <= n + LAT + 4, $sformatf("%0d beats took %0d cycles", n, t));
  endtask

  initial begin
    start = 0; base = 0; num_beats = 0;
    for (int i = 0; i < 4000; i++) u_mem.mem[i] = {16{32'(i)}};
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    run(1000, 300, 0, 0, 1);
    run(17, 500, 30, 1, 0);
    run(5, 1, 0, 0, 0);
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
