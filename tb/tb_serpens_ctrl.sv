// tb_serpens_ctrl -- test of the job sequencer (HA = 2, W = 64).
//
// The testbench stands in for the engines and PE groups: RdX always has a
// beat, the clear pass lasts a random time, the groups report seg_done a
// random time after seg_start and WrY reports done a while after the
// arbiters start. For several (M, K) it checks the engine lengths, the
// number of URAM words cleared, the number of segments and the x beats
// moved into the chain for each segment (including a partial last one),
// that x is never moved while a segment computes, and the order
// clear -> (x load -> compute) per segment -> output.
module tb_serpens_ctrl;
  localparam int HA = 2, W = 64, AW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        start, busy, done, eng_start, wy_done, clr_start, clr_busy;
  logic [31:0] m_rows, k_cols, cycles, x_beats, y_beats;
  logic [AW:0] clr_words;
  logic        rdx_valid, rdx_ready, xh_valid, seg_start, seg_done_all, arb_start;
  logic [1:0]  xh_row;

  serpens_ctrl #(.HA(HA), .W(W), .AW(AW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // environment
  int clr_left = 0, seg_left = -1, wy_left = -1;
  bit computing = 0;
  int seg_cnt, x_in_seg, xsegs[$];
  always @(posedge clk) if (rst_n) begin
    if (clr_start) clr_left = 3 + $urandom % 10;
    else if (clr_left > 0) clr_left--;
    if (seg_start) begin
      seg_left = 2 + $urandom % 20; computing = 1; seg_cnt++;
      xsegs.push_back(x_in_seg); x_in_seg = 0;
    end else if (seg_left > 0) seg_left--;
    if (xh_valid) begin
      check(!computing || seg_left == 0, "x moved during compute");
      check(xh_row == 2'(x_in_seg), "x row order");
      x_in_seg++;
    end
    if (arb_start) wy_left = 5 + $urandom % 30;
    else if (wy_left > 0) wy_left--;
  end
  always_comb begin
    clr_busy     = clr_left > 0;
    seg_done_all = computing && seg_left == 0;
    wy_done      = wy_left == 0;
  end
  assign rdx_valid = 1'b1;

  task automatic run(input int m, input int k);
    int t = 0, nseg = (k + W - 1) / W;
    seg_cnt = 0; x_in_seg = 0; xsegs.delete(); computing = 0; wy_left = -1; seg_left = -1;
    m_rows = m; k_cols = k;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done && t < 5000) begin @(negedge clk); t++; end
    check(done, "no done");
    check(x_beats == (k + 15) / 16 && y_beats == (m + 15) / 16, "engine lengths");
    check(clr_words == ((m + 15) / 16 + HA - 1) / HA, $sformatf("clear words %0d", clr_words));
    check(seg_cnt == nseg, $sformatf("segments %0d, expected %0d", seg_cnt, nseg));
    for (int s = 0; s < xsegs.size(); s++) begin
      int cols = (k - s * W < W) ? k - s * W : W;
      check(xsegs[s] == (cols + 15) / 16, $sformatf("segment %0d: %0d x beats", s, xsegs[s]));
    end
    check(cycles >= 32'(t) && cycles <= 32'(t + 2), $sformatf("cycles %0d vs %0d", cycles, t));
    @(negedge clk);
    check(!busy, "busy after done");
  endtask

  initial begin
    start = 0; m_rows = 0; k_cols = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(100, 64);
    run(333, 200);
    run(16, 129);
    run(1000, 17);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
