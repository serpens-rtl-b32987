// tb_comp_y -- test of CompY, y_out = alpha * Ax + beta * y_in.
//
// Eight Ax word streams and one y beat stream are offered with independent
// random gaps (each producer holds a word until it is taken), the output
// is stalled at random, and 300 output beats are compared bit for bit, in
// order, with alpha*ax + beta*y computed by the reference. A first run with
// all inputs valid and the output always ready checks the two-cycle latency
// and one beat per cycle.
module tb_comp_y;
  import serpens_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  f32_t        alpha, beta;
  logic [7:0]  ax_valid, ax_ready;
  logic [63:0] ax_data [8];
  logic        y_valid, y_ready, out_valid, out_ready;
  beat_t       y_data, out_data;

  comp_y dut (.*);

  localparam int N = 300;
  logic [63:0] axq [8][N];
  beat_t       yq [N];
  int          axi [8], yi, oi;
  bit          gaps, stall;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // producers and consumer
  always @(posedge clk) if (rst_n) begin
    for (int a = 0; a < 8; a++) if (ax_valid[a] && ax_ready[a]) axi[a]++;
    if (y_valid && y_ready) yi++;
    if (out_valid && out_ready) begin
      beat_t e;
      for (int l = 0; l < 16; l++)
        e[32*l +: 32] = fadd(fmul(alpha, axq[l/2][oi][32*(l%2) +: 32]), fmul(beta, yq[oi][32*l +: 32]));
      check(out_data == e, $sformatf("beat %0d", oi));
      oi++;
    end
  end
  always @(negedge clk) begin
    for (int a = 0; a < 8; a++) begin
      if (!ax_valid[a] || ax_ready[a] === 1'b1) ax_valid[a] = (axi[a] < N) && (!gaps || $urandom % 4 != 0);
      ax_data[a] = axq[a][axi[a] % N];
    end
    if (!y_valid || y_ready) y_valid = (yi < N) && (!gaps || $urandom % 4 != 0);
    y_data = yq[yi % N];
    out_ready = !stall || ($urandom % 3 != 0);
  end

  initial begin
    int t;
    ax_valid = '0; y_valid = 0; out_ready = 0; gaps = 0; stall = 0;
    alpha = rnd_f32(120, 130); beta = rnd_f32(120, 130);
    for (int i = 0; i < N; i++) begin
      for (int a = 0; a < 8; a++) axq[a][i] = {rnd_f32(110, 140), rnd_f32(110, 140)};
      for (int l = 0; l < 16; l++) yq[i][32*l +: 32] = rnd_f32(110, 140);
    end
    foreach (axi[a]) axi[a] = 0;
    yi = 0; oi = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // back-to-back: first output two cycles after the first input
    t = 0;
    while (oi < 50) begin @(negedge clk); t++; end
    check(t <= 50 + 3, $sformatf("50 beats took %0d cycles", t));
    gaps = 1; stall = 1;
    while (oi < N && t < 5000) begin @(negedge clk); t++; end
    check(oi == N, $sformatf("only %0d beats out", oi));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
