// tb_pe_group -- test of one PE group (8 PEs, W = 64, U = 1, D = 32).
//
// Loads a 64-column x segment through the chain input and checks that each
// beat is forwarded on x_out one cycle later. Clears the URAMs, then runs
// two segments: each starts with seg_start, an instruction beat giving the
// element-beat count and the element beats (8 lanes, one per PE, with
// empty slots and same-word distances of at least ACC_LAT). The stream is
// offered continuously in the first segment, where the group must accept
// one beat per cycle, and with random gaps in the second. After seg_done
// every word of every PE is drained and compared with a reference.
module tb_pe_group;
  import serpens_pkg::*;
  import tb_fp_pkg::*;
  localparam int W = 64, U = 1, D = 32, ACC_LAT = 2, WORDS = U * D;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        x_in_valid, x_out_valid, a_valid, a_ready, seg_start, seg_done;
  logic [1:0]  x_in_row, x_out_row;
  beat_t       x_in_data, x_out_data, a_data;
  logic        clr_start, clr_busy, conflict, bubble;
  logic [5:0]  clr_words;
  logic [7:0]  drain_rd;
  logic [4:0]  drain_addr [8];
  logic [63:0] drain_data [8];

  pe_group #(.W(W), .U(U), .D(D), .ACC_LAT(ACC_LAT)) dut (.*);

  logic [31:0] xv [W];
  logic [31:0] acc [8][2*WORDS];
  int n_bub = 0, n_conf = 0;
  always @(posedge clk) if (rst_n) begin
    if (bubble) n_bub++;
    if (conflict) n_conf++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic run_segment(input int nbeats, input bit gaps);
    int last [8][WORDS];
    int t0;
    foreach (last[p, w]) last[p][w] = -100;
    @(negedge clk) seg_start = 1;
    @(negedge clk) seg_start = 0;
    a_valid = 1; a_data = '0; a_data[31:0] = 32'(nbeats);
    @(posedge clk);
    check(a_ready, "instruction beat not accepted");
    t0 = 0;
    for (int t = 0; t < nbeats; t++) begin
      @(negedge clk);
      while (gaps && ($urandom % 3) == 0) begin a_valid = 0; @(negedge clk); end
      a_valid = 1;
      for (int p = 0; p < 8; p++) begin
        int r = $urandom % (2 * WORDS);
        if (t - last[p][r/2] < ACC_LAT || ($urandom % 8) == 0) begin
          a_data[64*p +: 64] = {32'd0, 32'hFFFF_FFFF};
        end else begin
          logic [31:0] v = rnd_f32(110, 140);
          int c = $urandom % W;
          a_data[64*p +: 64] = {v, 18'(r), 14'(c)};
          acc[p][r] = fadd(acc[p][r], fmul(v, xv[c]));
          last[p][r/2] = t;
        end
      end
      @(posedge clk);
      if (a_ready) t0++;
    end
    @(negedge clk) a_valid = 0;
    check(t0 == nbeats, $sformatf("accepted %0d of %0d beats back to back", t0, nbeats));
    for (int i = 0; i < 10 && !seg_done; i++) @(negedge clk);
    check(seg_done, "seg_done not raised");
    @(negedge clk);
    check(!a_ready, "a_ready after segment end");
  endtask

  initial begin
    x_in_valid = 0; x_in_row = 0; x_in_data = '0; a_valid = 0; a_data = '0;
    seg_start = 0; clr_start = 0; clr_words = 0; drain_rd = 0;
    foreach (drain_addr[i]) drain_addr[i] = 0;
    foreach (xv[i]) xv[i] = rnd_f32(110, 140);
    foreach (acc[p, r]) acc[p][r] = 32'd0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // x segment through the chain
    for (int b = 0; b < W/16; b++) begin
      @(negedge clk);
      x_in_valid = 1; x_in_row = 2'(b);
      for (int l = 0; l < 16; l++) x_in_data[32*l +: 32] = xv[16*b + l];
      @(negedge clk);
      check(x_out_valid && x_out_row == 2'(b) && x_out_data == x_in_data, "chain forward");
      x_in_valid = 0;
    end
    @(negedge clk) x_in_valid = 0;
    @(negedge clk) clr_start = 1; clr_words = 6'(WORDS);
    @(negedge clk) clr_start = 0;
    while (clr_busy) @(negedge clk);
    run_segment(200, 0);
    run_segment(150, 1);
    run_segment(0, 0);
    check(n_bub > 0, "no empty slot seen");
    check(n_conf == 0, "conflict on legal order");
    for (int wd = 0; wd < WORDS; wd++) begin
      @(negedge clk);
      drain_rd = '1;
      foreach (drain_addr[p]) drain_addr[p] = 5'(wd);
      @(negedge clk);
      for (int p = 0; p < 8; p++)
        check(drain_data[p] == {acc[p][2*wd+1], acc[p][2*wd]}, $sformatf("PE %0d word %0d", p, wd));
      drain_rd = '0;
    end
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
