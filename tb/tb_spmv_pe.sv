// tb_spmv_pe -- test of one PE (W = 64, U = 1, D = 64, ACC_LAT = 3).
//
// The testbench plays the shared x BRAM (registered read of x[col]). After a
// clear pass (whose length is checked) it streams 3000 random elements, one
// per cycle with occasional idle cycles and empty slots, choosing rows so
// that elements hitting the same URAM word are at least ACC_LAT slots apart
// while both rows of a word are in use. It then drains all words and
// compares them bit for bit with a reference accumulated in stream order.
// Finally it sends two elements for the same word one slot apart and checks
// that `conflict` is raised, and that no conflict was raised before.
module tb_spmv_pe;
  import serpens_pkg::*;
  import tb_fp_pkg::*;
  localparam int W = 64, U = 1, D = 64, ACC_LAT = 3, WORDS = U * D;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        nz_valid;
  nz_t         nz;
  logic [5:0]  x_raddr;
  logic [31:0] x_rdata;
  logic        clr_start, clr_busy, drain_rd, idle, conflict;
  logic [6:0]  clr_words;
  logic [5:0]  drain_addr;
  logic [63:0] drain_data;

  spmv_pe #(.W(W), .U(U), .D(D), .ACC_LAT(ACC_LAT)) dut (.*);

  logic [31:0] xv [W];
  logic [31:0] acc [2*WORDS];
  always_ff @(posedge clk) x_rdata <= xv[x_raddr];

  int n_conf = 0;
  always @(posedge clk) if (rst_n && conflict) n_conf++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    int last [WORDS];
    int t = 0, busy_cycles = 0;
    nz_valid = 0; nz = '0; clr_start = 0; clr_words = 0; drain_rd = 0; drain_addr = 0;
    foreach (xv[i]) xv[i] = rnd_f32(110, 140);
    foreach (acc[i]) acc[i] = 32'd0;
    foreach (last[i]) last[i] = -100;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) clr_start = 1; clr_words = 7'(WORDS);
    @(negedge clk) clr_start = 0;
    while (clr_busy) begin busy_cycles++; @(negedge clk); end
    check(busy_cycles == WORDS, $sformatf("clear took %0d cycles", busy_cycles));
    // element stream
    for (int i = 0; i < 3000; i++) begin
      int r;
      automatic int tries = 0;
      nz_valid = ($urandom % 10) != 0;
      do begin r = $urandom % (2 * WORDS); tries++; end while (t - last[r/2] < ACC_LAT && tries < 50);
      if (!nz_valid) begin
        nz = '0;
      end else if (t - last[r/2] < ACC_LAT || ($urandom % 20) == 0) begin
        nz = '{val: rnd_f32(110, 140), row: '1, col: '1};       // empty slot
      end else begin
        nz.val = rnd_f32(110, 140);
        nz.row = 18'(r);
        nz.col = 14'($urandom % W);
        acc[r] = fadd(acc[r], fmul(nz.val, xv[nz.col]));
        last[r/2] = t;
      end
      if (nz_valid) t++;
      @(negedge clk);
    end
    nz_valid = 0;
    for (int i = 0; i < ACC_LAT + 2 && !idle; i++) @(negedge clk);
    check(idle, "pipeline did not empty within ACC_LAT+2 cycles");
    check(n_conf == 0, "conflict raised on a legal order");
    // drain
    for (int wd = 0; wd < WORDS; wd++) begin
      drain_rd = 1; drain_addr = 6'(wd);
      @(negedge clk);
      check(drain_data == {acc[2*wd+1], acc[2*wd]},
            $sformatf("word %0d got %h exp %h", wd, drain_data, {acc[2*wd+1], acc[2*wd]}));
    end
    drain_rd = 0;
    // an illegal order: same word one slot apart
    nz_valid = 1; nz = '{val: 32'h3F80_0000, row: 18'd4, col: 14'd1};
    @(negedge clk) nz = '{val: 32'h3F80_0000, row: 18'd5, col: 14'd2};
    @(negedge clk) nz_valid = 0;
    repeat (ACC_LAT + 2) @(negedge clk);
    check(n_conf > 0, "conflict not detected");
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
