// tb_arbiter_y -- test of the result arbiter with 4 PEs (AW = 6).
//
// Each PE is modelled as a word array with a one-cycle registered read.
// The arbiter is asked for 37 words; output word b must be word b div 4 of
// PE b mod 4. Run 1 keeps out_ready high and checks one word per cycle
// (37 words within 37 + 3 cycles); run 2 toggles out_ready at random.
// The arbiter must never read two PEs in one cycle.
module tb_arbiter_y;
  localparam int NPE = 4, AW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic            start, busy, out_valid, out_ready;
  logic [31:0]     num_words;
  logic [NPE-1:0]  drain_rd;
  logic [AW-1:0]   drain_addr [NPE];
  logic [63:0]     drain_data [NPE];
  logic [63:0]     out_data;

  arbiter_y #(.NPE(NPE), .AW(AW)) dut (.*);

  logic [63:0] pe_mem [NPE][2**AW];
  for (genvar p = 0; p < NPE; p++) begin : g_pe
    always_ff @(posedge clk) if (drain_rd[p]) drain_data[p] <= pe_mem[p][drain_addr[p]];
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int got = 0;
  bit rnd = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      check(out_data == pe_mem[got % NPE][got / NPE], $sformatf("word %0d", got));
      got++;
    end
    check($countones(drain_rd) <= 1, "two PEs read at once");
  end
  always @(negedge clk) out_ready = rnd ? ($urandom % 3 != 0) : 1'b1;

  task automatic run(input int n, input bit r, input bit timed);
    int t = 0;
    got = 0; rnd = r; num_words = n;
    foreach (pe_mem[p, a]) pe_mem[p][a] = {$urandom, $urandom};
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (got < n && t < 5000) begin @(negedge clk); t++; end
    check(got == n, $sformatf("got %0d of %0d", got, n));
    if (timed) check(t <= n + 3, $sformatf("%0d words took %0d cycles", n, t));
    repeat (4) @(negedge clk);
    check(!busy && got == n, "busy after end or extra words");
  endtask

  initial begin
    start = 0; num_words = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(37, 0, 1);
    run(37, 1, 0);
    run(200, 1, 0);
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
