// tb_acc_uram -- test of the per-PE accumulation buffer at full size
// (U = 3, D = 4096: 12,288 words of two coalesced FP32 rows).
//
// Writes random words to random addresses while reading others, and checks
// every read one cycle after its address against a reference array,
// including a read and a write of the same word in one cycle (the read must
// return the old word). The first and last words are checked explicitly.
module tb_acc_uram;
  localparam int U = 3, D = 4096, DEPTH = U * D;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        re, we;
  logic [13:0] raddr, waddr;
  logic [63:0] rdata, wdata;
  logic [63:0] ref_mem [DEPTH];

  acc_uram #(.U(U), .D(D)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = 14'(i); wdata = {$urandom, $urandom}; ref_mem[i] = wdata;
    end
    for (int i = 0; i < 5000; i++) begin
      logic [63:0] exp_d;
      @(negedge clk);
      re = 1; raddr = 14'($urandom % DEPTH);
      we = ($urandom % 2) == 1;
      waddr = (i % 5 == 0) ? raddr : 14'($urandom % DEPTH);
      wdata = {$urandom, $urandom};
      exp_d = ref_mem[raddr];
      if (we) ref_mem[waddr] = wdata;
      @(negedge clk);
      we = 0; re = 0;
      check(rdata == exp_d, $sformatf("read %0d", raddr));
    end
    @(negedge clk) re = 1; raddr = 0;
    @(negedge clk) check(rdata == ref_mem[0], "word 0");
    raddr = 14'(DEPTH - 1);
    @(negedge clk) check(rdata == ref_mem[DEPTH-1], "last word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
