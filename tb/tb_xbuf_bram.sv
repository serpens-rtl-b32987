// tb_xbuf_bram -- test of one x-segment BRAM copy at full size (W = 8192).
//
// Fills all 512 rows with random beats through port A, then reads random
// addresses on both ports at once and checks each value, one cycle after
// its address, against the written beat. Also checks that a beat written
// later overwrites the row.
module tb_xbuf_bram;
  localparam int W = 8192;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic           a_we;
  logic [8:0]     a_wrow;
  logic [511:0]   a_wdata;
  logic [12:0]    a_raddr, b_raddr;
  logic [31:0]    a_rdata, b_rdata;
  logic [511:0]   ref_mem [W/16];

  xbuf_bram #(.W(W)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    a_we = 0; a_raddr = 0; b_raddr = 0; a_wrow = 0; a_wdata = '0;
    for (int r = 0; r < W/16; r++) begin
      @(negedge clk);
      a_we = 1; a_wrow = 9'(r);
      for (int l = 0; l < 16; l++) a_wdata[32*l +: 32] = $urandom;
      ref_mem[r] = a_wdata;
    end
    @(negedge clk) a_we = 0;
    for (int i = 0; i < 3000; i++) begin
      automatic logic [12:0] aa = 13'($urandom), bb = 13'($urandom);
      a_raddr = aa; b_raddr = bb;
      @(negedge clk);
      check(a_rdata == ref_mem[aa[12:4]][32*aa[3:0] +: 32], $sformatf("port A addr %0d", aa));
      check(b_rdata == ref_mem[bb[12:4]][32*bb[3:0] +: 32], $sformatf("port B addr %0d", bb));
    end
    // overwrite one row and read it back
    a_we = 1; a_wrow = 9'd5; a_wdata = {16{32'hCAFE_0005}}; ref_mem[5] = a_wdata;
    @(negedge clk) a_we = 0; a_raddr = 13'(5*16 + 3); b_raddr = 13'(5*16 + 15);
    @(negedge clk);
    check(a_rdata == 32'hCAFE_0005 && b_rdata == 32'hCAFE_0005, "overwrite");
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
