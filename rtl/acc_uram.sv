// acc_uram -- private accumulation buffer of one PE (U UltraRAM blocks).
//
// Index coalescing: a URAM word is 72 bits wide, so two FP32 partial sums of
// consecutive local rows (2e and 2e+1) share word e; bits [31:0] hold the
// even row and [63:32] the odd row (the top 8 bits of the physical word are
// unused). With U = 3 blocks of D = 4096 words each PE holds 2*U*D = 24576
// rows. One registered read port and one write port, as a simple dual-port
// URAM: read data appears the cycle after the address, and a read and a
// write to the same word in the same cycle return the old word. U follows
// the paper's parameter table; D = 4096 is the depth of an UltraScale+ URAM
// at 72-bit width, which the paper leaves symbolic.
module acc_uram #(
  parameter int unsigned U = 3,
  parameter int unsigned D = 4096,
  localparam int unsigned DEPTH = U * D,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [63:0]   rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [63:0]   wdata
);
  logic [63:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end
endmodule
