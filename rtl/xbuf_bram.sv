// xbuf_bram -- one on-chip copy of the current dense x segment.
//
// Serpens keeps four copies of the W-entry x segment per A channel and lets
// the two ports of each copy serve two PEs, so eight PEs read eight random x
// entries per cycle without bank conflicts. A copy is written one 512-bit
// beat (16 FP32 values) per cycle while a segment streams in, and read one
// FP32 value per port per cycle while sparse elements stream. Port A writes
// (segment load) or reads for the even PE; port B reads for the odd PE.
// Reads are registered: data appears the cycle after the address (BRAM read
// latency 1). The copy count, port sharing and W = 8192 follow the paper; the
// beat-wide row organisation of the array is this implementation's choice.
module xbuf_bram #(
  parameter int unsigned W = 8192   // segment length in FP32 values
) (
  input  logic                     clk,
  // port A: beat write or value read
  input  logic                     a_we,
  input  logic [$clog2(W/16)-1:0]  a_wrow,
  input  logic [511:0]             a_wdata,
  input  logic [$clog2(W)-1:0]     a_raddr,
  output logic [31:0]              a_rdata,
  // port B: value read
  input  logic [$clog2(W)-1:0]     b_raddr,
  output logic [31:0]              b_rdata
);
  localparam int unsigned ROWS = W / 16;

  logic [511:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (a_we) mem[a_wrow] <= a_wdata;
    else      a_rdata     <= mem[a_raddr[$clog2(W)-1:4]][32*a_raddr[3:0] +: 32];
    b_rdata <= mem[b_raddr[$clog2(W)-1:4]][32*b_raddr[3:0] +: 32];
  end
endmodule
