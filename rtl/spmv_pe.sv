// spmv_pe -- one memory-centric processing engine (PE).
//
// A PE takes at most one sparse element per cycle (II = 1), looks up x[col]
// in its shared x-segment BRAM, multiplies, and accumulates the product into
// its own URAM buffer, where two consecutive local rows share one 64-bit
// word (index coalescing). Pipeline, for an element presented in cycle c:
//   c      element in; x BRAM read address = col
//   c+1    product = value * x (fp32_mul); URAM read of word row>>1
//   c+2    sum = selected half + product (fp32_add); the other half is kept
//   c+T    the whole word is written back (ACC_LAT-2 extra delay stages)
// There is no hazard logic: the host reorders the non-zeros so that two
// elements whose rows share a URAM word are at least ACC_LAT slots apart
// (the paper's RAW + coalescing "colouring" rule). A violation is still
// detected and reported on `conflict` because it
// would silently drop an update.
// Other modes: `clr_start` zeroes words 0..clr_words-1 one per cycle
// before a job; `drain_rd`/`drain_addr` read a word for the arbiter (data on
// `drain_data` one cycle later). The controller never overlaps the modes.
// Elements whose index is all ones are bubbles and change nothing.
// The element format, the clear pass and the pipeline split are this
// implementation's; the dataflow (BRAM x, URAM accumulation, coalescing,
// reorder-instead-of-stall) follows the paper.
// x_raddr is the low log2(W) bits of the element's column index, wired
// straight out: the x copy is read in the same cycle the element arrives.
module spmv_pe
  import serpens_pkg::*;
#(
  parameter int unsigned W       = 8192,
  parameter int unsigned U       = 3,
  parameter int unsigned D       = 4096,
  parameter int unsigned ACC_LAT = 2,     // T: same-word distance the host guarantees
  localparam int unsigned AW     = $clog2(U * D)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // element stream
  input  logic                 nz_valid,
  input  nz_t                  nz,
  // shared x BRAM port
  output logic [$clog2(W)-1:0] x_raddr,
  input  f32_t                 x_rdata,
  // clear
  input  logic                 clr_start,
  input  logic [AW:0]          clr_words,
  output logic                 clr_busy,
  // drain
  input  logic                 drain_rd,
  input  logic [AW-1:0]        drain_addr,
  output logic [63:0]          drain_data,
  // status
  output logic                 idle,       // no element in flight
  output logic                 conflict    // same-word distance < ACC_LAT seen
);
  localparam int unsigned NDLY = ACC_LAT - 2;

  // ---------------- stage 1: x read ----------------
  logic          s1_v;
  f32_t          s1_val;
  logic [AW:0]   s1_row;       // local row, AW+1 bits (word + half)

  assign x_raddr = nz.col[$clog2(W)-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_v <= 1'b0;
    else        s1_v <= nz_valid && ({nz.row, nz.col} != BUBBLE_IDX);
  end
  always_ff @(posedge clk) begin
    s1_val <= nz.val;
    s1_row <= nz.row[AW:0];
  end

  // ---------------- stage 2: multiply, URAM read ----------------
  f32_t          prod;
  logic          s2_v, s2_half;
  f32_t          s2_prod;
  logic [AW-1:0] s2_word;

  fp32_mul u_mul (.a(s1_val), .b(x_rdata), .y(prod));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s2_v <= 1'b0;
    else        s2_v <= s1_v;
  end
  always_ff @(posedge clk) begin
    s2_prod <= prod;
    s2_word <= s1_row[AW:1];
    s2_half <= s1_row[0];
  end

  // ---------------- stage 3: accumulate ----------------
  logic [63:0] rdata;
  f32_t        old_v, sum;
  logic [63:0] new_word;

  assign old_v = s2_half ? rdata[63:32] : rdata[31:0];
  fp32_add u_add (.a(old_v), .b(s2_prod), .y(sum));
  assign new_word = s2_half ? {sum, rdata[31:0]} : {rdata[63:32], sum};

  // write-back delay line (models the remaining adder latency)
  logic          wb_v    [NDLY+1];
  logic [AW-1:0] wb_word [NDLY+1];
  logic [63:0]   wb_data [NDLY+1];

  always_comb begin
    wb_v[0]    = s2_v;
    wb_word[0] = s2_word;
    wb_data[0] = new_word;
  end

  for (genvar i = 1; i <= NDLY; i++) begin : g_dly
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) wb_v[i] <= 1'b0;
      else        wb_v[i] <= wb_v[i-1];
    end
    always_ff @(posedge clk) begin
      wb_word[i] <= wb_word[i-1];
      wb_data[i] <= wb_data[i-1];
    end
  end

  // ---------------- clear pass ----------------
  logic [AW:0] clr_cnt, clr_end;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr_busy <= 1'b0;
      clr_cnt  <= '0;
      clr_end  <= '0;
    end else if (clr_start) begin
      clr_busy <= (clr_words != 0);
      clr_cnt  <= '0;
      clr_end  <= clr_words;
    end else if (clr_busy) begin
      clr_cnt  <= clr_cnt + 1'b1;
      if (clr_cnt + 1'b1 == clr_end) clr_busy <= 1'b0;
    end
  end

  // ---------------- URAM ----------------
  logic          u_re, u_we;
  logic [AW-1:0] u_raddr, u_waddr;
  logic [63:0]   u_wdata;

  always_comb begin
    u_re    = s1_v || drain_rd;
    u_raddr = drain_rd ? drain_addr : s1_row[AW:1];
    u_we    = clr_busy || wb_v[NDLY];
    u_waddr = clr_busy ? clr_cnt[AW-1:0] : wb_word[NDLY];
    u_wdata = clr_busy ? 64'd0 : wb_data[NDLY];
  end

  acc_uram #(.U(U), .D(D)) u_uram (
    .clk, .re(u_re), .raddr(u_raddr), .rdata,
    .we(u_we), .waddr(u_waddr), .wdata(u_wdata)
  );

  assign drain_data = rdata;

  // ---------------- status ----------------
  // A word read now (stage 1 -> 2) while an older update of the same word is
  // still between stage 3 and its write-back would read a stale value.
  always_comb begin
    conflict = 1'b0;
    for (int i = 0; i <= NDLY; i++)
      if (s1_v && wb_v[i] && wb_word[i] == s1_row[AW:1]) conflict = 1'b1;
    idle = !s1_v && !s2_v;
    for (int i = 1; i <= NDLY; i++)
      if (wb_v[i]) idle = 1'b0;
  end

  initial assert (ACC_LAT >= 2) else $error("ACC_LAT must be at least 2");

  // Modes are exclusive: accumulation, clearing and draining never overlap.
  a_modes: assert property (@(posedge clk) disable iff (!rst_n)
                            !(clr_busy && (wb_v[NDLY] || drain_rd)) && !(drain_rd && s1_v));
endmodule
