// comp_y -- final combination y_out = alpha * (A x) + beta * y_in.
//
// One output beat (16 FP32 rows) is formed from one 64-bit word of each of
// the 8 arbiters (arbiter a supplies rows 2a and 2a+1 of the beat, low half
// first) and one 512-bit beat of the input y stream. Sixteen lanes work in
// parallel in a two-stage pipeline: stage 1 registers alpha*Ax and beta*y,
// stage 2 registers their sum. A beat is taken only when all nine inputs
// are valid and the pipeline can move, so it runs at one beat per cycle and
// stalls cleanly on back-pressure from the write channel (latency 2).
// The function is the paper's; the pipelining and the join are this
// implementation's choice.
module comp_y
  import serpens_pkg::*;
#(
  parameter int unsigned NARB = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  f32_t              alpha,
  input  f32_t              beta,
  // Ax words from the arbiters
  input  logic [NARB-1:0]   ax_valid,
  output logic [NARB-1:0]   ax_ready,
  input  logic [63:0]       ax_data [NARB],
  // y input stream
  input  logic              y_valid,
  output logic              y_ready,
  input  beat_t             y_data,
  // y output stream
  output logic              out_valid,
  input  logic              out_ready,
  output beat_t             out_data
);
  localparam int unsigned L = FLT_PER_BEAT;

  logic  s1_v, s2_v, s1_en, s2_en, fire;
  f32_t  pa [L], pb [L], sum [L];
  f32_t  s1_a [L], s1_b [L];
  beat_t s2_y;

  assign s2_en = !s2_v || out_ready;
  assign s1_en = !s1_v || s2_en;
  assign fire  = (&ax_valid) && y_valid && s1_en;
  assign ax_ready = {NARB{fire}};
  assign y_ready  = fire;

  for (genvar l = 0; l < L; l++) begin : g_lane
    fp32_mul u_ma (.a(alpha), .b(ax_data[l/2][32*(l%2) +: 32]), .y(pa[l]));
    fp32_mul u_mb (.a(beta),  .b(y_data[32*l +: 32]),           .y(pb[l]));
    fp32_add u_ad (.a(s1_a[l]), .b(s1_b[l]),                    .y(sum[l]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0;
      s2_v <= 1'b0;
    end else begin
      if (s1_en) s1_v <= fire;
      if (s2_en) s2_v <= s1_v;
    end
  end

  always_ff @(posedge clk) begin
    if (s1_en && fire) begin
      s1_a <= pa;
      s1_b <= pb;
    end
    if (s2_en && s1_v)
      for (int l = 0; l < L; l++) s2_y[32*l +: 32] <= sum[l];
  end

  assign out_valid = s2_v;
  assign out_data  = s2_y;

  initial assert (2 * NARB == L) else $error("comp_y needs 8 arbiters of 2 rows each");
endmodule
