// serpens_top -- Serpens SpMV accelerator, y = alpha * A * x + beta * y.
//
// HA HBM channels stream the sparse matrix A (16 in the main configuration,
// 19 channels in all): RdA engine c feeds PE group c (8 PEs). One channel
// streams x through RdX into a chain that visits the PE groups in order, one
// channel streams the input y (RdY) and one takes the result (WrY). The
// 8*HA PEs accumulate A*x on chip, x segment by x segment; afterwards 8
// arbiters, each serving HA PEs, hand two rows per cycle to CompY, which
// forms 16 output rows per cycle from them and from the input y.
//
// Host-prepared layout (beat = 512 bits, all buffers start at beat 0 of their
// channel):
//   x channel : ceil(K/16) beats, 16 FP32 values per beat, column order.
//   y channel : ceil(M/16) beats, same packing, row order.
//   A channel c, for each x segment: one instruction beat (lane 0, bits
//     [31:0] = number N of element beats), then N element beats of 8
//     non-zeros; lane p goes to PE p of group c. A non-zero is
//     {value[31:0], local_row[17:0], column_in_segment[13:0]}; an all-ones
//     index is an empty slot. a_beats[c] is the channel's total beat count.
//   Row r is owned by global PE ((r%16)/2)*HA + (r/16)%HA, i.e. group
//   PE/8, lane PE%8, local row 2*((r/16)/HA) + r%2.
//   Elements whose rows share a URAM word (local rows 2e, 2e+1) must be at
//   least ACC_LAT slots apart in a lane, otherwise conflict_seen is set.
// Job: pulse start with m_rows, k_cols, alpha, beta and a_beats held; done
// pulses when the last y beat is written; cycles gives the job length.
module serpens_top
  import serpens_pkg::*;
#(
  parameter int unsigned HA      = 16,     // HBM channels for A
  parameter int unsigned W       = 8192,   // x segment length
  parameter int unsigned U       = 3,      // URAMs per PE
  parameter int unsigned D       = 4096,   // words per URAM (72-bit mode)
  parameter int unsigned ACC_LAT = 2,      // accumulation distance T
  parameter int unsigned RD_FIFO = 16,     // beats buffered per read engine
  localparam int unsigned AW     = $clog2(U * D),
  localparam int unsigned NARB   = 8,
  localparam int unsigned NPE    = PES_PER_CH * HA
) (
  input  logic              clk,
  input  logic              rst_n,
  // job
  input  logic              start,
  input  logic [31:0]       m_rows,
  input  logic [31:0]       k_cols,
  input  f32_t              alpha,
  input  f32_t              beta,
  input  logic [31:0]       a_beats [HA],
  output logic              busy,
  output logic              done,
  output logic [31:0]       cycles,
  output logic              conflict_seen,
  // HBM channel: x
  output rd_req_t           x_rd_req,
  input  logic              x_rd_req_ready,
  input  logic              x_rd_resp_valid,
  input  beat_t             x_rd_resp_data,
  // HBM channels: A
  output rd_req_t           a_rd_req        [HA],
  input  logic              a_rd_req_ready  [HA],
  input  logic              a_rd_resp_valid [HA],
  input  beat_t             a_rd_resp_data  [HA],
  // HBM channel: y in
  output rd_req_t           y_rd_req,
  input  logic              y_rd_req_ready,
  input  logic              y_rd_resp_valid,
  input  beat_t             y_rd_resp_data,
  // HBM channel: y out
  output wr_req_t           y_wr_req,
  input  logic              y_wr_ready
);
  localparam int unsigned XRW = $clog2(W / 16);

  // ---------------- controller ----------------
  logic          eng_start, clr_start, clr_busy, seg_start, seg_done_all, arb_start;
  logic [31:0]   x_beats, y_beats;
  logic [AW:0]   clr_words;
  logic          wy_done;
  logic          rdx_valid, rdx_ready, xh_valid;
  logic [XRW-1:0] xh_row;
  beat_t         rdx_data;

  serpens_ctrl #(.HA(HA), .W(W), .AW(AW)) u_ctrl (
    .clk, .rst_n, .start, .m_rows, .k_cols, .busy, .done, .cycles,
    .eng_start, .x_beats, .y_beats, .wy_done,
    .clr_start, .clr_words, .clr_busy,
    .rdx_valid, .rdx_ready, .xh_valid, .xh_row,
    .seg_start, .seg_done_all, .arb_start
  );

  // ---------------- read engines ----------------
  logic unused_busy_x, unused_done_x, unused_busy_y, unused_done_y;

  hbm_rd #(.FIFO_D(RD_FIFO)) u_rdx (
    .clk, .rst_n, .start(eng_start), .base('0), .num_beats(x_beats),
    .busy(unused_busy_x), .done(unused_done_x),
    .rd_req(x_rd_req), .rd_req_ready(x_rd_req_ready),
    .rd_resp_valid(x_rd_resp_valid), .rd_resp_data(x_rd_resp_data),
    .out_valid(rdx_valid), .out_ready(rdx_ready), .out_data(rdx_data)
  );

  logic  y_valid, y_ready;
  beat_t y_data;

  hbm_rd #(.FIFO_D(RD_FIFO)) u_rdy (
    .clk, .rst_n, .start(eng_start), .base('0), .num_beats(y_beats),
    .busy(unused_busy_y), .done(unused_done_y),
    .rd_req(y_rd_req), .rd_req_ready(y_rd_req_ready),
    .rd_resp_valid(y_rd_resp_valid), .rd_resp_data(y_rd_resp_data),
    .out_valid(y_valid), .out_ready(y_ready), .out_data(y_data)
  );

  // ---------------- A channels and PE groups ----------------
  logic           chx_valid [HA+1];
  logic [XRW-1:0] chx_row   [HA+1];
  beat_t          chx_data  [HA+1];
  logic [HA-1:0]  g_done, g_clr, g_conf;

  logic           pe_drain_rd   [NPE];
  logic [AW-1:0]  pe_drain_addr [NPE];
  logic [63:0]    pe_drain_data [NPE];

  assign chx_valid[0] = xh_valid;
  assign chx_row[0]   = xh_row;
  assign chx_data[0]  = rdx_data;

  for (genvar c = 0; c < HA; c++) begin : g_ch
    logic  a_valid, a_ready;
    beat_t a_data;
    logic  unused_busy, unused_done;
    logic [PES_PER_CH-1:0] drd;
    logic [AW-1:0]         dad [PES_PER_CH];
    logic [63:0]           dda [PES_PER_CH];

    hbm_rd #(.FIFO_D(RD_FIFO)) u_rda (
      .clk, .rst_n, .start(eng_start), .base('0), .num_beats(a_beats[c]),
      .busy(unused_busy), .done(unused_done),
      .rd_req(a_rd_req[c]), .rd_req_ready(a_rd_req_ready[c]),
      .rd_resp_valid(a_rd_resp_valid[c]), .rd_resp_data(a_rd_resp_data[c]),
      .out_valid(a_valid), .out_ready(a_ready), .out_data(a_data)
    );

    pe_group #(.W(W), .U(U), .D(D), .ACC_LAT(ACC_LAT)) u_grp (
      .clk, .rst_n,
      .x_in_valid (chx_valid[c]),   .x_in_row (chx_row[c]),   .x_in_data (chx_data[c]),
      .x_out_valid(chx_valid[c+1]), .x_out_row(chx_row[c+1]), .x_out_data(chx_data[c+1]),
      .a_valid, .a_ready, .a_data,
      .seg_start, .seg_done(g_done[c]),
      .clr_start, .clr_words, .clr_busy(g_clr[c]),
      .drain_rd(drd), .drain_addr(dad), .drain_data(dda),
      .conflict(g_conf[c]), .bubble()
    );

    for (genvar p = 0; p < PES_PER_CH; p++) begin : g_pe
      assign drd[p] = pe_drain_rd[c*PES_PER_CH + p];
      assign dad[p] = pe_drain_addr[c*PES_PER_CH + p];
      assign pe_drain_data[c*PES_PER_CH + p] = dda[p];
    end
  end

  assign seg_done_all = &g_done;
  assign clr_busy     = |g_clr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                conflict_seen <= 1'b0;
    else if (start && !busy)   conflict_seen <= 1'b0;
    else if (|g_conf)          conflict_seen <= 1'b1;
  end

  // ---------------- arbiters ----------------
  logic [NARB-1:0] ax_valid, ax_ready;
  logic [63:0]     ax_data [NARB];

  for (genvar a = 0; a < NARB; a++) begin : g_arb
    logic [HA-1:0]  drd;
    logic [AW-1:0]  dad [HA];
    logic [63:0]    dda [HA];
    logic           unused_busy;

    arbiter_y #(.NPE(HA), .AW(AW)) u_arb (
      .clk, .rst_n, .start(arb_start), .num_words(y_beats), .busy(unused_busy),
      .drain_rd(drd), .drain_addr(dad), .drain_data(dda),
      .out_valid(ax_valid[a]), .out_ready(ax_ready[a]), .out_data(ax_data[a])
    );

    for (genvar j = 0; j < HA; j++) begin : g_pe
      assign pe_drain_rd[a*HA + j]   = drd[j];
      assign pe_drain_addr[a*HA + j] = dad[j];
      assign dda[j] = pe_drain_data[a*HA + j];
    end
  end

  // ---------------- CompY and WrY ----------------
  logic  cy_valid, cy_ready;
  beat_t cy_data;
  logic  unused_busy_w;

  comp_y #(.NARB(NARB)) u_compy (
    .clk, .rst_n, .alpha, .beta,
    .ax_valid, .ax_ready, .ax_data,
    .y_valid, .y_ready, .y_data,
    .out_valid(cy_valid), .out_ready(cy_ready), .out_data(cy_data)
  );

  hbm_wr u_wry (
    .clk, .rst_n, .start(eng_start), .base('0), .num_beats(y_beats),
    .busy(unused_busy_w), .done(wy_done),
    .in_valid(cy_valid), .in_ready(cy_ready), .in_data(cy_data),
    .wr_req(y_wr_req), .wr_ready(y_wr_ready)
  );
endmodule
