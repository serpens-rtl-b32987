// pe_group -- the eight PEs fed by one sparse-matrix HBM channel.
//
// Memory-centric organisation: every PE is bound to one HBM channel, so no
// PE ever reaches across channels. Each 512-bit beat of the channel's stream
// carries eight non-zeros, lane i going to PE i, so the group consumes one
// beat per cycle. Four copies of the x segment (xbuf_bram) each serve two
// neighbouring PEs through their two ports. The x segment reaches the group
// over a chain: a beat arriving on x_in is written into all four copies and
// forwarded, one cycle later, on x_out to the next group.
//
// Per segment the controller pulses seg_start. The group then expects an
// instruction beat whose lane-0 low 32 bits give the number N of element
// beats for this segment in this channel, accepts those N beats (one per
// cycle while a_valid), waits for the PE pipelines to empty and raises
// seg_done until the next seg_start. clr_* and drain_* are passed to the
// PEs (see spmv_pe). The chain, the 8-PE / 4-copy sharing and the lane-to-PE
// dispatch follow the paper; the instruction-beat format and the handshake
// are this implementation's choice.
module pe_group
  import serpens_pkg::*;
#(
  parameter int unsigned W       = 8192,
  parameter int unsigned U       = 3,
  parameter int unsigned D       = 4096,
  parameter int unsigned ACC_LAT = 2,
  localparam int unsigned AW     = $clog2(U * D),
  localparam int unsigned XRW    = $clog2(W / 16)
) (
  input  logic            clk,
  input  logic            rst_n,
  // x chain
  input  logic            x_in_valid,
  input  logic [XRW-1:0]  x_in_row,
  input  beat_t           x_in_data,
  output logic            x_out_valid,
  output logic [XRW-1:0]  x_out_row,
  output beat_t           x_out_data,
  // sparse stream of this channel
  input  logic            a_valid,
  output logic            a_ready,
  input  beat_t           a_data,
  // segment control
  input  logic            seg_start,
  output logic            seg_done,
  // clear
  input  logic            clr_start,
  input  logic [AW:0]     clr_words,
  output logic            clr_busy,
  // drain (one port per PE)
  input  logic [PES_PER_CH-1:0]  drain_rd,
  input  logic [AW-1:0]          drain_addr [PES_PER_CH],
  output logic [63:0]            drain_data [PES_PER_CH],
  // status
  output logic            conflict,
  output logic            bubble      // a bubble slot was consumed this cycle
);
  // ---------------- x chain stage ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) x_out_valid <= 1'b0;
    else        x_out_valid <= x_in_valid;
  end
  always_ff @(posedge clk) begin
    x_out_row  <= x_in_row;
    x_out_data <= x_in_data;
  end

  // ---------------- segment FSM ----------------
  typedef enum logic [2:0] {S_IDLE, S_HDR, S_STREAM, S_FLUSH, S_DONE} state_t;
  state_t      state;
  logic [31:0] left;
  logic        pes_idle;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      left  <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: if (seg_start) state <= S_HDR;
        S_HDR: if (a_valid) begin
          left  <= a_data[INSTR_W-1:0];
          state <= (a_data[INSTR_W-1:0] == 0) ? S_FLUSH : S_STREAM;
        end
        S_STREAM: if (a_valid) begin
          left <= left - 1;
          if (left == 1) state <= S_FLUSH;
        end
        S_FLUSH: if (pes_idle) state <= S_DONE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign a_ready  = (state == S_HDR) || (state == S_STREAM);
  assign seg_done = (state == S_DONE);

  logic elem_fire;
  assign elem_fire = (state == S_STREAM) && a_valid;

  // ---------------- PEs and x copies ----------------
  logic [$clog2(W)-1:0] x_raddr [PES_PER_CH];
  f32_t                 x_rdata [PES_PER_CH];
  logic [PES_PER_CH-1:0] pe_idle, pe_conf, pe_clr, pe_bub;

  for (genvar k = 0; k < PES_PER_CH / 2; k++) begin : g_xbuf
    xbuf_bram #(.W(W)) u_xbuf (
      .clk,
      .a_we   (x_in_valid),
      .a_wrow (x_in_row),
      .a_wdata(x_in_data),
      .a_raddr(x_raddr[2*k]),
      .a_rdata(x_rdata[2*k]),
      .b_raddr(x_raddr[2*k+1]),
      .b_rdata(x_rdata[2*k+1])
    );
  end

  for (genvar p = 0; p < PES_PER_CH; p++) begin : g_pe
    nz_t lane;
    assign lane      = nz_t'(a_data[NZ_W*p +: NZ_W]);
    assign pe_bub[p] = elem_fire && ({lane.row, lane.col} == BUBBLE_IDX);
    spmv_pe #(.W(W), .U(U), .D(D), .ACC_LAT(ACC_LAT)) u_pe (
      .clk, .rst_n,
      .nz_valid  (elem_fire),
      .nz        (lane),
      .x_raddr   (x_raddr[p]),
      .x_rdata   (x_rdata[p]),
      .clr_start,
      .clr_words,
      .clr_busy  (pe_clr[p]),
      .drain_rd  (drain_rd[p]),
      .drain_addr(drain_addr[p]),
      .drain_data(drain_data[p]),
      .idle      (pe_idle[p]),
      .conflict  (pe_conf[p])
    );
  end

  assign pes_idle = &pe_idle;
  assign clr_busy = |pe_clr;
  assign conflict = |pe_conf;
  assign bubble   = |pe_bub;

  // The x segment is only rewritten while no element is being processed.
  a_x_quiet: assert property (@(posedge clk) disable iff (!rst_n)
                              x_in_valid |-> (state == S_IDLE || state == S_DONE));
endmodule
