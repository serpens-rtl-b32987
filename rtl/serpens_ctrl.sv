// serpens_ctrl -- job sequencer: the Serpens processing order.
//
// x is split into segments of W columns. For one SpMV the controller
//   1. starts all stream engines (RdX for ceil(K/16) beats, each RdA for its
//      stream, RdY and WrY for ceil(M/16) beats) and has every PE zero the
//      URAM words the job uses (ceil(ceil(M/16)/HA) words per PE);
//   2. for each segment s: moves the segment's ceil(cols_s/16) x beats from
//      RdX into the PE-group chain, waits HA cycles for the chain to reach
//      the last group, then pulses seg_start and waits until every group has
//      consumed its instruction and element beats and emptied its pipeline;
//   3. starts the 8 arbiters for ceil(M/16) words each, so CompY merges the
//      accumulated A*x with y and WrY writes the result, and finishes when
//      WrY has written the last beat.
// `cycles` counts the clock cycles of the last job (start to done), the
// figure the paper's model (M+K)/16 + NNZ/(8*HA) estimates. The order
// (segment load, stream A, accumulate on chip, y last) is the paper's;
// the clear pass and the exact handshakes are this implementation's.
// x_beats and y_beats are 32-bit counts of 16-element beats, so their top
// four bits are always zero; they keep the width of the engines' counters.
module serpens_ctrl
  import serpens_pkg::*;
#(
  parameter int unsigned HA = 16,
  parameter int unsigned W  = 8192,
  parameter int unsigned AW = 14
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [31:0]   m_rows,
  input  logic [31:0]   k_cols,
  output logic          busy,
  output logic          done,
  output logic [31:0]   cycles,
  // stream engine starts
  output logic          eng_start,       // RdX, RdA*, RdY, WrY
  output logic [31:0]   x_beats,
  output logic [31:0]   y_beats,
  input  logic          wy_done,
  // clear
  output logic          clr_start,
  output logic [AW:0]   clr_words,
  input  logic          clr_busy,
  // x chain head
  input  logic          rdx_valid,
  output logic          rdx_ready,
  output logic          xh_valid,
  output logic [$clog2(W/16)-1:0] xh_row,
  // segments
  output logic          seg_start,
  input  logic          seg_done_all,
  // output phase
  output logic          arb_start
);
  typedef enum logic [2:0] {C_IDLE, C_CLEAR, C_LOADX, C_XWAIT, C_COMP, C_YOUT} cstate_t;
  cstate_t     st;
  logic [31:0] seg, nseg, seg_beats, xcnt, cols_left;
  logic [15:0] wcnt;
  logic        armed;   // skips the first cycle after a start pulse

  assign x_beats   = (k_cols + 32'd15) >> 4;
  assign y_beats   = (m_rows + 32'd15) >> 4;
  assign nseg      = (k_cols + W - 1) / W;
  assign clr_words = (AW+1)'((y_beats + HA - 1) / HA);
  assign seg_beats = (((cols_left > W) ? W : cols_left) + 32'd15) >> 4;

  assign rdx_ready = (st == C_LOADX) && (xcnt < seg_beats);
  assign xh_valid  = rdx_valid && rdx_ready;
  assign xh_row    = xcnt[$clog2(W/16)-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= C_IDLE;
      busy      <= 1'b0;
      done      <= 1'b0;
      cycles    <= '0;
      eng_start <= 1'b0;
      clr_start <= 1'b0;
      seg_start <= 1'b0;
      arb_start <= 1'b0;
      seg       <= '0;
      xcnt      <= '0;
      wcnt      <= '0;
      cols_left <= '0;
      armed     <= 1'b0;
    end else begin
      done      <= 1'b0;
      eng_start <= 1'b0;
      clr_start <= 1'b0;
      seg_start <= 1'b0;
      arb_start <= 1'b0;
      armed     <= 1'b1;
      if (busy) cycles <= cycles + 1;
      unique case (st)
        C_IDLE: if (start) begin
          busy      <= 1'b1;
          cycles    <= 32'd1;
          eng_start <= 1'b1;
          clr_start <= 1'b1;
          seg       <= '0;
          xcnt      <= '0;
          cols_left <= k_cols;
          armed     <= 1'b0;
          st        <= C_CLEAR;
        end
        C_CLEAR: if (armed && !clr_busy) st <= C_LOADX;
        C_LOADX: begin
          if (xh_valid) xcnt <= xcnt + 1;
          if (xcnt == seg_beats) begin
            wcnt <= '0;
            st   <= C_XWAIT;
          end
        end
        C_XWAIT: begin
          wcnt <= wcnt + 1'b1;
          if (32'(wcnt) >= HA) begin
            seg_start <= 1'b1;
            armed     <= 1'b0;
            st        <= C_COMP;
          end
        end
        C_COMP: if (armed && seg_done_all) begin
          xcnt      <= '0;
          cols_left <= cols_left - ((cols_left > W) ? W : cols_left);
          seg       <= seg + 1;
          if (seg + 1 == nseg) begin
            arb_start <= 1'b1;
            st        <= C_YOUT;
          end else begin
            st <= C_LOADX;
          end
        end
        C_YOUT: if (wy_done) begin
          busy <= 1'b0;
          done <= 1'b1;
          st   <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
