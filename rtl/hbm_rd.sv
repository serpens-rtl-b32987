// hbm_rd -- streaming read engine for one HBM channel (RdA, RdX, RdY).
//
// After `start` it reads `num_beats` consecutive 512-bit beats beginning at
// beat address `base` and presents them, in order, on a valid/ready stream.
// All Serpens off-chip traffic is sequential, so the engine only counts
// addresses. Requests are issued back to back as long as the words already
// requested fit in the local FIFO (credit-based), which hides the memory
// latency and lets the consumer stall without ever refusing a response.
// `done` pulses when the last beat has left the stream.
// Memory side: rd_req.valid/addr with rd_req_ready (address handshake),
// rd_resp_valid/rd_resp_data (in-order data, always accepted).
// The paper gives the function (512-bit sequential streaming, one module per
// channel); the request/response port and the FIFO depth are assumptions.
module hbm_rd
  import serpens_pkg::*;
#(
  parameter int unsigned FIFO_D = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base,
  input  logic [31:0]       num_beats,
  output logic              busy,
  output logic              done,
  // memory side
  output rd_req_t           rd_req,
  input  logic              rd_req_ready,
  input  logic              rd_resp_valid,
  input  beat_t             rd_resp_data,
  // stream side
  output logic              out_valid,
  input  logic              out_ready,
  output beat_t             out_data
);
  localparam int unsigned CW = $clog2(FIFO_D + 1);

  logic [ADDR_W-1:0] addr;
  logic [31:0]       req_left, out_left;
  logic [CW-1:0]     credits_used;   // words in flight + words in FIFO
  logic              req_fire, out_fire;

  beat_t             fifo [FIFO_D];
  logic [$clog2(FIFO_D)-1:0] wp, rp;
  logic [CW-1:0]     count;

  assign rd_req.valid = busy && (req_left != 0) && (credits_used < CW'(FIFO_D));
  assign rd_req.addr  = addr;
  assign req_fire     = rd_req.valid && rd_req_ready;
  assign out_valid    = (count != 0);
  assign out_data     = fifo[rp];
  assign out_fire     = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy         <= 1'b0;
      done         <= 1'b0;
      addr         <= '0;
      req_left     <= '0;
      out_left     <= '0;
      credits_used <= '0;
      wp           <= '0;
      rp           <= '0;
      count        <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy     <= (num_beats != 0);
        done     <= (num_beats == 0);
        addr     <= base;
        req_left <= num_beats;
        out_left <= num_beats;
      end else begin
        if (req_fire) begin
          addr     <= addr + 1'b1;
          req_left <= req_left - 1'b1;
        end
        if (out_fire) begin
          out_left <= out_left - 1'b1;
          if (out_left == 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
      credits_used <= credits_used + CW'(req_fire) - CW'(out_fire);
      if (rd_resp_valid) wp <= (32'(wp) == FIFO_D - 1) ? '0 : wp + 1'b1;
      if (out_fire)      rp <= (32'(rp) == FIFO_D - 1) ? '0 : rp + 1'b1;
      count <= count + CW'(rd_resp_valid) - CW'(out_fire);
    end
  end

  always_ff @(posedge clk)
    if (rd_resp_valid) fifo[wp] <= rd_resp_data;

  // A response can only arrive for a request that holds a credit.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  rd_resp_valid |-> count < CW'(FIFO_D));
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 rd_req.valid && !rd_req_ready |=> rd_req.valid && $stable(rd_req.addr));
endmodule
