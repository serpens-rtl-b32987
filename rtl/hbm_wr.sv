// hbm_wr -- streaming write engine for one HBM channel (WrY).
//
// After `start` it writes the next `num_beats` beats of its input stream to
// consecutive 512-bit beat addresses from `base`, one per cycle when the
// memory accepts, and pulses `done` after the last one is accepted. The
// stream is only accepted while a transfer is active, so a producer that runs
// ahead is held off. Memory side: wr_req.valid/addr/data with wr_ready
// (address and data travel together). The paper gives the function (512-bit
// sequential streaming writes); the port format is an assumption.
// wr_req.data is the input beat wired straight through: the writer adds
// only the addressing and the flow control, no storage.
module hbm_wr
  import serpens_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base,
  input  logic [31:0]       num_beats,
  output logic              busy,
  output logic              done,
  // stream side
  input  logic              in_valid,
  output logic              in_ready,
  input  beat_t             in_data,
  // memory side
  output wr_req_t           wr_req,
  input  logic              wr_ready
);
  logic [ADDR_W-1:0] addr;
  logic [31:0]       left;

  assign wr_req.valid = busy && in_valid;
  assign wr_req.addr  = addr;
  assign wr_req.data  = in_data;
  assign in_ready     = busy && wr_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      addr <= '0;
      left <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= (num_beats != 0);
        done <= (num_beats == 0);
        addr <= base;
        left <= num_beats;
      end else if (wr_req.valid && wr_ready) begin
        addr <= addr + 1'b1;
        left <= left - 1'b1;
        if (left == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  a_wr_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                wr_req.valid && !wr_ready |=> wr_req.valid && $stable(wr_req.addr)
                                && $stable(wr_req.data));
endmodule
