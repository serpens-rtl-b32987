// hbm_model -- behavioural model of one HBM pseudo-channel, for simulation.
//
// Not synthesizable. Holds beats in an associative array (unwritten beats
// read as zero). Read requests are accepted when rd_req_ready is high and
// answered in order LAT cycles later; writes are accepted when wr_ready is
// high. With stall_pct > 0 the two ready signals drop at random in that
// percentage of cycles, to exercise back-pressure.
module hbm_model
  import serpens_pkg::*;
#(
  parameter int LAT = 8
) (
  input  logic    clk,
  input  logic    rst_n,
  input  int      stall_pct,
  input  rd_req_t rd_req,
  output logic    rd_req_ready,
  output logic    rd_resp_valid,
  output beat_t   rd_resp_data,
  input  wr_req_t wr_req,
  output logic    wr_ready
);
  beat_t mem [int unsigned];
  longint cyc = 0;
  typedef struct { longint t; beat_t d; } pend_t;
  pend_t pend[$];

  function automatic beat_t rd(int unsigned a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      rd_req_ready  <= 1'b0;
      wr_ready      <= 1'b0;
      rd_resp_valid <= 1'b0;
      pend.delete();
    end else begin
      if (rd_req.valid && rd_req_ready) pend.push_back('{cyc + LAT, rd(rd_req.addr)});
      if (wr_req.valid && wr_ready) mem[wr_req.addr] = wr_req.data;
      rd_req_ready <= ($urandom % 100) >= stall_pct;
      wr_ready     <= ($urandom % 100) >= stall_pct;
      if (pend.size() > 0 && pend[0].t <= cyc) begin
        rd_resp_valid <= 1'b1;
        rd_resp_data  <= pend[0].d;
        void'(pend.pop_front());
      end else begin
        rd_resp_valid <= 1'b0;
      end
    end
  end
endmodule
