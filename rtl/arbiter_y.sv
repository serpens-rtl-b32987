// arbiter_y -- collects accumulated results from NPE PEs for CompY.
//
// In the output phase each y beat (16 rows) takes one coalesced URAM word
// (two rows) from each of the 8 arbiters. Arbiter a serves the PEs a*NPE ..
// a*NPE+NPE-1 (NPE = 16 for the 16-channel design: two PE groups) and
// visits them in a fixed rotation: output word b comes from PE b mod NPE,
// word address b div NPE. Hence global row r lives in PE
// ((r mod 16) div 2) * NPE + ((r div 16) mod NPE), word (r div 16) div NPE,
// half r mod 2; the host encodes rows with this map. Reads are issued only
// when the 4-entry output FIFO has room for them, so CompY and the write
// channel may stall freely; one word per cycle when nothing stalls.
// Interface: start with num_words (= number of y beats); drain_rd one-hot +
// drain_addr per PE, drain_data back one cycle later; output valid/ready.
// That one arbiter picks results from 16 PEs is the paper's; the fixed
// rotation and the row map are this implementation's choice.
module arbiter_y #(
  parameter int unsigned NPE = 16,
  parameter int unsigned AW  = 14
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [31:0]     num_words,
  output logic            busy,
  // PE read ports
  output logic [NPE-1:0]  drain_rd,
  output logic [AW-1:0]   drain_addr [NPE],
  input  logic [63:0]     drain_data [NPE],
  // result stream
  output logic            out_valid,
  input  logic            out_ready,
  output logic [63:0]     out_data
);
  localparam int unsigned FD = 4;
  localparam int unsigned PW = (NPE > 1) ? $clog2(NPE) : 1;

  logic [31:0]   issued;
  logic [PW-1:0] sel, sel_q;
  logic [AW-1:0] word;
  logic          rd, rd_q;
  logic [2:0]    count;
  logic [63:0]   fifo [FD];
  logic [1:0]    wp, rp;
  logic          out_fire;

  assign rd       = busy && (issued != num_words) && (32'(count) + 32'(rd_q) < FD);
  assign out_valid = (count != 0);
  assign out_data  = fifo[rp];
  assign out_fire  = out_valid && out_ready;

  always_comb begin
    for (int i = 0; i < NPE; i++) begin
      drain_rd[i]   = rd && (sel == PW'(i));
      drain_addr[i] = word;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      issued <= '0;
      sel    <= '0;
      word   <= '0;
      rd_q   <= 1'b0;
      sel_q  <= '0;
      count  <= '0;
      wp     <= '0;
      rp     <= '0;
    end else begin
      rd_q  <= rd;
      sel_q <= sel;
      if (start && !busy) begin
        busy   <= 1'b1;
        issued <= '0;
        sel    <= '0;
        word   <= '0;
      end else begin
        if (rd) begin
          issued <= issued + 1;
          if (32'(sel) == NPE - 1) begin
            sel  <= '0;
            word <= word + 1'b1;
          end else begin
            sel <= sel + 1'b1;
          end
        end
        if (busy && issued == num_words && count == 0 && !rd_q) busy <= 1'b0;
      end
      if (rd_q)     wp <= wp + 1'b1;
      if (out_fire) rp <= rp + 1'b1;
      count <= count + 3'(rd_q) - 3'(out_fire);
    end
  end

  always_ff @(posedge clk)
    if (rd_q) fifo[wp] <= drain_data[sel_q];
endmodule
