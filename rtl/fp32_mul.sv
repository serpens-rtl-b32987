// fp32_mul -- combinational IEEE-754 single-precision multiplier.
//
// Used by every PE (value * x) and by CompY (alpha * Ax, beta * y). The
// 24x24-bit significand product is normalised by at most one position and
// rounded to nearest, ties to even. Subnormal inputs and results are flushed
// to signed zero; an infinity operand gives infinity, a NaN operand or
// 0 * inf gives the quiet NaN 0x7FC00000. The paper only states that SpMV is
// done in single precision on DSP blocks; the rounding and the flush-to-zero
// policy are this implementation's choice. Interface: a, b in, y out, no
// clock; callers add pipeline registers around it.
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [22:0] ma, mb;
  logic [47:0] p;
  logic [23:0] mant;          // 1.xxx before rounding (bit 23 = hidden one)
  logic        g, st, inc;
  logic [24:0] mr;            // rounded significand with carry
  logic signed [10:0] e;

  always_comb begin
    {sa, ea, ma} = a;
    {sb, eb, mb} = b;
    sy   = sa ^ sb;
    p    = {1'b1, ma} * {1'b1, mb};
    e    = 11'($signed({3'b000, ea}) + $signed({3'b000, eb}) - 11'sd127);
    if (p[47]) begin
      mant = p[47:24];
      g    = p[23];
      st   = |p[22:0];
      e    = e + 11'sd1;
    end else begin
      mant = p[46:23];
      g    = p[22];
      st   = |p[21:0];
    end
    inc = g & (st | mant[0]);
    mr  = {1'b0, mant} + {24'd0, inc};
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end

    if ((ea == 8'hFF && ma != 0) || (eb == 8'hFF && mb != 0))
      y = 32'h7FC0_0000;                                  // NaN in
    else if ((ea == 8'hFF && eb == 8'd0) || (eb == 8'hFF && ea == 8'd0))
      y = 32'h7FC0_0000;                                  // 0 * inf
    else if (ea == 8'hFF || eb == 8'hFF)
      y = {sy, 8'hFF, 23'd0};                             // inf
    else if (ea == 8'd0 || eb == 8'd0)
      y = {sy, 31'd0};                                    // zero / FTZ
    else if (e >= 11'sd255)
      y = {sy, 8'hFF, 23'd0};                             // overflow
    else if (e <= 11'sd0)
      y = {sy, 31'd0};                                    // underflow, FTZ
    else
      y = {sy, e[7:0], mr[22:0]};
  end
endmodule
