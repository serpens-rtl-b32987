// fp32_add -- combinational IEEE-754 single-precision adder.
//
// The accumulation step of every PE (URAM partial sum + product) and the
// final alpha*Ax + beta*y sum in CompY. The operand of larger magnitude is
// kept, the other is aligned with guard, round and sticky bits, the
// significands are added or subtracted, the result is renormalised with a
// leading-zero count and rounded to nearest, ties to even. Subnormals are
// flushed to zero, exact cancellation gives +0, infinities and NaNs are
// propagated (inf - inf gives 0x7FC00000). The paper gives only that the
// accumulation runs on a pipelined DSP of latency T; this datapath and its
// rounding policy are this implementation's choice. No clock: the PE
// registers its output to build the T-cycle accumulation loop.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [22:0] ma, mb;
  logic [26:0] fl, fs, fs_sh;   // 1.m followed by guard, round, sticky
  logic [27:0] sum;
  logic [7:0]  d;
  logic        st;
  logic [4:0]  lz;
  logic signed [10:0] e;
  logic        inc;
  logic [24:0] mr;
  logic        a_zero, b_zero;

  always_comb begin
    {sa, ea, ma} = a;
    {sb, eb, mb} = b;
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    // order by magnitude
    if ({ea, ma} >= {eb, mb}) begin
      sl = sa; el = ea; fl = {1'b1, ma, 3'b000};
      ss = sb; es = eb; fs = {1'b1, mb, 3'b000};
    end else begin
      sl = sb; el = eb; fl = {1'b1, mb, 3'b000};
      ss = sa; es = ea; fs = {1'b1, ma, 3'b000};
    end
    d  = el - es;
    st = 1'b0;
    // align the smaller operand, folding lost bits into the sticky bit
    if (d >= 8'd27) begin
      fs_sh = {26'd0, 1'b1};
    end else begin
      fs_sh = fs >> d;
      st    = |(fs & ((27'd1 << d) - 27'd1));
      fs_sh[0] = fs_sh[0] | st;
    end
    if (sl == ss) sum = {1'b0, fl} + {1'b0, fs_sh};
    else          sum = {1'b0, fl} - {1'b0, fs_sh};
    e = $signed({3'b000, el});
    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      e   = e + 11'sd1;
    end
    // leading zeros of sum[26:0]
    lz = 5'd0;
    for (int i = 0; i <= 26; i++)
      if (sum[i]) lz = 5'(26 - i);
    sum = sum << lz;
    e   = e - 11'($signed({6'd0, lz}));
    inc = sum[2] & (sum[1] | sum[0] | sum[3]);
    mr  = {1'b0, sum[26:3]} + {24'd0, inc};
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end

    if ((ea == 8'hFF && ma != 0) || (eb == 8'hFF && mb != 0))
      y = 32'h7FC0_0000;
    else if (ea == 8'hFF && eb == 8'hFF && sa != sb)
      y = 32'h7FC0_0000;
    else if (ea == 8'hFF)
      y = a;
    else if (eb == 8'hFF)
      y = b;
    else if (a_zero && b_zero)
      y = {sa & sb, 31'd0};
    else if (a_zero)
      y = b;
    else if (b_zero)
      y = a;
    else if (sum[26:0] == 27'd0)
      y = 32'd0;                                  // exact cancellation
    else if (e >= 11'sd255)
      y = {sl, 8'hFF, 23'd0};
    else if (e <= 11'sd0)
      y = {sl, 31'd0};
    else
      y = {sl, e[7:0], mr[22:0]};
  end
endmodule
