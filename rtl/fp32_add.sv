// fp32_add: combinational IEEE-754 single-precision adder, one SIMD lane.
//
// The operands are ordered by magnitude, the smaller significand is aligned
// with guard, round and sticky bits, added or subtracted, normalised and
// rounded to nearest, ties to even. Subnormal inputs and results are flushed
// to zero, overflow gives infinity, NaN and inf-inf give 0x7fc00000. An exact
// zero sum is +0. Purely combinational. Single precision follows the paper;
// the special-value conventions are this design's choice.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [22:0] ma, mb;
  logic [26:0] ml, ms, ms_sh;   // {hidden, 23 fraction, guard, round, sticky}
  logic [27:0] sum;
  logic [7:0]  d;
  logic [4:0]  lz;
  logic        found;
  logic signed [10:0] exp;
  logic [24:0] mant_r;
  logic        a_zero, b_zero;

  always_comb begin
    {sa, ea, ma} = a;
    {sb, eb, mb} = b;
    lz    = 5'd0;
    found = 1'b0;
    a_zero = (ea == 8'h00);
    b_zero = (eb == 8'h00);
    // order by magnitude
    if ({ea, ma} >= {eb, mb}) begin
      sl = sa; el = ea; ml = {1'b1, ma, 3'b000};
      ss = sb; es = eb; ms = {1'b1, mb, 3'b000};
    end else begin
      sl = sb; el = eb; ml = {1'b1, mb, 3'b000};
      ss = sa; es = ea; ms = {1'b1, ma, 3'b000};
    end
    d = el - es;
    if (d >= 8'd27)
      ms_sh = 27'd1;                          // only sticky survives
    else
      ms_sh = (ms >> d) | 27'(((ms & ((27'd1 << d) - 27'd1)) != 27'd0));
    if (sl == ss) sum = {1'b0, ml} + {1'b0, ms_sh};
    else          sum = {1'b0, ml} - {1'b0, ms_sh};
    exp = 11'(signed'({3'b000, el}));
    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      exp = exp + 11'sd1;
    end else begin
      for (int i = 26; i >= 0; i--) begin
        if (!found && sum[i]) begin
          found = 1'b1;
          lz = 5'(26 - i);
        end
      end
      sum = sum << lz;
      exp = exp - 11'(lz);
    end
    mant_r = {1'b0, sum[26:3]} + 25'(sum[2] && (sum[1] || sum[0] || sum[3]));
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp    = exp + 11'sd1;
    end

    if ((ea == 8'hff && ma != 0) || (eb == 8'hff && mb != 0) ||
        (ea == 8'hff && eb == 8'hff && sa != sb))
      y = 32'h7fc0_0000;
    else if (ea == 8'hff)
      y = a;
    else if (eb == 8'hff)
      y = b;
    else if (a_zero && b_zero)
      y = {sa & sb, 31'd0};
    else if (a_zero)
      y = b;
    else if (b_zero)
      y = a;
    else if (sum[27:3] == 25'd0)
      y = 32'd0;
    else if (exp >= 11'sd255)
      y = {sl, 8'hff, 23'd0};
    else if (exp <= 11'sd0)
      y = {sl, 31'd0};
    else
      y = {sl, exp[7:0], mant_r[22:0]};
  end
endmodule
